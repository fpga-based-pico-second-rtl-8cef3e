// tdc_channel_tb: self-checking test of one timestamp TDC channel.
//
// A delay-line model feeds the channel, and the testbench drives the coarse
// time with its own cycle counter. Hits come at random times, at least seven
// clock periods apart; for each, the expected timestamp is worked out from
// the hit time alone: the first sampling edge at least one tap delay after
// the hit gives the coarse value, and the taps travelled by that edge give
// the fine value. The result must appear exactly three cycles after that
// edge. Extra hits sent 2.5 periods after a hit fall in the dead time and
// must produce nothing, and a comparator output held high for 10 ns, longer
// than the dead time, must give one timestamp only.
`timescale 1ps / 1ps
module tdc_channel_tb;
  import tdc_pkg::*;
  localparam int unsigned TAPS   = 256;
  localparam int unsigned TAP_PS = 12;
  localparam longint      PERIOD = 2500;
  localparam longint      FIRST  = PERIOD / 2;   // time of the first rising edge

  logic                clk = 1'b0;
  logic                rst_n = 1'b0;
  logic                hit = 1'b0;
  logic                clr;
  logic [TAPS-1:0]     taps;
  logic [COARSE_W-1:0] coarse = '0;
  logic                hit_valid;
  timestamp_t          hit_time;
  int checks = 0, failures = 0;
  int n_hits = 0, n_lost = 0, n_long = 0;

  tapped_delay_line #(.TAPS(TAPS), .TAP_PS(TAP_PS)) u_tdl (
    .clk(clk), .hit(hit), .clr(clr), .taps(taps));
  tdc_channel #(.TAPS(TAPS)) dut (
    .clk(clk), .rst_n(rst_n), .taps(taps), .coarse(coarse),
    .clr(clr), .hit_valid(hit_valid), .hit_time(hit_time));

  always #(PERIOD/2) clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1'b1;   // value after edge n is n+1

  typedef struct { longint due; timestamp_t t; } exp_t;
  exp_t q[$];

  // expected timestamp of a hit at time th
  function automatic exp_t expected(longint th);
    exp_t   e;
    longint n  = (th + TAP_PS - FIRST + PERIOD - 1) / PERIOD;  // first edge >= th + TAP_PS
    longint te = FIRST + n * PERIOD;
    longint f  = (te - th) / TAP_PS;
    e.t.coarse = COARSE_W'(n + 1);
    e.t.fine   = FINE_W'((f > TAPS) ? TAPS : f);
    e.due      = n + 1 + 3;   // coarse counter value when the output is checked
    return e;
  endfunction

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (q.size() != 0 && q[0].due == longint'(coarse)) begin
      automatic exp_t e = q.pop_front();
      if (!hit_valid || hit_time != e.t) begin
        failures++;
        $display("FAIL: valid=%0b time=%0d/%0d expected %0d/%0d", hit_valid,
                 hit_time.coarse, hit_time.fine, e.t.coarse, e.t.fine);
      end
    end else if (hit_valid) begin
      failures++;
      $display("FAIL: unexpected hit %0d/%0d at coarse %0d", hit_time.coarse,
               hit_time.fine, coarse);
    end
  end

  task automatic pulse(longint width);
    hit = 1'b1;
    #(width);
    hit = 1'b0;
  endtask

  initial begin
    longint th, off;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (6) @(posedge clk);
    for (int k = 0; k < 300; k++) begin
      @(posedge clk);
      off = 1 + longint'($urandom % (PERIOD - 2));
      #(off);
      th = $time;
      q.push_back(expected(th));
      n_hits++;
      fork pulse((k % 7 == 3) ? 10000 : 300 + longint'($urandom % 2000)); join_none
      if (k % 7 == 3) n_long++;
      if (k % 5 == 0) begin
        // a second hit inside the dead time
        #(PERIOD * 5 / 2);
        pulse(400);
        n_lost++;
      end
      repeat (7 + $urandom % 4) @(posedge clk);
    end
    repeat (8) @(posedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d hits never reported", q.size());
    end
    $display("hits %0d, hits in dead time %0d, long pulses %0d", n_hits, n_lost, n_long);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
