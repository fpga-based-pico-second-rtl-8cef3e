// filter_module_tb: self-checking test of the dual-threshold event filter.
//
// Runs many event slots, each followed by idle cycles, of these kinds:
// a low hit confirmed after 0..CONFIRM_WINDOW cycles (one event expected),
// confirmed one cycle too late (rejected), never confirmed (rejected), a
// high hit alone (ignored), and two low hits before the confirmation (the
// first rejected, the second kept). The expected event carries the low and
// high timestamps that were sent; it must appear exactly one cycle after the
// confirming hit. The rejected count is compared after every slot.
`timescale 1ps / 1ps
module filter_module_tb;
  import tdc_pkg::*;
  localparam int unsigned W = 2;   // CONFIRM_WINDOW

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       lo_valid = 1'b0, hi_valid = 1'b0;
  timestamp_t lo_time = '0, hi_time = '0;
  logic       ev_valid;
  event_t     ev;
  logic [CNT_W-1:0] n_rejected;
  int checks = 0, failures = 0;
  int cyc = 0;
  int exp_rej = 0;
  int kinds [5] = '{default: 0};

  filter_module #(.CONFIRM_WINDOW(W)) dut (.*);

  always #1250 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int due; event_t ev; } exp_t;
  exp_t q[$];

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (q.size() != 0 && q[0].due == cyc) begin
      automatic exp_t e = q.pop_front();
      if (!ev_valid || ev != e.ev) begin
        failures++;
        $display("FAIL: cycle %0d valid=%0b ev=%h expected %h", cyc, ev_valid, ev, e.ev);
      end
    end else if (ev_valid) begin
      failures++;
      $display("FAIL: unexpected event at cycle %0d", cyc);
    end
  end

  function automatic timestamp_t rnd_ts();
    return '{coarse: COARSE_W'($urandom), fine: FINE_W'($urandom % 257)};
  endfunction

  // one clock cycle of stimulus; returns the cycle in which it is applied
  task automatic step(logic lv, timestamp_t lt, logic hv, timestamp_t ht);
    @(posedge clk);
    #1;
    lo_valid = lv; lo_time = lt;
    hi_valid = hv; hi_time = ht;
  endtask

  task automatic idle(int n);
    for (int i = 0; i < n; i++) step(1'b0, rnd_ts(), 1'b0, rnd_ts());
  endtask

  task automatic check_rej();
    checks++;
    if (int'(n_rejected) != exp_rej) begin
      failures++;
      $display("FAIL: n_rejected=%0d expected %0d", n_rejected, exp_rej);
    end
  endtask

  initial begin
    timestamp_t a, b, c;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 400; k++) begin
      automatic int kind = $urandom % 5;
      automatic int d;
      a = rnd_ts(); b = rnd_ts(); c = rnd_ts();
      kinds[kind]++;
      case (kind)
        0: begin  // confirmed after d cycles
          d = $urandom % (W + 1);
          if (d == 0) begin
            step(1'b1, a, 1'b1, b);
          end else begin
            step(1'b1, a, 1'b0, c);
            idle(d - 1);
            step(1'b0, c, 1'b1, b);
          end
          q.push_back('{due: cyc + 1, ev: '{t_lo: a, t_hi: b}});
        end
        1: begin  // confirmation one cycle too late
          step(1'b1, a, 1'b0, c);
          idle(W);
          step(1'b0, c, 1'b1, b);
          exp_rej++;
        end
        2: begin  // never confirmed
          step(1'b1, a, 1'b0, c);
          exp_rej++;
        end
        3: begin  // high threshold alone
          step(1'b0, a, 1'b1, b);
        end
        default: begin  // a second low hit replaces the first
          step(1'b1, c, 1'b0, b);
          step(1'b1, a, 1'b0, c);
          step(1'b0, c, 1'b1, b);
          q.push_back('{due: cyc + 1, ev: '{t_lo: a, t_hi: b}});
          exp_rej++;
        end
      endcase
      idle(W + 3);
      check_rej();
    end
    checks++;
    if (q.size() != 0 || kinds[0] == 0 || kinds[4] == 0) begin
      failures++;
      $display("FAIL: %0d events missing or a case never ran", q.size());
    end
    $display("slots: confirmed %0d, late %0d, unconfirmed %0d, high only %0d, double low %0d",
             kinds[0], kinds[1], kinds[2], kinds[3], kinds[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
