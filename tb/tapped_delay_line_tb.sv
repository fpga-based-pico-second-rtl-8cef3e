// tapped_delay_line_tb: self-checking test of the delay-line model.
//
// Drives hits at random times between clock edges, with short (0.4 ns) and
// long pulses, and checks every sampled code against the thermometer code
// expected from the hit time: n = min(TAPS, floor((t_edge - t_hit)/TAP_PS))
// ones from tap 0. After a clear it checks that the falling edge drains the
// line from tap 0 upwards and that a hit arriving while `clr` is high is
// ignored.
`timescale 1ps / 1ps
module tapped_delay_line_tb;
  localparam int unsigned TAPS   = 256;
  localparam int unsigned TAP_PS = 12;
  localparam longint      PERIOD = 2500;

  logic            clk = 1'b0;
  logic            hit = 1'b0;
  logic            clr = 1'b0;
  logic [TAPS-1:0] taps;
  int checks = 0, failures = 0;

  tapped_delay_line #(.TAPS(TAPS), .TAP_PS(TAP_PS)) dut (.*);

  always #(PERIOD/2) clk = ~clk;

  // ones at taps [lo, hi)
  function automatic logic [TAPS-1:0] band(longint lo, longint hi);
    logic [TAPS-1:0] v = '0;
    for (int i = 0; i < TAPS; i++) v[i] = (i >= lo) && (i < hi);
    return v;
  endfunction

  function automatic longint taps_passed(longint dt);
    longint n = (dt < 0) ? 0 : dt / TAP_PS;
    return (n > TAPS) ? TAPS : n;
  endfunction

  task automatic expect_taps(logic [TAPS-1:0] e, string what);
    checks++;
    if (taps !== e) begin
      failures++;
      $display("FAIL %s at %0t: got %0d ones (%h...), expected %0d ones",
               what, $time, $countones(taps), taps[15:0], $countones(e));
    end
  endtask

  initial begin
    longint t_hit, t_clr, te, width, off;
    repeat (3) @(posedge clk);
    for (int k = 0; k < 60; k++) begin
      // hit somewhere inside the next clock period, never on an edge
      @(posedge clk);
      off   = 5 + longint'($urandom % (PERIOD - 10));
      width = (k % 2 == 0) ? 400 : 3000;
      #(off);
      t_hit = $time;
      hit   = 1'b1;
      fork
        begin #(width); hit = 1'b0; end
      join_none
      // three sampling edges while the latch holds the edge
      for (int e = 0; e < 3; e++) begin
        @(posedge clk);
        te = $time;
        #1;
        expect_taps(band(0, taps_passed(te - t_hit)), "fill");
      end
      // clear: the latch is reset at the next edge, then the line drains
      @(negedge clk) clr = 1'b1;
      @(posedge clk);
      t_clr = $time;
      #1;
      expect_taps(band(0, taps_passed(t_clr - t_hit)), "clear edge");
      // a hit while clr is high must be ignored
      #(300);
      hit = 1'b1;
      #(300);
      hit = 1'b0;
      for (int e = 0; e < 2; e++) begin
        @(posedge clk);
        te = $time;
        #1;
        expect_taps(band(taps_passed(te - t_clr), taps_passed(te - t_hit)), "drain");
      end
      @(negedge clk) clr = 1'b0;
      @(posedge clk);
      #1;
      expect_taps('0, "idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
