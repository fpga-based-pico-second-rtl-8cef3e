// ones_counter_encoder_tb: self-checking test of the ones-counter encoder.
//
// Feeds a new code on most cycles: clean thermometer codes of every length
// 0..TAPS, thermometer codes with bubbles near the edge, and random words.
// The expected count is $countones of the code, and each result must appear
// exactly two cycles after its code (checked with a cycle-stamped queue).
`timescale 1ps / 1ps
module ones_counter_encoder_tb;
  import tdc_pkg::*;
  localparam int unsigned TAPS = 256;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              in_valid = 1'b0;
  logic [TAPS-1:0]   code = '0;
  logic              out_valid;
  logic [FINE_W-1:0] count;
  int checks = 0, failures = 0;
  int cyc = 0;

  ones_counter_encoder #(.TAPS(TAPS)) dut (.*);

  always #1250 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int c; int n; } exp_t;
  exp_t q[$];

  // compare at the falling edge, after the outputs have settled
  always @(negedge clk) if (rst_n) begin
    if (q.size() != 0 && q[0].c + 2 == cyc) begin
      automatic exp_t e = q.pop_front();
      checks++;
      if (!out_valid || int'(count) != e.n) begin
        failures++;
        $display("FAIL: code of cycle %0d: valid=%0b count=%0d expected %0d",
                 e.c, out_valid, count, e.n);
      end
    end else begin
      checks++;
      if (out_valid) begin
        failures++;
        $display("FAIL: unexpected out_valid at cycle %0d (head %0d size %0d)", cyc, q.size() ? q[0].c : -1, q.size());
      end
    end
  end

  task automatic send(input logic [TAPS-1:0] c);
    @(negedge clk);
    code     = c;
    in_valid = 1'b1;
    q.push_back('{c: cyc, n: $countones(c)});
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 1'b0;
    code     = {TAPS{1'b1}};   // must not be counted
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // clean thermometer codes
    for (int n = 0; n <= TAPS; n++) send((TAPS)'(({TAPS{1'b1}} << (TAPS - n)) >> (TAPS - n)));
    idle();
    // thermometer codes with bubbles near the edge
    for (int k = 0; k < 200; k++) begin
      automatic int n = 4 + ($urandom % (TAPS - 8));
      automatic logic [TAPS-1:0] c = (TAPS)'(({TAPS{1'b1}} << (TAPS - n)) >> (TAPS - n));
      c[n - 1 - ($urandom % 3)] = 1'b0;
      c[n + ($urandom % 3)]     = 1'b1;
      send(c);
      if (k % 7 == 0) idle();
    end
    // random words
    for (int k = 0; k < 200; k++) send({8{$urandom}});
    idle();
    repeat (4) idle();
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
