// dtof_ctr_tb: coincidence-time-resolution runs of the two-chain readout.
//
// Reproduces the two measurements the readout was built for, at the level a
// logic simulation can: many particles, each seen by both chains, and the
// time difference of the two chains formed from the output timestamps as
// t = coarse*T_clk - fine*T_tap.
//   run 0  electronics test: one detector pulse split into both chains; the
//          chains' front edges get independent Gaussian jitter with
//          sigma = 5.6 ps / sqrt(2), so that the jitter alone would give a
//          5.6 ps RMS difference
//   run 1  beam test: two detectors, sigma = 15.0 ps / sqrt(2) per chain
// With equal taps of T_tap the TDC adds a uniform quantisation error of
// T_tap^2/12 variance per channel, so the expected RMS difference is
// sqrt(CTR^2 + 2*T_tap^2/12). The run passes if the measured RMS is within
// 12 % of that, the mean within 2 ps of zero, and every particle produced
// exactly one pair. Particles arrive at random phase to the clock.
`timescale 1ps / 1ps
module dtof_ctr_tb;
  import tdc_pkg::*;
  localparam real    TAP_PS = 12.0;   // default of the top
  localparam longint PERIOD = 2500;
  localparam int     N_EV   = 3000;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic [1:0]       hit_lo = '0, hit_hi = '0;
  logic             out_valid;
  coinc_t           out;
  logic [CNT_W-1:0] n_rejected [2];
  logic [CNT_W-1:0] n_single;

  dtof_tdc_top dut (.*);

  always #(PERIOD/2) clk = ~clk;

  int  checks = 0, failures = 0;
  int  n_pairs = 0;
  real sum = 0.0, sum2 = 0.0;

  function automatic real t_of(timestamp_t t);
    return real'(t.coarse) * real'(PERIOD) - real'(t.fine) * TAP_PS;
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    real d;
    d = t_of(out.a.t_lo) - t_of(out.b.t_lo);
    n_pairs++;
    sum  += d;
    sum2 += d * d;
  end

  // approximately Gaussian, unit variance: sum of 12 uniforms minus 6
  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 1000000) / 1000000.0;
    return s - 6.0;
  endfunction

  task automatic pulse(int c, real at_ps);
    fork begin
      #(at_ps);
      hit_lo[c] = 1'b1;
      #(100);
      hit_hi[c] = 1'b1;
      #(500);
      hit_lo[c] = 1'b0;
      hit_hi[c] = 1'b0;
    end join_none
  endtask

  task automatic run(string name, real ctr_ps);
    real sigma = ctr_ps / $sqrt(2.0);
    real mean, rms, expect_rms;
    n_pairs = 0; sum = 0.0; sum2 = 0.0;
    for (int k = 0; k < N_EV; k++) begin
      real base;
      @(posedge clk);
      base = 100.0 + real'($urandom % 2000);
      pulse(0, base + sigma * gauss());
      pulse(1, base + sigma * gauss());
      repeat (20) @(posedge clk);
    end
    mean       = sum / n_pairs;
    rms        = $sqrt(sum2 / n_pairs - mean * mean);
    expect_rms = $sqrt(ctr_ps * ctr_ps + 2.0 * TAP_PS * TAP_PS / 12.0);
    $display("%s: %0d pairs, mean %0.2f ps, RMS %0.2f ps (expected %0.2f ps)",
             name, n_pairs, mean, rms, expect_rms);
    checks += 3;
    if (n_pairs != N_EV) begin
      failures++;
      $display("FAIL: %0d pairs for %0d particles", n_pairs, N_EV);
    end
    if (mean > 2.0 || mean < -2.0) begin
      failures++;
      $display("FAIL: mean difference %0.2f ps", mean);
    end
    if (rms > 1.12 * expect_rms || rms < 0.88 * expect_rms) begin
      failures++;
      $display("FAIL: RMS %0.2f ps, expected %0.2f ps", rms, expect_rms);
    end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (10) @(posedge clk);
    run("electronics test (split signal)", 5.6);
    run("beam test (two detectors)", 15.0);
    checks++;
    if (n_rejected[0] != '0 || n_rejected[1] != '0 || n_single != '0) begin
      failures++;
      $display("FAIL: events lost: rejected %0d/%0d, single %0d",
               n_rejected[0], n_rejected[1], n_single);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * N_EV * 22 + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
