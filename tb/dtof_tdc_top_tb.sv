// dtof_tdc_top_tb: end-to-end test of the two-chain DTOF TDC readout.
//
// The top runs with its default parameters. The testbench plays the four
// comparator outputs: for a detector pulse the low-threshold output rises
// first and the high-threshold output 20..400 ps later, as on a rising
// pulse; chain B sees the same particle up to 1 ns away from chain A.
// Event kinds, one every 20 clock cycles:
//   0  pulse in both chains                -> one coincidence pair
//   1  as 0, plus a second pulse in chain A 2.5 periods later, which falls
//      in the TDC dead time and must be lost
//   2  noise on chain A's low threshold    -> rejected by the filter
//   3  pulse in chain B only               -> dropped by the coincidence
//   4  pulses in both chains 8 cycles apart -> both dropped
// Every expected timestamp is computed from the pulse times: the coarse part
// is the index of the first clock edge at least one tap delay after the
// edge (counted from reset), the fine part the taps travelled by then. Each
// pair must carry all four timestamps and leave exactly five cycles after
// the last of its four sampling edges. Drop counters are compared at the
// end, and every mechanism must have occurred at least once.
`timescale 1ps / 1ps
module dtof_tdc_top_tb;
  import tdc_pkg::*;
  localparam longint TAPS   = 256;   // defaults of the top
  localparam longint TAP_PS = 12;
  localparam longint PERIOD = 2500;  // 400 MHz
  localparam longint FIRST  = PERIOD / 2;
  localparam int     N_EV   = 300;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic [1:0]       hit_lo = '0, hit_hi = '0;
  logic             out_valid;
  coinc_t           out;
  logic [CNT_W-1:0] n_rejected [2];
  logic [CNT_W-1:0] n_single;

  dtof_tdc_top dut (.*);

  always #(PERIOD/2) clk = ~clk;

  int checks = 0, failures = 0;
  longint n_rst;                 // index of the last edge with reset applied
  int exp_rej = 0, exp_single = 0;
  int seen [6] = '{default: 0};  // pairs, dead-time pulses, rejected, singles, late confirms, kinds-4
  string names [6] = '{"coincidence pairs", "dead-time pulses", "filter rejections",
                       "coincidence drops", "confirm in a later cycle", "out-of-window pairs"};

  typedef struct { longint n_edge; timestamp_t t; } ts_exp_t;
  typedef struct { longint due; coinc_t c; } exp_t;
  exp_t q[$];

  // sampling edge index and timestamp of a hit at time th
  function automatic ts_exp_t ts_of(longint th);
    ts_exp_t r;
    longint n  = (th + TAP_PS - FIRST + PERIOD - 1) / PERIOD;
    longint f  = (FIRST + n * PERIOD - th) / TAP_PS;
    r.n_edge   = n;
    r.t.coarse = COARSE_W'(n - n_rst);
    r.t.fine   = FINE_W'((f > TAPS) ? TAPS : f);
    return r;
  endfunction

  function automatic longint max2(longint a, longint b);
    return (a > b) ? a : b;
  endfunction

  // a pulse on one comparator output, started `at` ps from now
  task automatic pulse_lo(int c, longint at, longint width);
    fork begin #(at); hit_lo[c] = 1'b1; #(width); hit_lo[c] = 1'b0; end join_none
  endtask
  task automatic pulse_hi(int c, longint at, longint width);
    fork begin #(at); hit_hi[c] = 1'b1; #(width); hit_hi[c] = 1'b0; end join_none
  endtask

  // keep hit times off the clock edges
  function automatic longint off_edge(longint t);
    return ((t - FIRST) % PERIOD == 0) ? t + 1 : t;
  endfunction

  // schedule a detector pulse on chain c at absolute time t; return the
  // event it should produce and the edge of its later sampling
  task automatic detector(int c, longint t, output event_t ev, output longint last_edge);
    longint  tl = off_edge(t);
    longint  th = off_edge(tl + 20 + longint'($urandom % 380));
    ts_exp_t el = ts_of(tl);
    ts_exp_t eh = ts_of(th);
    pulse_lo(c, tl - $time, 800);
    pulse_hi(c, th - $time, 500);
    ev        = '{t_lo: el.t, t_hi: eh.t};
    last_edge = max2(el.n_edge, eh.n_edge);
    if (eh.n_edge > el.n_edge) seen[4]++;
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic longint now_edge = ($time - FIRST) / PERIOD;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL: unexpected pair at edge %0d", now_edge);
    end else begin
      automatic exp_t e = q.pop_front();
      seen[0]++;
      if (out != e.c || now_edge != e.due) begin
        failures++;
        $display("FAIL: pair at edge %0d (due %0d): A %0d/%0d %0d/%0d B %0d/%0d %0d/%0d",
                 now_edge, e.due, out.a.t_lo.coarse, out.a.t_lo.fine,
                 out.a.t_hi.coarse, out.a.t_hi.fine, out.b.t_lo.coarse,
                 out.b.t_lo.fine, out.b.t_hi.coarse, out.b.t_hi.fine);
        $display("      expected     A %0d/%0d %0d/%0d B %0d/%0d %0d/%0d",
                 e.c.a.t_lo.coarse, e.c.a.t_lo.fine, e.c.a.t_hi.coarse, e.c.a.t_hi.fine,
                 e.c.b.t_lo.coarse, e.c.b.t_lo.fine, e.c.b.t_hi.coarse, e.c.b.t_hi.fine);
      end
    end
  end

  initial begin
    event_t ea, eb;
    longint la, lb, t0;
    repeat (4) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    n_rst = ($time - FIRST) / PERIOD;
    repeat (10) @(posedge clk);
    for (int k = 0; k < N_EV; k++) begin
      automatic int kind = (k < 5) ? k : int'($urandom % 5);
      @(posedge clk);
      t0 = $time + 1 + longint'($urandom % (PERIOD - 2));
      case (kind)
        0, 1: begin
          detector(0, t0 + longint'($urandom % 1000), ea, la);
          detector(1, t0 + longint'($urandom % 1000), eb, lb);
          q.push_back('{due: max2(la, lb) + 5, c: '{a: ea, b: eb}});
          if (kind == 1) begin
            pulse_lo(0, t0 - $time + PERIOD * 5 / 2, 800);
            pulse_hi(0, t0 - $time + PERIOD * 5 / 2 + 100, 500);
            seen[1]++;
          end
        end
        2: begin
          pulse_lo(0, t0 - $time, 300);
          exp_rej++;
          seen[2]++;
        end
        3: begin
          detector(1, t0, eb, lb);
          exp_single++;
          seen[3]++;
        end
        default: begin
          detector(0, t0, ea, la);
          detector(1, t0 + 8 * PERIOD, eb, lb);
          exp_single += 2;
          seen[3] += 2;
          seen[5]++;
        end
      endcase
      repeat (20) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    checks += 4;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d pairs never came out", q.size());
    end
    if (int'(n_rejected[0]) != exp_rej || n_rejected[1] != '0) begin
      failures++;
      $display("FAIL: rejected %0d/%0d expected %0d/0", n_rejected[0], n_rejected[1], exp_rej);
    end
    if (int'(n_single) != exp_single) begin
      failures++;
      $display("FAIL: n_single %0d expected %0d", n_single, exp_single);
    end
    for (int i = 0; i < 6; i++) begin
      $display("%-26s %0d", names[i], seen[i]);
      if (seen[i] == 0) begin
        failures++;
        $display("FAIL: %s never happened", names[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_EV * 21 + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
