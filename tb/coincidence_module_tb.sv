// coincidence_module_tb: self-checking test of the two-chain coincidence.
//
// Runs many slots, each followed by idle cycles: events of chains A and B
// offset by -W..+W cycles (one pair expected, one cycle after the later
// event), offset by W+1 (both dropped), A alone, B alone (dropped), and two
// A events before the B event (the first dropped, the second paired). The
// expected pair holds exactly the events that were sent; the count of
// dropped events is compared after every slot.
`timescale 1ps / 1ps
module coincidence_module_tb;
  import tdc_pkg::*;
  localparam int W = 4;   // CM_WINDOW

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   a_valid = 1'b0, b_valid = 1'b0;
  event_t a_ev = '0, b_ev = '0;
  logic   out_valid;
  coinc_t out;
  logic [CNT_W-1:0] n_single;
  int checks = 0, failures = 0;
  int cyc = 0;
  int exp_single = 0;
  int kinds [5] = '{default: 0};

  coincidence_module #(.CM_WINDOW(W)) dut (.*);

  always #1250 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int due; coinc_t c; } exp_t;
  exp_t q[$];

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (q.size() != 0 && q[0].due == cyc) begin
      automatic exp_t e = q.pop_front();
      if (!out_valid || out != e.c) begin
        failures++;
        $display("FAIL: cycle %0d valid=%0b out=%h expected %h", cyc, out_valid, out, e.c);
      end
    end else if (out_valid) begin
      failures++;
      $display("FAIL: unexpected pair at cycle %0d", cyc);
    end
  end

  function automatic event_t rnd_ev();
    event_t e;
    e = {$urandom, $urandom, $urandom};
    return e;
  endfunction

  task automatic step(logic av, event_t ae, logic bv, event_t be);
    @(posedge clk);
    #1;
    a_valid = av; a_ev = ae;
    b_valid = bv; b_ev = be;
  endtask

  task automatic idle(int n);
    for (int i = 0; i < n; i++) step(1'b0, rnd_ev(), 1'b0, rnd_ev());
  endtask

  // first event, d cycles later the second; d < 0 sends B first
  task automatic pair(event_t a, event_t b, int d);
    if (d == 0) begin
      step(1'b1, a, 1'b1, b);
    end else if (d > 0) begin
      step(1'b1, a, 1'b0, rnd_ev());
      idle(d - 1);
      step(1'b0, rnd_ev(), 1'b1, b);
    end else begin
      step(1'b0, rnd_ev(), 1'b1, b);
      idle(-d - 1);
      step(1'b1, a, 1'b0, rnd_ev());
    end
  endtask

  initial begin
    event_t a, b, a2;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 400; k++) begin
      automatic int kind = $urandom % 5;
      automatic int d = int'($urandom % (2 * W + 1)) - W;
      a = rnd_ev(); b = rnd_ev(); a2 = rnd_ev();
      kinds[kind]++;
      case (kind)
        0: begin
          pair(a, b, d);
          q.push_back('{due: cyc + 1, c: '{a: a, b: b}});
        end
        1: begin
          pair(a, b, (d < 0) ? -(W + 1) : (W + 1));
          exp_single += 2;
        end
        2: begin step(1'b1, a, 1'b0, b); exp_single++; end
        3: begin step(1'b0, a, 1'b1, b); exp_single++; end
        default: begin
          step(1'b1, a2, 1'b0, b);
          step(1'b1, a, 1'b0, b);
          step(1'b0, a2, 1'b1, b);
          q.push_back('{due: cyc + 1, c: '{a: a, b: b}});
          exp_single++;
        end
      endcase
      idle(W + 3);
      checks++;
      if (int'(n_single) != exp_single) begin
        failures++;
        $display("FAIL: n_single=%0d expected %0d", n_single, exp_single);
      end
    end
    checks++;
    if (q.size() != 0 || kinds[0] == 0 || kinds[1] == 0) begin
      failures++;
      $display("FAIL: %0d pairs missing or a case never ran", q.size());
    end
    $display("slots: in window %0d, outside %0d, A alone %0d, B alone %0d, double A %0d",
             kinds[0], kinds[1], kinds[2], kinds[3], kinds[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
