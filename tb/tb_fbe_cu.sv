// tb_fbe_cu: self-checking test of the Fluid Batching Engine control unit.
// Replays the paper's two-exit scheduling example (batch of 2, one sample
// exits at E1, preemption with B_incr = 4, one new sample exits at E1, merge
// to 4) and checks every register after each event, then an exit of the new
// batch before the preemption point (no merge), a nested preemption attempt
// (rejected) and a fresh start.
module tb_fbe_cu;
  localparam int L = 8, BM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, preempt = 0, layer_done = 0, exit_evt = 0;
  logic [3:0] b_incr = 0, b_exit = 0;
  logic [3:0] b_act, b_old; logic [3:0] layer, l_old;
  logic parked, merge, preempt_err;
  int checks = 0, failures = 0, merges = 0;

  fbe_cu #(.N_LAYERS(L), .B_MAX(BM)) dut (.*);

  always @(posedge clk) if (merge) merges++;

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s (b_act=%0d l=%0d b_old=%0d l_old=%0d parked=%0d)", msg, b_act, layer, b_old, l_old, parked); end
  endtask
  task automatic ev(input logic st, pe, ld, ex, input int bi, be);
    @(negedge clk);
    start = st; preempt = pe; layer_done = ld; exit_evt = ex; b_incr = 4'(bi); b_exit = 4'(be);
    @(negedge clk);
    start = 0; preempt = 0; layer_done = 0; exit_evt = 0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    ev(1, 0, 0, 0, 2, 0);            chk(b_act == 2 && layer == 0 && !parked, "start 2");
    ev(0, 0, 1, 0, 0, 0);            chk(layer == 1, "layer 0 done");
    ev(0, 0, 1, 1, 0, 1);            chk(b_act == 1 && layer == 2, "E1: one exits");
    ev(0, 1, 0, 0, 4, 0);            chk(parked && b_old == 1 && l_old == 2 && b_act == 4 && layer == 0, "preempt 4");
    ev(0, 1, 0, 0, 3, 0);            chk(preempt_err == 1 && b_act == 4, "nested preempt rejected");
    ev(0, 0, 1, 0, 0, 0);            chk(layer == 1 && b_act == 4 && parked, "new batch layer 0");
    chk(merges == 0, "no merge yet");
    ev(0, 0, 1, 1, 0, 1);            chk(b_act == 4 && layer == 2 && !parked, "merge: 1 + (4-1) = 4");
    chk(merges == 1, "one merge");
    ev(0, 0, 1, 0, 0, 0);            chk(layer == 3, "continue after merge");
    // second scenario: exit of the new batch before the preemption point
    ev(0, 0, 1, 1, 0, 1);            chk(b_act == 3 && layer == 4, "E2: one exits");
    ev(0, 1, 0, 0, 5, 0);            chk(parked && b_old == 3 && l_old == 4 && b_act == 5, "preempt 5");
    ev(0, 0, 1, 0, 0, 0);
    ev(0, 0, 1, 1, 0, 2);            chk(b_act == 3 && parked && layer == 2, "early exit while catching up");
    ev(0, 0, 1, 0, 0, 0);
    ev(0, 0, 1, 1, 0, 1);            chk(b_act == 5 && !parked && layer == 4, "merge 3 + 2");
    // nested preemption flagged
    @(negedge clk); preempt = 1; b_incr = 2; @(negedge clk); preempt = 0;
    @(negedge clk); preempt = 1; b_incr = 1; @(posedge clk); #1 chk(preempt_err == 1, "nested preempt flagged");
    @(negedge clk); preempt = 0;
    ev(1, 0, 0, 0, 7, 0);            chk(b_act == 7 && layer == 0 && !parked, "fresh start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
