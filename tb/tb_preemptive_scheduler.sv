// tb_preemptive_scheduler: self-checking test of the preemptive scheduler.
// The test bench plays the batch buffer, the FBE control unit and the NPU.
// The latency table holds LAT[e][b] = 100*(e+1) + 10*b cycles. It checks:
// batch start with min(N_Q, B_MAX); B_incr = min(N_Q, B_MAX - B_rem); the
// criterion T_overhead < T_slack at its exact boundary (equal: no preemption,
// one cycle more of slack: preemption); no preemption during catch-up at an
// earlier exit; a second preemption at the same exit after a merge; moving
// on when the queue is empty; going idle at the last exit and when the
// batch empties.
module tb_preemptive_scheduler;
  localparam int NE = 4, BM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] now = 1000, t_slo = 0, oldest_time = 400;
  logic lat_we = 0; logic [1:0] lat_exit = 0; logic [3:0] lat_bsize = 0; logic [31:0] lat_val = 0;
  logic [5:0] n_q = 0; logic bfb_busy = 0; logic [3:0] b_act = 0; logic parked = 0;
  logic start, preempt, proceed, exit_evt = 0, idle; logic [3:0] b_incr;
  logic [1:0] exit_idx = 0, cur_exit; logic [31:0] n_preempt, n_decline;
  int checks = 0, failures = 0;

  preemptive_scheduler #(.N_EXITS(NE), .B_MAX(BM), .Q_DEPTH(32)) dut (.*);

  function automatic int lat(int e, int b);
    return (b == 0) ? 0 : 100 * (e + 1) + 10 * b;
  endfunction
  function automatic int ovh(int i, int bi, int br);
    int s = 0;
    for (int e = 0; e < NE; e++) s += (e <= i) ? lat(e, bi) : lat(e, br + bi);
    return s;
  endfunction

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s (b_incr=%0d cur_exit=%0d)", msg, b_incr, cur_exit); end
  endtask

  // wait for the scheduler's reaction: 0 proceed, 1 preempt, 2 start, 3 idle
  task automatic react(output int what);
    what = -1;
    for (int c = 0; c < 200 && what < 0; c++) begin
      @(posedge clk); #1;
      if (proceed) what = 0;
      else if (preempt) what = 1;
      else if (start) what = 2;
      else if (idle) what = 3;
    end
  endtask
  // loader: busy for b_incr cycles after start/preempt
  always @(posedge clk) if (start || preempt) begin
    bfb_busy <= 1; repeat (int'(b_incr)) @(posedge clk); bfb_busy <= 0;
  end

  task automatic exit_at(input int idx, input int new_b, input bit new_park);
    @(negedge clk); exit_evt = 1; exit_idx = 2'(idx);
    @(negedge clk); exit_evt = 0; b_act = 4'(new_b); parked = new_park;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int e = 0; e < NE; e++) for (int b = 1; b <= BM; b++) begin
      @(negedge clk); lat_we = 1; lat_exit = 2'(e); lat_bsize = 4'(b); lat_val = lat(e, b);
    end
    @(negedge clk); lat_we = 0;
    chk(idle, "idle after reset");
    // ---- start: N_Q = 5 -> batch of 5
    n_q = 5; react(w); chk(w == 2 && b_incr == 5, "start with 5");
    @(negedge clk); n_q = 0; b_act = 5;
    react(w); chk(w == 0, "proceed to exit 0");
    // ---- exit 0: 2 exit, B_rem = 3; N_Q = 4 -> B_incr = 4; slack == overhead: decline
    n_q = 4; t_slo = 600 + ovh(0, 4, 3);
    exit_at(0, 3, 0);
    react(w); chk(w == 0 && n_decline == 1 && n_preempt == 0 && b_incr == 4, "equal slack: no preemption");
    chk(cur_exit == 1, "moved to exit 1");
    // ---- exit 1: B_rem = 2, N_Q = 9 -> B_incr = 6; one cycle of slack more: preempt
    n_q = 9; t_slo = 600 + ovh(1, 6, 2) + 1;
    exit_at(1, 2, 0);
    react(w); chk(w == 1 && b_incr == 6 && n_preempt == 1, "preempt with B_incr = 6");
    @(negedge clk); n_q = 3; b_act = 6; parked = 1;
    react(w); chk(w == 0, "new batch proceeds");
    // catch-up: exit 0 of the new batch, no nested preemption
    exit_at(0, 5, 1);
    react(w); chk(w == 0 && n_preempt == 1 && n_decline == 1, "no preemption while catching up");
    // merge at exit 1: 2 + 5 - 1 = 6, N_Q = 3 -> B_incr = min(3, 2) = 2; preempt again
    t_slo = 600 + ovh(1, 2, 6) + 1;
    exit_at(1, 6, 0);
    react(w); chk(w == 1 && b_incr == 2 && n_preempt == 2 && cur_exit == 1, "second preemption at the same exit");
    @(negedge clk); n_q = 1; b_act = 2; parked = 1;
    react(w);
    exit_at(0, 2, 1); react(w);
    // merge to a full batch: no room, move on
    exit_at(1, 8, 0);
    react(w); chk(w == 0 && cur_exit == 2 && n_preempt == 2, "full batch: move on");
    // exit 2 with an empty queue: move on without evaluating
    n_q = 0;
    exit_at(2, 7, 0);
    react(w); chk(w == 0 && cur_exit == 3 && n_decline == 1, "empty queue: move on");
    // last exit: idle
    exit_at(3, 0, 0);
    react(w); chk(w == 3, "idle after last exit");
    // a batch that empties at an intermediate exit
    n_q = 2; react(w); chk(w == 2 && b_incr == 2, "start with 2");
    @(negedge clk); n_q = 0; b_act = 2; react(w);
    exit_at(0, 0, 0);
    react(w); chk(w == 3, "idle when the batch empties");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
