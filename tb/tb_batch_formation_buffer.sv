// tb_batch_formation_buffer: self-checking test of the batch buffer.
// A reference queue feeds it. Random sequences of loads (with and without
// parking), exits with random masks and merges are checked against a
// reference list: IDs in order, completions, the oldest arrival time, and
// that no two in-flight samples (active or parked) share an activation slot.
module tb_batch_formation_buffer;
  localparam int BM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, park = 0; logic [3:0] load_n = 0; logic busy;
  logic q_empty; logic [15:0] q_id; logic [31:0] q_time; logic q_pop;
  logic exit_evt = 0, merge = 0; logic [BM-1:0] exit_mask = 0;
  logic cmpl_valid; logic [BM-1:0] cmpl_mask; logic [15:0] cmpl_id [BM];
  logic [3:0] act_cnt, old_cnt; logic [15:0] act_id [BM]; logic [2:0] act_slot [BM];
  logic [31:0] oldest_time;
  int checks = 0, failures = 0, n_merge = 0, next_id = 1;
  int qid[$], qtm[$];
  int a_id[$], a_tm[$], o_id[$], o_tm[$];

  batch_formation_buffer #(.B_MAX(BM)) dut (.*);

  assign q_empty = (qid.size() == 0);
  assign q_id    = q_empty ? 16'd0 : 16'(qid[0]);
  assign q_time  = q_empty ? 32'd0 : 32'(qtm[0]);
  always @(posedge clk) if (q_pop) begin void'(qid.pop_front()); void'(qtm.pop_front()); end

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic check_state();
    automatic bit used [BM];
    automatic longint mn = 64'hffffffff;
    chk(int'(act_cnt) == a_id.size() && int'(old_cnt) == o_id.size(), "counts");
    for (int s = 0; s < a_id.size(); s++) begin
      chk(int'(act_id[s]) == a_id[s], $sformatf("id[%0d]=%0d ref %0d", s, act_id[s], a_id[s]));
      chk(!used[act_slot[s]], "slot unique"); used[act_slot[s]] = 1;
      if (a_tm[s] < mn) mn = a_tm[s];
    end
    if (a_id.size() > 0) chk(longint'(oldest_time) == mn, "oldest");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      automatic int op = $urandom_range(3);
      // keep the queue stocked
      while (qid.size() < 10) begin qid.push_back(next_id); qtm.push_back(next_id * 3); next_id++; end
      @(negedge clk);
      if (op == 0 || a_id.size() == 0) begin
        automatic bit pk = (o_id.size() == 0) && (a_id.size() > 0) && (a_id.size() < BM) && $urandom_range(1);
        automatic int k = $urandom_range(pk ? BM - a_id.size() : BM - o_id.size(), 1);
        load = 1; park = pk; load_n = 4'(k);
        if (pk) begin o_id = a_id; o_tm = a_tm; end
        a_id = {}; a_tm = {};
        for (int i = 0; i < k; i++) begin a_id.push_back(qid[i]); a_tm.push_back(qtm[i]); end
        @(negedge clk); load = 0; park = 0;
        while (busy) @(negedge clk);
      end else begin
        automatic logic [BM-1:0] m = BM'($urandom);
        automatic bit mg = (o_id.size() > 0) && $urandom_range(1);
        automatic int ni[$], nt[$];
        exit_evt = 1; exit_mask = m; merge = mg;
        if (mg) begin ni = o_id; nt = o_tm; o_id = {}; o_tm = {}; n_merge++; end
        for (int s = 0; s < a_id.size(); s++) if (!m[s]) begin ni.push_back(a_id[s]); nt.push_back(a_tm[s]); end
        @(negedge clk); exit_evt = 0; merge = 0;
        chk(cmpl_valid && cmpl_mask == m, "completion pulse");
        for (int s = 0; s < a_id.size(); s++) if (m[s]) chk(int'(cmpl_id[s]) == a_id[s], "completion id");
        a_id = ni; a_tm = nt;
      end
      check_state();
    end
    chk(n_merge > 5, "merges exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
