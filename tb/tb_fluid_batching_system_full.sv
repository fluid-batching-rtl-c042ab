// tb_fluid_batching_system_full: the end-to-end test with the system at its
// default size: engine <T_R, T_P, T_C> = <4652, 7, 128>, B_MAX = 8, a
// 62-entry layer table and FBCB, 4 exits. The network uses the first 8
// layers; everything else is as in tb_fluid_batching_system:
//
// A small 4-exit network of 8 layers (backbone GEMM layers, each followed by
// an exit head that branches off it; the last head is the final classifier)
// is placed in a word memory model together with random request images.
// Requests arrive at random intervals; the first half runs under a loose
// latency SLO (preemptions are worth it), the second under a tight one
// (the criterion declines them). The FBCB holds random batching policies.
//
// Checks: every request completes exactly once and at the exit a reference
// model predicts. The reference runs each sample alone through the same
// Q8.8 arithmetic, so a matching exit means every layer on the sample's path
// was computed correctly whatever batch, policy, preemption or merge it went
// through. The test also counts each mechanism and fails if one never
// happened: start of a batch, intermediate early exit, preemption, declined
// preemption, early exit while catching up, merge, full batch, each PE
// configuration (k = 1/2, 1, 2), R-, P- and hybrid Fluid Batching, and a
// 3x3 convolution layer whose Toeplitz matrix the DMA forms on the fly.
module tb_fluid_batching_system_full;
  import fb_pkg::*;
  localparam int NL = 8, NE = 4, BM = 8, NREQ = 48, IMG_LOG2 = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lt_we = 0; logic [5:0] lt_idx = 0; layer_desc_t lt_desc = '0;
  logic fbcb_we = 0; logic [5:0] fbcb_layer = 0; logic [3:0] fbcb_bsize = 0, fbcb_br = 0;
  pe_mode_e fbcb_k = K_ONE;
  logic lat_we = 0; logic [1:0] lat_exit = 0; logic [3:0] lat_bsize = 0; logic [31:0] lat_val = 0;
  logic [31:0] t_slo = 0; addr_t img_base = 32'h0100_0000, act_base = 32'h4000_0000;
  logic req_push = 0; logic [15:0] req_id = 0; logic req_full; logic [5:0] queue_size;
  logic cmpl_valid; logic [BM-1:0] cmpl_mask; logic [15:0] cmpl_id [BM]; logic [1:0] cmpl_exit;
  logic mem_re, mem_we; addr_t mem_addr; data_t mem_wdata, mem_rdata;
  logic [31:0] now; logic sched_idle; logic [3:0] b_act; logic [5:0] layer; logic layer_start;
  logic [3:0] pol_br, pol_bp; pe_mode_e pol_k; logic exit_evt; logic [3:0] b_exit;
  logic merge, parked; logic [31:0] n_preempt, n_decline, n_comp_cycles, n_busy_cycles;
  logic [1:0] sched_exit; logic [3:0] act_cnt, old_cnt, b_old; logic [5:0] l_old;
  logic preempt_err, npu_busy;

  fluid_batching_system dut (.*);

  // ---------------- memory model ----------------
  data_t mem [addr_t];
  always @(posedge clk) begin
    mem_rdata <= mem.exists(mem_addr) ? mem[mem_addr] : data_t'(0);
    if (mem_we) mem[mem_addr] = mem_wdata;
  end

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- the model ----------------
  layer_desc_t net [NL];
  addr_t wb [NL];
  function automatic layer_desc_t mk(int r, int p, int c, int l, bit img, int src, bit ex, int ei);
    layer_desc_t d = '0;
    d.r = 16'(r); d.p = 16'(p); d.c = 16'(c); d.w_base = 32'h0010_0000 + addr_t'(l * 32'h400);
    d.src_img = img; d.src_layer = 8'(src); d.is_exit = ex; d.exit_idx = 8'(ei);
    return d;
  endfunction

  // reference: run one sample alone
  int exp_exit [NREQ];
  task automatic reference(input int id);
    data_t act [NL][64];
    exp_exit[id] = NE - 1;
    for (int l = 0; l < NL; l++) begin
      for (int r = 0; r < int'(net[l].r); r++) for (int c = 0; c < int'(net[l].c); c++) begin
        automatic acc_t acc = 0;
        for (int p = 0; p < int'(net[l].p); p++) begin
          automatic int e = r * int'(net[l].p) + p;
          automatic data_t x;
          if (net[l].geom.ksz != 0) begin
            // Toeplitz expansion of a stored feature map (zero padding)
            automatic conv_geom_t g = net[l].geom;
            automatic int ci = p % int'(g.in_c), kx = (p / int'(g.in_c)) % int'(g.ksz);
            automatic int ky = p / (int'(g.in_c) * int'(g.ksz));
            automatic int iy = (r / int'(g.out_w)) * int'(g.stride) + ky - int'(g.pad);
            automatic int ix = (r % int'(g.out_w)) * int'(g.stride) + kx - int'(g.pad);
            e = (iy < 0 || ix < 0 || iy >= int'(g.in_h) || ix >= int'(g.in_w)) ? -1
                : (iy * int'(g.in_w) + ix) * int'(g.in_c) + ci;
          end
          x = (e < 0) ? data_t'(0) : net[l].src_img ? mem[img_base + (addr_t'(id) << IMG_LOG2) + addr_t'(e)]
                                                    : act[net[l].src_layer][e];
          acc += acc_t'(x) * acc_t'(mem[net[l].w_base + addr_t'(p * net[l].c + c)]);
        end
        act[l][r * net[l].c + c] = requant(acc);
      end
    end
    for (int l = NL - 1; l >= 0; l--)
      if (net[l].is_exit && act[l][0] >= data_t'(205)) exp_exit[id] = net[l].exit_idx;
  endtask

  // ---------------- mechanism counters ----------------
  int c_start = 0, c_early = 0, c_catchup_exit = 0, c_merge = 0, c_full = 0;
  int n_perr = 0;
  int c_k [3]; int c_rbat = 0, c_pbat = 0, c_hyb = 0, c_conv = 0;
  int done_cnt [NREQ]; int got_exit [NREQ]; int arr_t [NREQ]; int lat_max = 0, n_viol = 0;
  int n_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (layer_start) begin
      c_k[pol_k]++;
      if (b_act == 4'(BM)) c_full++;
      if (b_act > 1 && pol_br == b_act) c_rbat++;
      if (b_act > 1 && pol_br == 1) c_pbat++;
      if (pol_br > 1 && pol_br < b_act) c_hyb++;
      if (net[int'(layer)].geom.ksz != 0) c_conv++;
      if (layer == 0 && !parked) c_start++;
    end
    if (exit_evt && parked && !merge && b_exit != 0) c_catchup_exit++;
    if (merge) begin
      // the parked batch held by the buffer must match the CU's B_old
      c_merge++; checks++;
      if (old_cnt != b_old) begin failures++; $display("merge: buffer holds %0d, CU B_old %0d", old_cnt, b_old); end
    end
    if (preempt_err) begin n_perr++; $display("nested preemption attempted"); end
    if (cmpl_valid) for (int s = 0; s < BM; s++) if (cmpl_mask[s]) begin
      automatic int id = cmpl_id[s];
      done_cnt[id]++; got_exit[id] = cmpl_exit; n_done++;
      if (cmpl_exit != 2'(NE - 1)) c_early++;
      if (int'(now) - arr_t[id] > lat_max) lat_max = int'(now) - arr_t[id];
      if (int'(now) - arr_t[id] > int'(t_slo)) n_viol++;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // backbone:  0 (img 4x6 -> 4x4), 2 (3x3 conv), 4, 6 (4x4 -> 4x4)
    // heads:     1, 3, 5 (1x16 -> 1x2), 7 final (1x16 -> 1x3)
    net[0] = mk(4, 6, 4, 0, 1, 0, 0, 0);
    net[1] = mk(1, 16, 2, 1, 0, 0, 1, 0);
    // layer 2: 3x3 convolution, stride 1, zero padding 1, over layer 0's
    // output seen as a 2x2 map of 4 channels (Toeplitz matrix 4 x 36)
    net[2] = mk(4, 36, 4, 2, 0, 0, 0, 0);
    net[2].geom.ksz = 3; net[2].geom.stride = 1; net[2].geom.pad = 1;
    net[2].geom.in_h = 2; net[2].geom.in_w = 2; net[2].geom.in_c = 4; net[2].geom.out_w = 2;
    net[3] = mk(1, 16, 2, 3, 0, 2, 1, 1);
    net[4] = mk(4, 4, 4, 4, 0, 2, 0, 0);
    net[5] = mk(1, 16, 2, 5, 0, 4, 1, 2);
    net[6] = mk(4, 4, 4, 6, 0, 4, 0, 0);
    net[7] = mk(1, 16, 3, 7, 0, 6, 1, 3);
    for (int l = 0; l < NL; l++)
      for (int i = 0; i < int'(net[l].p) * int'(net[l].c); i++)
        mem[net[l].w_base + addr_t'(i)] = data_t'($urandom_range(net[l].is_exit ? 500 : 220)) -
                                          data_t'(net[l].is_exit ? 250 : 110);
    for (int id = 0; id < NREQ; id++) begin
      for (int i = 0; i < 24; i++) mem[img_base + (addr_t'(id) << IMG_LOG2) + addr_t'(i)] = data_t'($urandom_range(600)) - data_t'(300);
      reference(id);
    end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      lt_we = 1; lt_idx = 6'(l); lt_desc = net[l]; @(negedge clk);
    end
    lt_we = 0;
    for (int l = 0; l < NL; l++) for (int b = 1; b <= BM; b++) begin
      fbcb_we = 1; fbcb_layer = 6'(l); fbcb_bsize = 4'(b);
      fbcb_br = 4'($urandom_range(b, 1)); fbcb_k = pe_mode_e'((l + b) % 3);
      @(negedge clk);
    end
    fbcb_we = 0;
    for (int e = 0; e < NE; e++) for (int b = 1; b <= BM; b++) begin
      lat_we = 1; lat_exit = 2'(e); lat_bsize = 4'(b); lat_val = 300 + 120 * b;
      @(negedge clk);
    end
    lat_we = 0;
    // ---- requests
    t_slo = 200000;
    for (int id = 0; id < NREQ; id++) begin
      if (id == NREQ / 2) t_slo = 2500;
      repeat ($urandom_range(id < NREQ / 2 ? 700 : 250, 1)) @(negedge clk);
      while (req_full) @(negedge clk);
      req_push = 1; req_id = 16'(id); arr_t[id] = now;
      @(negedge clk); req_push = 0;
    end
    while (n_done < NREQ || !sched_idle) @(negedge clk);
    repeat (10) @(negedge clk);
    for (int id = 0; id < NREQ; id++) begin
      chk(done_cnt[id] == 1, $sformatf("request %0d completed %0d times", id, done_cnt[id]));
      chk(got_exit[id] == exp_exit[id], $sformatf("request %0d exit %0d expected %0d", id, got_exit[id], exp_exit[id]));
    end
    $display("batches=%0d early_exits=%0d preemptions=%0d declined=%0d catchup_exits=%0d merges=%0d full=%0d",
             c_start, c_early, n_preempt, n_decline, c_catchup_exit, c_merge, c_full);
    $display("k=1:%0d k=1/2:%0d k=2:%0d R-batch=%0d P-batch=%0d hybrid=%0d", c_k[K_ONE], c_k[K_HALF], c_k[K_TWO], c_rbat, c_pbat, c_hyb);
    $display("max latency=%0d cycles, completions over the SLO in force=%0d, NPU busy=%0d compute=%0d cycles of %0d",
             lat_max, n_viol, n_busy_cycles, n_comp_cycles, now);
    chk(c_start > 0, "batch start");        chk(c_early > 0, "intermediate early exit");
    chk(n_preempt > 0, "preemption");       chk(n_decline > 0, "declined preemption");
    chk(c_catchup_exit > 0, "exit while catching up"); chk(c_merge > 0, "merge");
    chk(c_full > 0, "full batch");
    chk(c_k[K_ONE] > 0 && c_k[K_HALF] > 0 && c_k[K_TWO] > 0, "all PE configurations");
    chk(c_rbat > 0 && c_pbat > 0 && c_hyb > 0, "R-, P- and hybrid batching");
    chk(c_conv > 0, "a convolution with Toeplitz formation by the DMA");
    chk(n_perr == 0, "no nested preemption reached the CU");
    $display("convolution layers run=%0d", c_conv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
