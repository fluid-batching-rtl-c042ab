// tb_npu_core: self-checking test of the NPU core.
// Engine <T_R, T_P, T_C> = <8, 3, 4>, B_MAX = 4 (the default engine is the
// same logic with larger loops; the system test runs it at full size).
// Random layers (R, P, C, B_act, B_R, k) are run against a word memory
// model; every second layer is a convolution whose Toeplitz matrix the DMA
// forms from a stored feature map (random kernel, stride and zero padding);
// model; each sample's output matrix is compared with a reference GEMM
// requantised to Q8.8, every write must land in an expected output word, the
// exit-head confidence (row 0, column 0) is checked, and the layer's cycle
// count is compared with the loop-nest formula (load weights T_Pe*nc, load
// inputs nr*T_Pe + 2, compute nr per P-tile; write nr*nc per output tile).
module tb_npu_core;
  import fb_pkg::*;
  localparam int TR = 8, TP = 3, TC = 4, BM = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; logic [15:0] dim_r, dim_p, dim_c; addr_t w_base;
  addr_t in_base [BM], out_base [BM]; logic [2:0] b_act, pol_br; pe_mode_e pol_k;
  logic busy, done, mem_re, mem_we; addr_t mem_addr; data_t mem_wdata, mem_rdata;
  data_t conf [BM]; logic [31:0] n_comp_cycles, n_busy_cycles;
  conv_geom_t geom;
  int checks = 0, failures = 0, bad_writes = 0, n_writes = 0;
  int seen_k [3];

  data_t mem [addr_t];
  bit    expect_w [addr_t];

  npu_core #(.T_R(TR), .T_P(TP), .T_C(TC), .B_MAX(BM)) dut (.*);

  always @(posedge clk) begin
    mem_rdata <= mem.exists(mem_addr) ? mem[mem_addr] : data_t'(0);
    if (mem_we) begin
      mem[mem_addr] = mem_wdata;
      n_writes++;
      if (!expect_w.exists(mem_addr)) bad_writes++;
    end
  end

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic int ceil_div(int a, int b); return (a + b - 1) / b; endfunction

  // element (r, p) of sample s's input matrix, formed independently of the
  // DUT: dense, or the Toeplitz expansion of a stored feature map
  function automatic data_t xval(int s, int r, int p, int P);
    int oy, ox, ky, kx, ci, iy, ix;
    if (geom.ksz == 0) return mem[in_base[s] + addr_t'(r * P + p)];
    oy = r / int'(geom.out_w); ox = r % int'(geom.out_w);
    ci = p % int'(geom.in_c); kx = (p / int'(geom.in_c)) % int'(geom.ksz);
    ky = p / (int'(geom.in_c) * int'(geom.ksz));
    iy = oy * int'(geom.stride) + ky - int'(geom.pad);
    ix = ox * int'(geom.stride) + kx - int'(geom.pad);
    if (iy < 0 || ix < 0 || iy >= int'(geom.in_h) || ix >= int'(geom.in_w)) return 0;
    return mem[in_base[s] + addr_t'((iy * int'(geom.in_w) + ix) * int'(geom.in_c) + ci)];
  endfunction
  int n_conv = 0, n_pad_taps = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      automatic int R = $urandom_range(11, 1), P = $urandom_range(10, 1), C = $urandom_range(10, 1);
      automatic int B = $urandom_range(BM, 1), BR = $urandom_range(B, 1), BP;
      automatic pe_mode_e kk = pe_mode_e'(n % 3);
      automatic int tre, tpe, tce, ppad, rh, cyc = 0, expect_cyc = 0;
      BP = B - BR + 1;
      geom = '0;
      if (n % 2 == 1) begin
        // convolution layer: the DMA forms the Toeplitz matrix
        automatic int ks = $urandom_range(3, 1), st = $urandom_range(2, 1), pd = $urandom_range(ks / 2, 0);
        automatic int ih = $urandom_range(4, 1), iw = $urandom_range(4, 1), ic = $urandom_range(3, 1);
        if (ih + 2 * pd < ks) ih = ks; if (iw + 2 * pd < ks) iw = ks;
        geom.ksz = 8'(ks); geom.stride = 4'(st); geom.pad = 4'(pd);
        geom.in_h = 16'(ih); geom.in_w = 16'(iw); geom.in_c = 16'(ic);
        geom.out_w = 16'((iw + 2 * pd - ks) / st + 1);
        R = ((ih + 2 * pd - ks) / st + 1) * int'(geom.out_w);
        P = ks * ks * ic;
        n_conv++; if (pd > 0) n_pad_taps++;
      end
      tre = (kk == K_ONE) ? TR : TR / 2;
      tpe = (kk == K_TWO) ? 2 * TP : (kk == K_HALF) ? TP / 2 : TP;
      tce = (kk == K_TWO) ? TC / 2 : (kk == K_HALF) ? 2 * TC : TC;
      ppad = ceil_div(P, tpe) * tpe;
      rh = BR * R;
      seen_k[kk]++;
      mem.delete(); expect_w.delete();
      w_base = 32'h100000;
      for (int p = 0; p < P; p++) for (int c = 0; c < C; c++)
        mem[w_base + addr_t'(p * C + c)] = data_t'($urandom_range(600)) - data_t'(300);
      for (int s = 0; s < BM; s++) begin
        in_base[s]  = addr_t'(32'h200000 + s * 32'h1000);
        out_base[s] = addr_t'(32'h300000 + s * 32'h1000);
        for (int i = 0; i < R * P + 64; i++) mem[in_base[s] + addr_t'(i)] = data_t'($urandom_range(600)) - data_t'(300);
      end
      for (int s = 0; s < B; s++) for (int i = 0; i < R * C; i++) expect_w[out_base[s] + addr_t'(i)] = 1;
      // cycle formula
      for (int rt = 0; rt < rh; rt += tre) begin
        automatic int nr = (rh - rt < tre) ? rh - rt : tre;
        for (int c0 = 0; c0 < C; c0 += tce) begin
          automatic int nc = (C - c0 < tce) ? C - c0 : tce;
          expect_cyc += BP * ((ppad / tpe) * (tpe * nc + nr * tpe + 2 + nr) + nr * nc);
        end
      end
      expect_cyc += 2;
      dim_r = 16'(R); dim_p = 16'(P); dim_c = 16'(C);
      b_act = 3'(B); pol_br = 3'(BR); pol_k = kk;
      n_writes = 0; bad_writes = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(cyc == expect_cyc, $sformatf("cycles %0d expected %0d (R=%0d P=%0d C=%0d B=%0d BR=%0d k=%0d)", cyc, expect_cyc, R, P, C, B, BR, kk));
      chk(bad_writes == 0 && n_writes == B * R * C, $sformatf("writes %0d bad %0d", n_writes, bad_writes));
      for (int s = 0; s < B; s++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        automatic acc_t acc = 0;
        for (int p = 0; p < P; p++)
          acc += acc_t'(xval(s, r, p, P)) * acc_t'(mem[w_base + addr_t'(p * C + c)]);
        chk(mem[out_base[s] + addr_t'(r * C + c)] == requant(acc),
            $sformatf("out s=%0d r=%0d c=%0d k=%0d BR=%0d", s, r, c, kk, BR));
        if (r == 0 && c == 0) chk(conf[s] == requant(acc), "conf");
      end
    end
    chk(n_conv > 0 && n_pad_taps > 0, "convolution layers with padding were run");
    $display("convolution layers %0d (with padding %0d)", n_conv, n_pad_taps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
