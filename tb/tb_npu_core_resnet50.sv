// tb_npu_core_resnet50: workload test of the NPU core at its default size.
//
// Runs real ResNet-50 layer shapes on the full engine <T_R, T_P, T_C> =
// <4652, 7, 128> with B_MAX = 8:
//  1. the final fully-connected layer, 2048 -> 1000, with a full batch of 8
//     under R-batching (B_R = 8) and k = 1;
//  2. a stage-4 3x3 convolution with stride 1 and zero padding 1 whose
//     Toeplitz matrix the DMA forms from a 7x7 map, cut to 16 input and 32
//     output channels so the reference stays quick, with a batch of 3
//     under hybrid Fluid Batching (B_R = 2, B_P = 2) and k = 2.
// Data are random Q8.8 values. Each sample's outputs are compared with a
// reference GEMM, and the layer's cycle count with the loop-nest formula.
module tb_npu_core_resnet50;
  import fb_pkg::*;
  localparam int TR = 4652, TP = 7, TC = 128, BM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; logic [15:0] dim_r, dim_p, dim_c; addr_t w_base;
  addr_t in_base [BM], out_base [BM]; logic [3:0] b_act, pol_br; pe_mode_e pol_k;
  logic busy, done, mem_re, mem_we; addr_t mem_addr; data_t mem_wdata, mem_rdata;
  data_t conf [BM]; logic [31:0] n_comp_cycles, n_busy_cycles;
  conv_geom_t geom;
  int checks = 0, failures = 0;

  data_t mem [addr_t];

  npu_core dut (.*);

  always @(posedge clk) begin
    mem_rdata <= mem.exists(mem_addr) ? mem[mem_addr] : data_t'(0);
    if (mem_we) mem[mem_addr] = mem_wdata;
  end

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic int ceil_div(int a, int b); return (a + b - 1) / b; endfunction

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

  task automatic run_layer(input string name, input int R, input int P, input int C,
                           input int n_in, input int B, input int BR, input pe_mode_e kk);
    int tre, tpe, tce, ppad, rh, BP, cyc, expect_cyc;
    BP = B - BR + 1;
    tre = (kk == K_ONE) ? TR : TR / 2;
    tpe = (kk == K_TWO) ? 2 * TP : (kk == K_HALF) ? TP / 2 : TP;
    tce = (kk == K_TWO) ? TC / 2 : (kk == K_HALF) ? 2 * TC : TC;
    ppad = ceil_div(P, tpe) * tpe;
    rh = BR * R;
    mem.delete();
    w_base = 32'h1000_0000;
    for (int i = 0; i < P * C; i++) mem[w_base + addr_t'(i)] = data_t'($urandom_range(64)) - data_t'(32);
    for (int s = 0; s < BM; s++) begin
      in_base[s]  = addr_t'(32'h2000_0000 + s * 32'h10_0000);
      out_base[s] = addr_t'(32'h3000_0000 + s * 32'h10_0000);
    end
    for (int s = 0; s < B; s++)
      for (int i = 0; i < n_in; i++) mem[in_base[s] + addr_t'(i)] = data_t'($urandom_range(512)) - data_t'(256);
    expect_cyc = 2;
    for (int rt = 0; rt < rh; rt += tre) begin
      automatic int nr = (rh - rt < tre) ? rh - rt : tre;
      for (int c0 = 0; c0 < C; c0 += tce) begin
        automatic int nc = (C - c0 < tce) ? C - c0 : tce;
        expect_cyc += BP * ((ppad / tpe) * (tpe * nc + nr * tpe + 2 + nr) + nr * nc);
      end
    end
    dim_r = 16'(R); dim_p = 16'(P); dim_c = 16'(C);
    b_act = 4'(B); pol_br = 4'(BR); pol_k = kk;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == expect_cyc, $sformatf("%s: cycles %0d expected %0d", name, cyc, expect_cyc));
    for (int s = 0; s < B; s++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      automatic acc_t acc = 0;
      for (int p = 0; p < P; p++) acc += acc_t'(xval(s, r, p, P)) * acc_t'(mem[w_base + addr_t'(p * C + c)]);
      chk(mem[out_base[s] + addr_t'(r * C + c)] == requant(acc), $sformatf("%s: out s=%0d r=%0d c=%0d", name, s, r, c));
    end
    $display("%s: R=%0d P=%0d C=%0d B=%0d B_R=%0d k=%0d: %0d cycles, %0d compute cycles",
             name, R, P, C, B, BR, kk, cyc, n_comp_cycles);
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    geom = '0;
    run_layer("fc1000", 1, 2048, 1000, 2048, 8, 8, K_ONE);
    geom.ksz = 3; geom.stride = 1; geom.pad = 1;
    geom.in_h = 7; geom.in_w = 7; geom.in_c = 16; geom.out_w = 7;
    run_layer("conv3x3", 49, 9 * 16, 32, 49 * 16, 3, 2, K_TWO);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
