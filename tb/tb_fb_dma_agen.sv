// tb_fb_dma_agen: self-checking test of the Fluid Batching address generator.
// For random R, P, B_act and B_R it sweeps the whole formed matrix
// (B_R * R rows, B_P = B_act - B_R + 1 column blocks, guard-padded columns)
// and checks that every sample's every element is addressed exactly once,
// at base[s] + r * P + p, that guard columns and empty cells are invalid,
// and the R- and P-batching extremes. It then checks Toeplitz formation:
// for random kernel size, stride, zero padding and feature map size, each
// element of the formed matrix must address input pixel (oy*S+ky-pad,
// ox*S+kx-pad), channel ci, or be invalid (zero) in the padding.
module tb_fb_dma_agen;
  import fb_pkg::*;
  localparam int BM = 8;
  logic [19:0] r_hat; logic [3:0] cb; logic [15:0] col, n_rows, row_len;
  logic [3:0] b_act, b_r; addr_t base [BM]; conv_geom_t geom = '0;
  logic valid; logic [3:0] sample; logic [15:0] row; addr_t addr;
  int checks = 0, failures = 0;

  fb_dma_agen #(.B_MAX(BM)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int s = 0; s < BM; s++) base[s] = addr_t'(s * 32'h1000 + 32'h40000);
    for (int n = 0; n < 60; n++) begin
      automatic int R = $urandom_range(5, 1), P = $urandom_range(6, 1), tp = $urandom_range(4, 1);
      automatic int B = $urandom_range(BM, 1);
      automatic int BR = (n == 0) ? B : (n == 1) ? 1 : $urandom_range(B, 1);
      automatic int BP = B - BR + 1;
      automatic int pp = ((P + tp - 1) / tp) * tp;
      automatic int hits [BM][8][8];
      foreach (hits[a, b, c]) hits[a][b][c] = 0;
      n_rows = 16'(R); row_len = 16'(P); b_act = 4'(B); b_r = 4'(BR);
      for (int rh = 0; rh < BR * R; rh++)
        for (int c = 0; c < BP; c++)
          for (int p = 0; p < pp; p++) begin
            automatic int s = rh / R + c * BR;
            r_hat = 20'(rh); cb = 4'(c); col = 16'(p); #1;
            if (s < B && p < P) begin
              chk(valid && int'(sample) == s && int'(row) == rh % R &&
                  addr == base[s] + addr_t'((rh % R) * P + p), "element address");
              hits[s][rh % R][p]++;
            end else chk(!valid, "guard or empty cell");
          end
      for (int s = 0; s < B; s++) for (int r = 0; r < R; r++) for (int p = 0; p < P; p++)
        chk(hits[s][r][p] == 1, $sformatf("covered once s=%0d r=%0d p=%0d (B=%0d BR=%0d)", s, r, p, B, BR));
    end
    // Toeplitz formation: random convolution geometries, every element of
    // every sample's R x P matrix against a direct im2col model
    for (int n = 0; n < 40; n++) begin
      automatic int ks = $urandom_range(3, 1), st = $urandom_range(2, 1), pd = $urandom_range(ks / 2, 0);
      automatic int ih = $urandom_range(5, 1), iw = $urandom_range(5, 1), ic = $urandom_range(3, 1);
      automatic int oh, ow, R, P, B = $urandom_range(BM, 1), BR = $urandom_range(B, 1);
      if (ih + 2 * pd < ks) ih = ks; if (iw + 2 * pd < ks) iw = ks;
      oh = (ih + 2 * pd - ks) / st + 1; ow = (iw + 2 * pd - ks) / st + 1;
      R = oh * ow; P = ks * ks * ic;
      geom.ksz = 8'(ks); geom.stride = 4'(st); geom.pad = 4'(pd);
      geom.in_h = 16'(ih); geom.in_w = 16'(iw); geom.in_c = 16'(ic); geom.out_w = 16'(ow);
      n_rows = 16'(R); row_len = 16'(P); b_act = 4'(B); b_r = 4'(BR);
      for (int rh = 0; rh < BR * R; rh++)
        for (int c = 0; c < B - BR + 1; c++)
          for (int ky = 0; ky < ks; ky++) for (int kx = 0; kx < ks; kx++) for (int ci = 0; ci < ic; ci++) begin
            automatic int s = rh / R + c * BR, r = rh % R;
            automatic int iy = (r / ow) * st + ky - pd, ix = (r % ow) * st + kx - pd;
            automatic bit in_map = iy >= 0 && ix >= 0 && iy < ih && ix < iw;
            r_hat = 20'(rh); cb = 4'(c); col = 16'((ky * ks + kx) * ic + ci); #1;
            if (s < B && in_map)
              chk(valid && int'(sample) == s &&
                  addr == base[s] + addr_t'((iy * iw + ix) * ic + ci), "Toeplitz element address");
            else chk(!valid, "padding tap or empty cell reads as zero");
          end
    end
    geom = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
