// fb_dma_agen: Fluid Batching address generator of the NPU's DMA.
//
// Fluid Batching lays the active batch out as one input matrix of
// R_hat = B_R * R rows and B_P column blocks, B_P = B_act - B_R + 1 (Eq. 1).
// Row block rb and column block cb hold sample s = rb + cb * B_R; cells whose
// s is not below B_act are empty and read as zero. R-batching (B_R = B_act)
// and P-batching (B_R = 1) are the two extremes. Inside a column block a
// sample's P columns are followed by zero guard columns up to the padded
// width, so that no P-tile mixes two samples.
// Given a position (r_hat, cb, col) of the formed matrix, this block returns
// the sample s, its own row r = r_hat mod R, whether the element is real
// (valid = s < B_act and col < row_len), and its off-chip word address
// base[s] + r * row_len + col. The same logic addresses the output matrix
// (row_len = C), whose rows go back to each sample's own R x C matrix.
// Toeplitz formation: when geom.ksz is not zero the sample's input is a
// feature map (in_h x in_w pixels, in_c channels innermost) and the element
// (row, col) of its R x P matrix is formed on the fly as the input pixel
// under kernel tap col of output pixel row, or zero where the tap falls in
// the padding. geom.ksz = 0 (and all output addressing) uses the stored
// matrix directly. Forming the matrix in the DMA follows the paper; the
// pixel-major, channel-innermost layout is this design's choice.
// The placement of samples in the grid is this design's choice: the paper
// gives the dimensions (Eq. 1) and a drawing for B = 4 with a 2 x 2 grid,
// which this placement reproduces. Combinational.
module fb_dma_agen
  import fb_pkg::*;
#(
  parameter int unsigned B_MAX = 8,
  parameter int unsigned DIM_W = 16,
  localparam int unsigned CW = $clog2(B_MAX + 1),
  localparam int unsigned SW = (B_MAX > 1) ? $clog2(B_MAX) : 1
) (
  input  logic [DIM_W+CW-1:0] r_hat,
  input  logic [CW-1:0]       cb,
  input  logic [DIM_W-1:0]    col,
  input  logic [DIM_W-1:0]    n_rows,    // R of one sample
  input  logic [DIM_W-1:0]    row_len,   // P (input) or C (output)
  input  logic [CW-1:0]       b_act,
  input  logic [CW-1:0]       b_r,
  input  addr_t               base [B_MAX],
  input  conv_geom_t          geom,
  output logic                valid,
  output logic [CW-1:0]       sample,
  output logic [DIM_W-1:0]    row,
  output addr_t               addr
);

  logic [DIM_W+CW-1:0] rb;
  logic [2*CW:0]       s_wide;
  // Toeplitz indices
  logic [DIM_W-1:0]    oy, ox, ky, kx, ci, kc_rem;
  logic [DIM_W+7:0]    kc;
  logic signed [DIM_W+9:0] iy, ix;
  logic                in_map;
  addr_t               off;

  always_comb begin
    kc     = (DIM_W+8)'(geom.ksz) * (DIM_W+8)'(geom.in_c);
    oy     = (geom.out_w == '0) ? '0 : row / geom.out_w;
    ox     = (geom.out_w == '0) ? '0 : row % geom.out_w;
    ky     = (kc == '0) ? '0 : DIM_W'((DIM_W+8)'(col) / kc);
    kc_rem = (kc == '0) ? '0 : DIM_W'((DIM_W+8)'(col) % kc);
    kx     = (geom.in_c == '0) ? '0 : kc_rem / geom.in_c;
    ci     = (geom.in_c == '0) ? '0 : kc_rem % geom.in_c;
    iy     = (DIM_W+10)'(oy) * (DIM_W+10)'(geom.stride) + (DIM_W+10)'(ky) - (DIM_W+10)'(geom.pad);
    ix     = (DIM_W+10)'(ox) * (DIM_W+10)'(geom.stride) + (DIM_W+10)'(kx) - (DIM_W+10)'(geom.pad);
    in_map = (iy >= 0) && (iy < (DIM_W+10)'(geom.in_h)) && (ix >= 0) && (ix < (DIM_W+10)'(geom.in_w));
    if (geom.ksz == '0)
      off = ADDR_W'(row) * ADDR_W'(row_len) + ADDR_W'(col);
    else
      off = (ADDR_W'(iy) * ADDR_W'(geom.in_w) + ADDR_W'(ix)) * ADDR_W'(geom.in_c) + ADDR_W'(ci);
  end

  always_comb begin
    rb     = (n_rows == '0) ? '0 : r_hat / (DIM_W+CW)'(n_rows);
    row    = (n_rows == '0) ? '0 : DIM_W'(r_hat % (DIM_W+CW)'(n_rows));
    s_wide = (2*CW+1)'(rb) + (2*CW+1)'(cb) * (2*CW+1)'(b_r);
    valid  = (rb < (DIM_W+CW)'(B_MAX)) && (s_wide < (2*CW+1)'(b_act)) && (col < row_len) &&
             ((geom.ksz == '0) || in_map);
    sample = valid ? CW'(s_wide) : '0;
    addr   = '0;
    if (valid)
      addr = base[sample[SW-1:0]] + off;
  end

endmodule
