// fbcb: Fluid Batching Control Block.
//
// A look-up table with one entry per (layer, batch size): N_LAYERS x B_MAX
// entries. Each entry holds the batching policy chosen at design time for
// that layer and active batch size: B_R, the number of samples stacked along
// the R (row) dimension of the input matrix, in ceil(log2(B_MAX)) bits (stored
// as B_R-1), and the Stackable-PE configuration k in 2 bits. B_P, the number
// of sample groups appended along the P dimension, is not stored but derived
// as B_P = B_act - B_R + 1 (Eq. 1 of the design). Both the entry layout and
// the derivation follow the paper; the table is built from flip-flops, as the
// paper reports its cost in registers.
//
// Interface: a write port (cfg_we, cfg_layer, cfg_bsize in 1..B_MAX, cfg_br,
// cfg_k) fills the table; a read port addressed by (rd_layer, rd_bact) returns
// <B_R, B_P, k> combinationally. For rd_bact = 0 the policy is all zeros.
// Out-of-range B_R written by the host is clamped to the batch size.
// Reset loads R-batching (B_R = batch size, k = 1) in every entry, which is
// this design's choice of a safe default.
module fbcb
  import fb_pkg::*;
#(
  parameter int unsigned N_LAYERS = 62,
  parameter int unsigned B_MAX    = 8,
  localparam int unsigned LW  = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1,
  localparam int unsigned BRW = (B_MAX > 1) ? $clog2(B_MAX) : 1,
  localparam int unsigned CW  = $clog2(B_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [LW-1:0] cfg_layer,
  input  logic [CW-1:0] cfg_bsize,
  input  logic [CW-1:0] cfg_br,
  input  pe_mode_e      cfg_k,
  input  logic [LW-1:0] rd_layer,
  input  logic [CW-1:0] rd_bact,
  output logic [CW-1:0] br,
  output logic [CW-1:0] bp,
  output pe_mode_e      k
);

  typedef struct packed {
    logic [BRW-1:0] br_m1;
    pe_mode_e       k;
  } entry_t;

  entry_t tbl [N_LAYERS][B_MAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LAYERS; l++)
        for (int b = 0; b < B_MAX; b++)
          tbl[l][b] <= '{br_m1: BRW'(b), k: K_ONE};
    end else if (cfg_we && cfg_bsize != '0 && cfg_bsize <= CW'(B_MAX)
                 && 32'(cfg_layer) < N_LAYERS) begin
      tbl[cfg_layer][cfg_bsize-1] <= '{
        br_m1: (cfg_br == '0) ? '0 :
               (cfg_br > cfg_bsize) ? BRW'(cfg_bsize - 1) : BRW'(cfg_br - 1),
        k: cfg_k};
    end
  end

  entry_t e;
  always_comb begin
    e  = '{br_m1: '0, k: K_ONE};
    br = '0;
    bp = '0;
    k  = K_ONE;
    if (rd_bact != '0 && rd_bact <= CW'(B_MAX) && 32'(rd_layer) < N_LAYERS) begin
      e  = tbl[rd_layer][rd_bact-1];
      br = CW'(e.br_m1) + CW'(1);
      bp = rd_bact - br + CW'(1);
      k  = e.k;
    end
  end

endmodule
