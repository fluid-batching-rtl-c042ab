// exit_latency_lut: per-exit latency table used by the preemption criterion.
//
// N_EXITS x B_MAX entries; entry (e, b) is the NPU time, in clock cycles, to
// run subnet e (the layers after exit e-1 up to and including exit e) with a
// batch of b samples. The paper fills such a table at design time by
// profiling or from a performance model, and loads it on deployment; here it
// is written through the cfg_* port. Two combinational read ports let the
// scheduler look up the new batch and the merged batch in the same cycle.
// Batch size 0 reads as 0 cycles. Entries reset to 0 (this design's choice).
module exit_latency_lut #(
  parameter int unsigned N_EXITS = 4,
  parameter int unsigned B_MAX   = 8,
  parameter int unsigned LAT_W   = 32,
  localparam int unsigned EW = (N_EXITS > 1) ? $clog2(N_EXITS) : 1,
  localparam int unsigned CW = $clog2(B_MAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [EW-1:0]    cfg_exit,
  input  logic [CW-1:0]    cfg_bsize,
  input  logic [LAT_W-1:0] cfg_lat,
  input  logic [EW-1:0]    rd_exit_a,
  input  logic [CW-1:0]    rd_b_a,
  output logic [LAT_W-1:0] lat_a,
  input  logic [EW-1:0]    rd_exit_b,
  input  logic [CW-1:0]    rd_b_b,
  output logic [LAT_W-1:0] lat_b
);

  logic [LAT_W-1:0] tbl [N_EXITS][B_MAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < N_EXITS; e++)
        for (int b = 0; b < B_MAX; b++) tbl[e][b] <= '0;
    end else if (cfg_we && cfg_bsize != '0 && cfg_bsize <= CW'(B_MAX)
                 && 32'(cfg_exit) < N_EXITS) begin
      tbl[cfg_exit][cfg_bsize-1] <= cfg_lat;
    end
  end

  always_comb begin
    lat_a = '0;
    lat_b = '0;
    if (rd_b_a != '0 && rd_b_a <= CW'(B_MAX) && 32'(rd_exit_a) < N_EXITS)
      lat_a = tbl[rd_exit_a][rd_b_a-1];
    if (rd_b_b != '0 && rd_b_b <= CW'(B_MAX) && 32'(rd_exit_b) < N_EXITS)
      lat_b = tbl[rd_exit_b][rd_b_b-1];
  end

endmodule
