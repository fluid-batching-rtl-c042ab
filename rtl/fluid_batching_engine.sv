// fluid_batching_engine: the Control Unit plus the Fluid Batching Control
// Block, as drawn in the paper's engine diagram.
//
// The CU tracks the active batch size B_act and the layer index l from the
// early-exit, preemption and layer-end events; B_act and l address the FBCB,
// whose entry is the batching policy <B_R, B_P, k> that configures the NPU's
// DMA and its Stackable PEs for the layer about to run. The policy output is
// combinational from the CU registers, so it is valid one cycle after the
// event that changed B_act or l. The FBCB is filled through the cfg_* port.
module fluid_batching_engine
  import fb_pkg::*;
#(
  parameter int unsigned N_LAYERS = 62,
  parameter int unsigned B_MAX    = 8,
  localparam int unsigned LW  = $clog2(N_LAYERS + 1),
  localparam int unsigned TLW = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1,
  localparam int unsigned CW  = $clog2(B_MAX + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // scheduler and NPU events
  input  logic           start,
  input  logic           preempt,
  input  logic [CW-1:0]  b_incr,
  input  logic           layer_done,
  input  logic           exit_evt,
  input  logic [CW-1:0]  b_exit,
  // FBCB fill port
  input  logic           cfg_we,
  input  logic [TLW-1:0] cfg_layer,
  input  logic [CW-1:0]  cfg_bsize,
  input  logic [CW-1:0]  cfg_br,
  input  pe_mode_e       cfg_k,
  // state and policy
  output logic [CW-1:0]  b_act,
  output logic [LW-1:0]  layer,
  output logic [CW-1:0]  b_old,
  output logic [LW-1:0]  l_old,
  output logic           parked,
  output logic           merge,
  output logic           preempt_err,
  output logic [CW-1:0]  pol_br,
  output logic [CW-1:0]  pol_bp,
  output pe_mode_e       pol_k
);

  fbe_cu #(.N_LAYERS(N_LAYERS), .B_MAX(B_MAX)) u_cu (
    .clk, .rst_n, .start, .preempt, .b_incr, .layer_done, .exit_evt, .b_exit,
    .b_act, .layer, .b_old, .l_old, .parked, .merge, .preempt_err);

  logic [TLW-1:0] rd_layer;
  assign rd_layer = (32'(layer) < N_LAYERS) ? TLW'(layer) : '0;

  fbcb #(.N_LAYERS(N_LAYERS), .B_MAX(B_MAX)) u_fbcb (
    .clk, .rst_n, .cfg_we, .cfg_layer, .cfg_bsize, .cfg_br, .cfg_k,
    .rd_layer, .rd_bact(b_act), .br(pol_br), .bp(pol_bp), .k(pol_k));

endmodule
