// fbe_cu: Control Unit of the Fluid Batching Engine.
//
// Keeps the register file <B_old, l_old, B_act, l> and updates it from the
// events the paper names: early-exit events with B_exit, preemptions with
// B_incr, and the end of each layer.
//   start   (b_incr)   : a fresh batch enters; B_act = B_incr, l = 0.
//   layer_done         : the NPU finished layer l; l = l + 1.
//   exit_evt (b_exit)  : given together with layer_done of an exit layer;
//                        B_act = B_act - B_exit. If a preempted batch is
//                        parked and this exit is the preemption point
//                        (l + 1 == l_old) the two batches merge:
//                        B_act = B_old + B_act - B_exit, and the layer
//                        counter simply continues at l_old.
//   preempt (b_incr)   : given after an exit; the remaining batch is parked,
//                        B_old = B_act, l_old = l (the layer it resumes at),
//                        B_act = B_incr and l = 0 for the new batch.
// Backfilling is not nested (as in the paper): a preempt while a batch is
// parked is ignored and flagged on preempt_err. The event encoding and the
// exact register-update rules are this design's reading of the paper's
// description; the paper gives the registers and their roles.
// All updates take effect on the next clock edge.
module fbe_cu #(
  parameter int unsigned N_LAYERS = 62,
  parameter int unsigned B_MAX    = 8,
  localparam int unsigned LW = $clog2(N_LAYERS + 1),
  localparam int unsigned CW = $clog2(B_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          preempt,
  input  logic [CW-1:0] b_incr,
  input  logic          layer_done,
  input  logic          exit_evt,
  input  logic [CW-1:0] b_exit,
  output logic [CW-1:0] b_act,
  output logic [LW-1:0] layer,
  output logic [CW-1:0] b_old,
  output logic [LW-1:0] l_old,
  output logic          parked,     // a preempted batch is waiting
  output logic          merge,      // pulse: the merge happened this cycle
  output logic          preempt_err
);

  logic [CW-1:0] after_exit;
  assign after_exit = (exit_evt && b_exit <= b_act) ? b_act - b_exit :
                      exit_evt ? '0 : b_act;
  assign merge = exit_evt && layer_done && parked && (layer + LW'(1) == l_old);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_act <= '0; layer <= '0; b_old <= '0; l_old <= '0;
      parked <= 1'b0; preempt_err <= 1'b0;
    end else begin
      preempt_err <= 1'b0;
      if (start) begin
        b_act  <= b_incr;
        layer  <= '0;
        parked <= 1'b0;
      end else if (preempt) begin
        if (parked) preempt_err <= 1'b1;
        else begin
          b_old  <= b_act;
          l_old  <= layer;
          b_act  <= b_incr;
          layer  <= '0;
          parked <= 1'b1;
        end
      end else begin
        if (layer_done) layer <= layer + LW'(1);
        if (merge) begin
          b_act  <= b_old + after_exit;
          parked <= 1'b0;
        end else begin
          b_act <= after_exit;
        end
      end
    end
  end

  // An exit event always marks the end of a layer.
  assert property (@(posedge clk) disable iff (!rst_n) exit_evt |-> layer_done);
  // B_act never exceeds B_MAX.
  assert property (@(posedge clk) disable iff (!rst_n) b_act <= CW'(B_MAX));

endmodule
