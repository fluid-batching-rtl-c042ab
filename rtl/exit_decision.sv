// exit_decision: early-exit decision at an exit classifier.
//
// For every sample of the active batch (positions 0..b_act-1) the exit head
// supplies a confidence value, the softmax top-1 probability, in Q8.8. A
// sample exits when its confidence reaches the threshold; the paper uses one
// threshold of 0.8 at all exits, which is 205/256 in Q8.8 (the default). At
// the final exit every remaining sample leaves (final = 1). The outputs are
// the exit mask and its population count B_exit. Purely combinational.
// That the confidence arrives as a ready Q8.8 value computed by the exit head
// (the softmax itself is not built here) is this design's choice.
module exit_decision
  import fb_pkg::*;
#(
  parameter int unsigned B_MAX  = 8,
  parameter int unsigned THRESH = 205,   // 0.8 in Q8.8
  localparam int unsigned CW = $clog2(B_MAX + 1)
) (
  input  data_t         conf [B_MAX],
  input  logic [CW-1:0] b_act,
  input  logic          final_exit,
  output logic [B_MAX-1:0] exit_mask,
  output logic [CW-1:0]    b_exit
);

  always_comb begin
    exit_mask = '0;
    b_exit    = '0;
    for (int s = 0; s < B_MAX; s++) begin
      if (CW'(s) < b_act &&
          (final_exit || conf[s] >= data_t'(THRESH))) begin
        exit_mask[s] = 1'b1;
        b_exit       = b_exit + CW'(1);
      end
    end
  end

endmodule
