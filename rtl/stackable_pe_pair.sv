// stackable_pe_pair: two neighbouring processing elements that can be
// stacked or split at run time (Stackable PEs).
//
// Each PE is a multiply-accumulate tree of width T_P: T_P multipliers feeding
// an adder tree. The pair has demultiplexers on the two tree outputs and one
// extra adder shared by the pair, so that:
//   k = 1   : each PE computes its own dot product      -> y[0], y[1]
//   k = 2   : the two trees are joined by the shared adder into one
//             2*T_P-wide dot product                    -> y[0]
//   k = 1/2 : each tree is cut below its root into two halves of
//             floor(T_P/2) lanes that produce two separate dot products
//                                                       -> y[0..3]
//             (PE i gives y[0], y[1]; PE i+1 gives y[2], y[3])
// The k = 2 path (demultiplexers and one adder per two PEs) is the paper's
// drawing; the k = 1/2 split is described only by its effect on the tile
// shape, and cutting each tree into halves is this design's realisation.
// With an odd T_P the last lane is unused when k = 1/2.
// Purely combinational; the accumulators that follow the demultiplexers in
// the paper's drawing are the output-buffer accumulators of npu_core, one per
// pipelined row.
module stackable_pe_pair
  import fb_pkg::*;
#(
  parameter int unsigned T_P = 7,
  localparam int unsigned H = T_P / 2
) (
  input  pe_mode_e   k,
  input  data_t      a0 [T_P],
  input  data_t      w0 [T_P],
  input  data_t      a1 [T_P],
  input  data_t      w1 [T_P],
  output acc_t       y  [4],
  output logic [3:0] y_valid
);

  acc_t lo0, hi0, rest0, lo1, hi1, rest1;
  acc_t full0, full1;

  // MAC trees, with their halves exposed
  always_comb begin
    lo0 = '0; hi0 = '0; rest0 = '0;
    lo1 = '0; hi1 = '0; rest1 = '0;
    for (int j = 0; j < T_P; j++) begin
      if (j < H) begin
        lo0 = lo0 + acc_t'(a0[j]) * acc_t'(w0[j]);
        lo1 = lo1 + acc_t'(a1[j]) * acc_t'(w1[j]);
      end else if (j < 2 * H) begin
        hi0 = hi0 + acc_t'(a0[j]) * acc_t'(w0[j]);
        hi1 = hi1 + acc_t'(a1[j]) * acc_t'(w1[j]);
      end else begin
        rest0 = rest0 + acc_t'(a0[j]) * acc_t'(w0[j]);
        rest1 = rest1 + acc_t'(a1[j]) * acc_t'(w1[j]);
      end
    end
    full0 = lo0 + hi0 + rest0;
    full1 = lo1 + hi1 + rest1;
  end

  // demultiplexers and the shared adder
  always_comb begin
    y[0] = '0; y[1] = '0; y[2] = '0; y[3] = '0;
    y_valid = 4'b0000;
    unique case (k)
      K_TWO: begin
        y[0]    = full0 + full1;
        y_valid = 4'b0001;
      end
      K_HALF: begin
        y[0] = lo0; y[1] = hi0; y[2] = lo1; y[3] = hi1;
        y_valid = 4'b1111;
      end
      default: begin
        y[0] = full0; y[1] = full1;
        y_valid = 4'b0011;
      end
    endcase
  end

endmodule
