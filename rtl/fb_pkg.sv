// fb_pkg: types and constants shared by the Fluid Batching engine, the
// Stackable-PE array and the NPU.
//
// The Stackable-PE configuration k takes three values, 1/2, 1 and 2, and the
// FBCB stores it in 2 bits (both as in the paper). The code points below are
// this design's choice. Data are 16-bit fixed point as in the paper's
// evaluation; the Q8.8 split (FRAC_W) and the 32-bit accumulator are this
// design's choice.
package fb_pkg;

  // Stackable-PE configuration k.
  typedef enum logic [1:0] {
    K_ONE  = 2'd0,  // default <T_R, T_P, T_C>
    K_HALF = 2'd1,  // <T_R/2, T_P/2, 2*T_C>
    K_TWO  = 2'd2   // <T_R/2, 2*T_P, T_C/2>
  } pe_mode_e;

  localparam int unsigned DATA_W = 16;  // activations and weights
  localparam int unsigned ACC_W  = 32;  // MAC tree sums and accumulators
  localparam int unsigned FRAC_W = 8;   // Q8.8 fixed point
  localparam int unsigned ADDR_W = 32;  // off-chip word address

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [ADDR_W-1:0]        addr_t;

  // Convolution geometry for Toeplitz (im2col) formation by the DMA. Row r
  // of a sample's input matrix is output pixel (r / out_w, r mod out_w);
  // column p is kernel tap (p / (ksz*in_c), (p / in_c) mod ksz) of input
  // channel p mod in_c. Taps that fall in the zero padding read as zero.
  // ksz = 0 means the input matrix is stored as it is (dense R x P).
  typedef struct packed {
    logic [7:0]  ksz;        // kernel size (square); 0 = no Toeplitz formation
    logic [3:0]  stride;
    logic [3:0]  pad;
    logic [15:0] in_h;       // input feature map height
    logic [15:0] in_w;       // input feature map width
    logic [15:0] in_c;       // input channels (innermost in memory)
    logic [15:0] out_w;      // output feature map width
  } conv_geom_t;

  // One layer of the model as the layer runner sees it. The input is either
  // the request's image (src_img) or the output of an earlier layer, so an
  // exit head can branch off the backbone.
  typedef struct packed {
    logic [15:0] r;          // rows of the per-sample input matrix
    logic [15:0] p;          // columns of the input matrix (reduction)
    logic [15:0] c;          // columns of the output matrix
    addr_t       w_base;     // P x C weight matrix, row-major
    logic        src_img;    // read the request image
    logic [7:0]  src_layer;  // else read this layer's output
    logic        is_exit;    // this layer is an exit classifier
    logic [7:0]  exit_idx;   // which exit (the last one is the final output)
    conv_geom_t  geom;       // Toeplitz formation of the input
  } layer_desc_t;

  // Requantise an accumulator to a Q8.8 word: arithmetic shift, saturate.
  function automatic data_t requant(acc_t a);
    acc_t s;
    s = a >>> FRAC_W;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DATA_W-1:0]);
  endfunction

endpackage
