// bp_pkg: types and constants shared by the BP-im2col accelerator.
//
// The accelerator computes the two backpropagation products of a
// convolutional layer on a 16x16 input-stationary systolic array:
//   MODE_LOSS (transposed-convolution mode): dI = dO_ei * Tr(rot180(W))
//   MODE_GRAD (dilated-convolution mode):    Tr(dW) = Tr(I_e) * Tr(dO_i)
// A layer is described by layer_cfg_t (the shape the host gives) and by
// layer_dims_t, the derived sizes and products that the controller works out
// once per run, so that the address generators only divide and multiply by
// ready-made constants.  The array size (16) and FP32 data follow the paper;
// the field widths are this design's own choice.
package bp_pkg;

  localparam int unsigned ARRAY_DIM = 16;   // systolic array is 16 x 16
  localparam int unsigned DATA_W    = 32;   // FP32 data
  localparam int unsigned ADDR_W    = 32;   // virtual and buffer addresses
  localparam int unsigned DIM_W     = 16;   // one layer dimension
  localparam int unsigned LANE_W    = $clog2(ARRAY_DIM);

  typedef logic [DATA_W-1:0] word_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DIM_W-1:0]  dim_t;
  typedef logic [LANE_W-1:0] lane_t;

  typedef enum logic {
    MODE_LOSS = 1'b0,   // loss calculation, transposed convolution (Alg. 1 on B)
    MODE_GRAD = 1'b1    // gradient calculation, dilated convolution (Alg. 2 on A)
  } mode_e;

  // Layer shape as the host gives it.
  typedef struct packed {
    mode_e mode;
    dim_t  bsz;   // batch size B
    dim_t  c;     // input channels C
    dim_t  n;     // output channels N
    dim_t  hi;    // input height Hi
    dim_t  wi;    // input width Wi
    dim_t  kh;    // kernel height Kh
    dim_t  kw;    // kernel width Kw
    dim_t  s;     // stride S (>= 1)
    dim_t  ph;    // padding in height Ph (<= Kh-1)
    dim_t  pw;    // padding in width Pw (<= Kw-1)
  } layer_cfg_t;

  // Derived sizes, computed by compute_ctrl during set-up.
  typedef struct packed {
    addr_t ho, wo;        // output height / width
    addr_t hoo, woo;      // Ho'' = Ho+(Ho-1)(S-1), Wo''
    addr_t offh, offw;    // Kh-1-Ph, Kw-1-Pw
    addr_t hiwi;          // Hi*Wi
    addr_t bhiwi;         // B*Hi*Wi
    addr_t chiwi;         // C*Hi*Wi
    addr_t howo;          // Ho*Wo
    addr_t nhowo;         // N*Ho*Wo
    addr_t hoowoo;        // Ho''*Wo''
    addr_t bhoowoo;       // B*Ho''*Wo''
    addr_t khkw;          // Kh*Kw
    addr_t m_dim;         // rows of A (= rows of the result)
    addr_t k_dim;         // columns of A = rows of B
    addr_t nc_dim;        // columns of B (= columns of the result)
    addr_t k_tiles;       // ceil(K/16)
    addr_t n_tiles;       // ceil(NC/16)
  } layer_dims_t;

endpackage
