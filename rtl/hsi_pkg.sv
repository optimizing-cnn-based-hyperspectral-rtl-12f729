// hsi_pkg: types and constants shared by the HSI CNN accelerator.
//
// Numbers are 16-bit two's-complement fixed point with FRAC fraction bits
// (Q8.8 by default). Products are Q16.16 and are summed in ACC_W-bit
// accumulators; a result is shifted right by FRAC, saturated and optionally
// passed through ReLU before it is stored back as a 16-bit feature.
//
// A layer is described by layer_desc_t, written field by field by the host
// processor through the control unit's register port. Tensors live in the
// feature buffers as strided views: element (row r, column c, channel k) of
// band g sits at  g*gstride + r*rs + c*cs + k*ks. With these strides the
// band split and the concatenation of the network need no data movement.
// The 16-bit width follows the paper; the Q8.8 split, accumulator width and
// descriptor layout are this design's choices.
package hsi_pkg;

  localparam int DATA_W  = 16;   // feature / weight width
  localparam int FRAC    = 8;    // fraction bits of DATA_W numbers
  localparam int PROD_W  = 2 * DATA_W;
  localparam int ACC_W   = 40;   // accumulator width
  localparam int DDR_AW  = 32;   // DDR beat address width

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef enum logic [1:0] {
    L_CONV3 = 2'd0,   // 3x3 valid convolution, stride 1
    L_CONV1 = 2'd1,   // 1x1 convolution
    L_FC    = 2'd2    // fully connected
  } layer_kind_e;

  // Descriptor of one layer; each field is one 16-bit register (w_ddr is 32).
  typedef struct packed {
    layer_kind_e       kind;
    logic              relu;
    logic [15:0]       in_h;       // input rows        (FC: 1)
    logic [15:0]       in_w;       // input columns     (FC: 1)
    logic [15:0]       cin;        // input channels    (FC: input length)
    logic [15:0]       cout;       // output filters    (FC: output length)
    logic [15:0]       groups;     // bands processed with shared weights
    logic [15:0]       in_gs;      // input  band stride
    logic [15:0]       out_gs;     // output band stride
    logic [15:0]       in_rs, in_cs, in_ks;    // input  strides
    logic [15:0]       out_rs, out_cs, out_ks; // output strides
    logic [DDR_AW-1:0] w_ddr;      // DDR beat address of the layer's weights
    logic [15:0]       w_lanes;    // values per weight word in DDR
  } layer_desc_t;

  // Register offsets of a layer descriptor (layer L at 32 + 16*L + field).
  localparam logic [3:0] F_KIND = 4'd0, F_IN_H = 4'd1, F_IN_W = 4'd2, F_CIN = 4'd3,
                         F_COUT = 4'd4, F_GROUPS = 4'd5, F_IN_GS = 4'd6, F_OUT_GS = 4'd7,
                         F_IN_RS = 4'd8, F_IN_CS = 4'd9, F_IN_KS = 4'd10, F_OUT_RS = 4'd11,
                         F_OUT_CS = 4'd12, F_OUT_KS = 4'd13, F_W_DDR = 4'd14, F_W_LANES = 4'd15;
  // Global registers.
  localparam logic [7:0] R_CTRL = 8'd0, R_NLAYERS = 8'd1, R_IN_DDR = 8'd2,
                         R_IN_LEN = 8'd3, R_NCLASS = 8'd4;
  localparam logic [7:0] R_LAYER0 = 8'd32;

  // Loader request.
  typedef enum logic {LD_INPUT = 1'b0, LD_WEIGHT = 1'b1} ld_kind_e;
  typedef struct packed {
    ld_kind_e          kind;
    logic              bank;       // weight bank
    logic [DDR_AW-1:0] ddr;        // first beat
    logic [15:0]       count;      // input: values, weights: words
    logic [15:0]       lanes;      // weights: values per word
  } ld_req_t;

endpackage
