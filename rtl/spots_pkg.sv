// spots_pkg: types and constants shared by the SPOTS accelerator blocks.
//
// Data are 16-bit fixed-point values and products accumulate in 24-bit
// registers, as the paper specifies. Each PE keeps PASSES = 4 accumulators so
// that one PE row can hold four rows of the filter matrix. The layer
// descriptor layer_cfg_t, the element record that travels between patch
// units (a value with its row and column in the input feature map) and the
// source-selection rule that the IM2COL input controller and the patch units
// must agree on are defined here. Field widths are this design's own choice.
package spots_pkg;

  localparam int DW     = 16;   // operand width (paper: 16-bit fixed point)
  localparam int AW     = 24;   // accumulator width (paper: 24 bits)
  localparam int PASSES = 4;    // accumulators per PE (paper: K = 4 registers)
  localparam int CW     = 9;    // width of a feature-map row/column index
  localparam int KW     = 4;    // width of kernel size / stride (max 15)
  localparam int CHW    = 10;   // width of a channel count
  localparam int FW     = 10;   // width of a filter count
  localparam int RW     = 13;   // width of an IM2COL row index (K*K*C)

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef data_t [PASSES-1:0]    wvec_t;   // weights of the four filter rows a PE row holds

  // One feature-map element tagged with its coordinates (Sec. 3.1: "We store
  // the row and column indices along with the value for each element").
  typedef struct packed {
    data_t         value;
    logic [CW-1:0] row;
    logic [CW-1:0] col;
  } elem_t;

  // Layer descriptor written by the host before start.
  typedef struct packed {
    logic [KW-1:0]  k;          // kernel size (square)
    logic [KW-1:0]  s;          // stride
    logic [CHW-1:0] c;          // input channels
    logic [CW-1:0]  h;          // input height
    logic [CW-1:0]  w;          // input width
    logic [CW-1:0]  hout;       // output rows  = (h-k)/s+1
    logic [CW-1:0]  wout;       // output cols  = (w-k)/s+1
    logic [FW-1:0]  f;          // number of filters
    logic           tall_mode;  // 1: one tall array, 0: four small arrays
    logic           pool_mode;  // 1: max pooling, no GEMM
  } layer_cfg_t;

  // Where a patch unit takes the element at patch position (ky,kx) from.
  typedef enum logic [1:0] {SRC_NEW = 2'd0, SRC_NBR = 2'd1, SRC_RES = 2'd2} src_e;

  // Horizontal overlap (left neighbour) wins over vertical overlap (reserve),
  // as in Fig. 7 round 2, where PU2 gets A7 from PU1 and not from its reserve.
  function automatic src_e pos_src(input logic [KW-1:0] k, input logic [KW-1:0] s,
                                   input logic [KW-1:0] ky, input logic [KW-1:0] kx,
                                   input logic has_left, input logic has_up);
    logic [KW-1:0] ov;
    ov = k - s;
    if (has_left && kx < ov)      return SRC_NBR;
    else if (has_up && ky < ov)   return SRC_RES;
    else                          return SRC_NEW;
  endfunction

endpackage
