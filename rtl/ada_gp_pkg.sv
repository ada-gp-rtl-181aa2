// ada_gp_pkg: types and constants shared by the ADA-GP-MAX accelerator.
//
// Number format: every value kept in a buffer or register file is a signed
// 16-bit fixed-point number with 8 fraction bits (Q8.8). Products inside the
// PE arrays are kept at full precision in 40-bit accumulators and brought
// back to Q8.8 by an arithmetic right shift of FRAC bits with saturation.
// The paper states no number format; Q8.8 and the 40-bit accumulator are
// this design's choice.
//
// A buffer word is a vector of VEC lanes. The main PE array has 12 rows and
// 15 columns (180 PEs, the paper's PE count); the predictor PE array has
// 8 rows and 10 columns (80 PEs, chosen to match the 80 extra DSP slices the
// paper reports for ADA-GP-MAX).
package ada_gp_pkg;

  localparam int DW   = 16;  // data width (Q8.8)
  localparam int FRAC = 8;   // fraction bits
  localparam int ACCW = 40;  // accumulator width
  localparam int VEC  = 16;  // lanes per buffer word

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef data_t [VEC-1:0]        vec_t;

  // Training phase of the adaptive scheme.
  typedef enum logic [1:0] {
    PH_WARMUP = 2'd0,   // backpropagation, predictor trained, predictions unused
    PH_BP     = 2'd1,   // backpropagation, predictor trained
    PH_GP     = 2'd2    // predicted gradients applied, backpropagation skipped
  } phase_e;

  // Layer command issued to the sequencer.
  typedef enum logic [1:0] {
    OP_FW = 2'd0,       // forward pass of one layer (plus predictor forward)
    OP_BW = 2'd1        // backward pass of one layer (Phase BP / warm up only)
  } op_e;

  localparam int AW = 12;     // global buffer address width (4096 words)
  localparam int NW = 12;     // width of sample counts

  typedef struct packed {
    op_e            op;
    logic [4:0]     k_len;     // filter length in_ch*k*k (<= 10)
    logic [4:0]     c_len;     // number of filters / output channels (<= 12)
    logic [NW-1:0]  n_len;     // number of input vectors = batch * positions
    logic [2:0]     log2_b;    // log2 of batch size
    logic [3:0]     log2_s;    // log2 of output positions per sample
    logic [3:0]     log2_pool; // log2 of positions averaged into one predictor input
    logic           dx_en;     // BW: also compute the input gradient
    logic [AW-1:0]  x_addr;    // input vectors, word n holds K lanes
    logic [AW-1:0]  w_addr;    // weights, word c holds filter c (K lanes)
    logic [AW-1:0]  y_addr;    // output vectors, word n holds C lanes
    logic [AW-1:0]  dy_addr;   // output gradients, word n holds C lanes
    logic [AW-1:0]  dx_addr;   // input gradients, word n holds K lanes
    logic [AW-1:0]  a_addr;    // predictor inputs, word c holds P lanes
    logic [AW-1:0]  gp_addr;   // predicted gradients, word c holds G lanes
  } layer_cmd_t;

  // Bring an accumulator back to Q8.8 with saturation.
  function automatic data_t requant(input acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DW-1:0]);
  endfunction

  // Saturate a wide value to Q8.8 without shifting.
  function automatic data_t sat16(input acc_t a);
    if (a > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (a < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(a[DW-1:0]);
  endfunction

endpackage
