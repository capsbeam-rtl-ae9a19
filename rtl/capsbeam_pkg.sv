// capsbeam_pkg -- shared types, sizes and fixed-point helpers of the CapsBeam
// accelerator.
//
// All activations and weights are 16-bit signed fixed point, as in the paper.
// The split between integer and fraction bits is not published; this design
// uses 8 fraction bits (Q8.8) everywhere.  Products are kept at full width
// (Q16.16 in 32 bits) in the PE accumulators and are rounded back to Q8.8 by
// an arithmetic shift with saturation when a result leaves a compute module.
//
// The stream words toward the DMAs carry four 16-bit values per beat (lane 0
// in the low bits), following the paper's "4 data in a channel" per cycle.
//
// The layer descriptor (layer_cfg_t) is this design's own register layout:
// the host programs one layer at a time and pulses start.
//
// MAX_ROWS (the 368-row frame height) documents the largest frame; rows are
// processed one at a time, so no hardware is sized by it and lint reports it
// as an unused parameter.
package capsbeam_pkg;

  // ---- data format -------------------------------------------------------
  localparam int DW    = 16;          // activation / weight width (paper)
  localparam int AW    = 32;          // accumulator width (assumed)
  localparam int FRAC  = 8;           // fraction bits (assumed)
  localparam int LANES = 4;           // values per stream beat (paper)
  localparam int SDW   = DW * LANES;  // stream data width

  // ---- convolution engine sizes (paper, Fig. 8) -------------------------
  localparam int PE_ROWS   = 4;       // output channels computed together
  localparam int MAX_COLS  = 128;     // image columns = PE columns
  localparam int MAX_CIN   = 128;     // input channels held per row
  localparam int MAX_KEPT  = 98;      // kept kernels per filter after pruning
  localparam int MAX_FILT  = 84;      // filters per layer (21 groups of 4)
  localparam int MAX_ROWS  = 368;     // image rows (depth samples)

  // ---- dynamic routing sizes (paper, Fig. 3 and Fig. 9) ------------------
  localparam int NCAP   = 8;          // capsules per pixel (64 = 8 x 8)
  localparam int CDIM   = 8;          // capsule dimension
  localparam int RPIX   = 2;          // pixels routed in parallel

  typedef logic signed [DW-1:0] fx_t;
  typedef logic signed [AW-1:0] acc_t;

  typedef enum logic [0:0] {
    OP_CONV  = 1'b0,
    OP_ROUTE = 1'b1
  } layer_op_e;

  // One layer as programmed by the host.
  typedef struct packed {
    layer_op_e   op;          // which engine runs the layer
    logic [9:0]  num_rows;    // image rows (1..1023)
    logic [8:0]  num_cols;    // image columns (1..128)
    logic [8:0]  num_in_ch;   // input channels, multiple of 4 (conv)
    logic [8:0]  num_kept;    // kept kernels per filter (conv)
    logic [8:0]  num_filters; // output channels, multiple of 4 (conv)
    logic        k3;          // 1: 3x3 kernel, 0: 1x1 (point-wise dense)
    logic        relu;        // apply ReLU (conv)
    logic [3:0]  num_iter;    // routing iterations (route)
  } layer_cfg_t;

  // Tap descriptor that travels with a weight along a PE row: which input
  // channel, kernel row and kernel column the weight belongs to, which group
  // of four filters it is part of, and whether it opens or closes the sum.
  localparam int CH_W  = $clog2(MAX_CIN);
  localparam int GRP_W = $clog2(MAX_FILT / PE_ROWS);
  typedef struct packed {
    logic             first;
    logic             last;
    logic [CH_W-1:0]  ch;
    logic [1:0]       ky;
    logic [1:0]       kx;
    logic [GRP_W-1:0] grp;
  } tap_meta_t;

  // Saturate a wide signed value to 16 bits.
  function automatic fx_t sat16(input logic signed [63:0] x);
    if (x > 64'sd32767)       return 16'sh7fff;
    else if (x < -64'sd32768) return 16'sh8000;
    else                      return fx_t'(x);
  endfunction

  // Round a Q.16 accumulator back to Q8.8 (arithmetic shift, saturate).
  function automatic fx_t acc_to_fx(input acc_t a);
    logic signed [63:0] w;
    w = 64'(a) >>> FRAC;
    return sat16(w);
  endfunction

  // Q8.8 x Q8.8 -> Q8.8 with saturation.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return sat16(p >>> FRAC);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return sat16(64'(a) + 64'(b));
  endfunction

endpackage
