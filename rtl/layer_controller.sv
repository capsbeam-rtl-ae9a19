// layer_controller -- sequencing and stream steering of the CapsBeam
// accelerator.
//
// The host programs one layer at a time (layer_cfg_t) and pulses start.  The
// controller latches the layer's operation, starts the convolution engine
// (OP_CONV) or the dynamic routing engine (OP_ROUTE), and, while that layer
// runs, connects the engine to the streams: the weight stream (DMA-1) goes
// to the convolution engine only, the activation input and output streams
// (DMA-2) go to whichever engine is active.  The idle engine sees no valid
// data and its ready/valid outputs are masked.  When the engine reports
// done, the controller pulses done and returns to idle; a start while busy
// is ignored.  The paper states only that a controller coordinates the
// blocks; this hand-shaking scheme is this design's own.
// Only the op field of cfg is decoded here (the engines read the rest), so
// lint reports the other cfg bits as unused.
module layer_controller
  import capsbeam_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  layer_cfg_t     cfg,
  output logic           busy,
  output logic           done,
  output logic [31:0]    layers_done,
  // engine control
  output logic           conv_start,
  input  logic           conv_done,
  output logic           route_start,
  input  logic           route_done,
  // weight stream: host side and convolution side
  input  logic           s_wgt_tvalid,
  output logic           s_wgt_tready,
  output logic           conv_w_tvalid,
  input  logic           conv_w_tready,
  // activation input: host side and engine sides
  input  logic           s_act_tvalid,
  output logic           s_act_tready,
  output logic           conv_a_tvalid,
  input  logic           conv_a_tready,
  output logic           route_a_tvalid,
  input  logic           route_a_tready,
  // activation output: engine sides and host side
  input  logic [SDW-1:0] conv_o_tdata,
  input  logic           conv_o_tvalid,
  input  logic           conv_o_tlast,
  output logic           conv_o_tready,
  input  logic [SDW-1:0] route_o_tdata,
  input  logic           route_o_tvalid,
  input  logic           route_o_tlast,
  output logic           route_o_tready,
  output logic [SDW-1:0] m_out_tdata,
  output logic           m_out_tvalid,
  output logic           m_out_tlast,
  input  logic           m_out_tready
);

  typedef enum logic [1:0] { C_IDLE, C_CONV, C_ROUTE } cstate_e;
  cstate_e st;

  logic is_conv, is_route;
  assign is_conv  = (st == C_CONV);
  assign is_route = (st == C_ROUTE);
  assign busy     = (st != C_IDLE);

  assign conv_start  = (st == C_IDLE) && start && (cfg.op == OP_CONV);
  assign route_start = (st == C_IDLE) && start && (cfg.op == OP_ROUTE);

  assign conv_w_tvalid  = is_conv && s_wgt_tvalid;
  assign s_wgt_tready   = is_conv && conv_w_tready;

  assign conv_a_tvalid  = is_conv  && s_act_tvalid;
  assign route_a_tvalid = is_route && s_act_tvalid;
  assign s_act_tready   = (is_conv && conv_a_tready) || (is_route && route_a_tready);

  assign m_out_tdata    = is_route ? route_o_tdata : conv_o_tdata;
  assign m_out_tvalid   = (is_conv && conv_o_tvalid) || (is_route && route_o_tvalid);
  assign m_out_tlast    = (is_conv && conv_o_tlast)  || (is_route && route_o_tlast);
  assign conv_o_tready  = is_conv  && m_out_tready;
  assign route_o_tready = is_route && m_out_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= C_IDLE;
      done        <= 1'b0;
      layers_done <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        C_IDLE:  if (start) st <= (cfg.op == OP_CONV) ? C_CONV : C_ROUTE;
        C_CONV:  if (conv_done)  begin st <= C_IDLE; done <= 1'b1; layers_done <= layers_done + 1; end
        C_ROUTE: if (route_done) begin st <= C_IDLE; done <= 1'b1; layers_done <= layers_done + 1; end
        default: st <= C_IDLE;
      endcase
    end
  end

  // AXI-Stream rule on the host-facing output: data held while stalled
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_out_tvalid && !m_out_tready |=> m_out_tvalid && $stable(m_out_tdata));

endmodule
