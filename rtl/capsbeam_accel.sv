// capsbeam_accel -- top level of the CapsBeam capsule-network beamformer
// accelerator (programmable-logic part).
//
// Holds the layer controller, the row-streaming convolution engine (with its
// 4 x 128 PE array, pruned-kernel index store, weight, line and output
// buffers) and the point-wise dynamic routing engine (with its MAC lanes and
// exponential / square-root / divide units).  The host processor runs the
// network layer by layer: it programs cfg, pulses start, and lets two DMA
// engines move data: DMA-1 streams the layer's weights, biases and indices
// into s_axis_wgt, DMA-2 streams the input feature map into s_axis_act and
// takes the layer output from m_axis_out back to external memory.  done
// pulses when the layer's last output beat has left.
//
// For the CapsBeam network the host issues, per frame: two 3x3 convolutions
// with ReLU; then for each of the I and Q branches a 3x3 convolution, the
// routing layer, a 1x1 layer with ReLU (dense 64 -> 64) and a 1x1 layer
// (dense 64 -> 1, padded to 4 filters).
//
// Streams are AXI-Stream (tdata/tvalid/tready, tlast on the output), four
// 16-bit Q8.8 values per beat.  The processor, interconnect, DMAs and DDR are
// outside this module.
//
// rst_n is an asynchronous reset for the flops and also the disable
// condition of the concurrent assertion below; lint reports this as a signal
// used both synchronously and asynchronously, which is harmless because the
// assertion is not hardware.
module capsbeam_accel
  import capsbeam_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  layer_cfg_t     cfg,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [31:0]    layers_done,
  // DMA-1: weights, biases, indices
  input  logic [SDW-1:0] s_axis_wgt_tdata,
  input  logic           s_axis_wgt_tvalid,
  output logic           s_axis_wgt_tready,
  // DMA-2: input feature map
  input  logic [SDW-1:0] s_axis_act_tdata,
  input  logic           s_axis_act_tvalid,
  output logic           s_axis_act_tready,
  // DMA-2: output feature map
  output logic [SDW-1:0] m_axis_out_tdata,
  output logic           m_axis_out_tvalid,
  input  logic           m_axis_out_tready,
  output logic           m_axis_out_tlast
);

  logic conv_start, conv_done, conv_busy;
  logic route_start, route_done, route_busy;
  logic conv_w_tvalid, conv_w_tready;
  logic conv_a_tvalid, conv_a_tready, route_a_tvalid, route_a_tready;
  logic [SDW-1:0] conv_o_tdata, route_o_tdata;
  logic conv_o_tvalid, conv_o_tready, conv_o_tlast;
  logic route_o_tvalid, route_o_tready, route_o_tlast;

  layer_controller u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (start),
    .cfg            (cfg),
    .busy           (busy),
    .done           (done),
    .layers_done    (layers_done),
    .conv_start     (conv_start),
    .conv_done      (conv_done),
    .route_start    (route_start),
    .route_done     (route_done),
    .s_wgt_tvalid   (s_axis_wgt_tvalid),
    .s_wgt_tready   (s_axis_wgt_tready),
    .conv_w_tvalid  (conv_w_tvalid),
    .conv_w_tready  (conv_w_tready),
    .s_act_tvalid   (s_axis_act_tvalid),
    .s_act_tready   (s_axis_act_tready),
    .conv_a_tvalid  (conv_a_tvalid),
    .conv_a_tready  (conv_a_tready),
    .route_a_tvalid (route_a_tvalid),
    .route_a_tready (route_a_tready),
    .conv_o_tdata   (conv_o_tdata),
    .conv_o_tvalid  (conv_o_tvalid),
    .conv_o_tlast   (conv_o_tlast),
    .conv_o_tready  (conv_o_tready),
    .route_o_tdata  (route_o_tdata),
    .route_o_tvalid (route_o_tvalid),
    .route_o_tlast  (route_o_tlast),
    .route_o_tready (route_o_tready),
    .m_out_tdata    (m_axis_out_tdata),
    .m_out_tvalid   (m_axis_out_tvalid),
    .m_out_tlast    (m_axis_out_tlast),
    .m_out_tready   (m_axis_out_tready)
  );

  conv_module u_conv (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (conv_start),
    .cfg      (cfg),
    .busy     (conv_busy),
    .done     (conv_done),
    .w_tdata  (s_axis_wgt_tdata),
    .w_tvalid (conv_w_tvalid),
    .w_tready (conv_w_tready),
    .a_tdata  (s_axis_act_tdata),
    .a_tvalid (conv_a_tvalid),
    .a_tready (conv_a_tready),
    .o_tdata  (conv_o_tdata),
    .o_tvalid (conv_o_tvalid),
    .o_tready (conv_o_tready),
    .o_tlast  (conv_o_tlast)
  );

  dynamic_routing u_route (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (route_start),
    .cfg      (cfg),
    .busy     (route_busy),
    .done     (route_done),
    .a_tdata  (s_axis_act_tdata),
    .a_tvalid (route_a_tvalid),
    .a_tready (route_a_tready),
    .o_tdata  (route_o_tdata),
    .o_tvalid (route_o_tvalid),
    .o_tready (route_o_tready),
    .o_tlast  (route_o_tlast)
  );

  // the engines' own busy flags only duplicate the controller's state
  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n)
    !(conv_busy && route_busy));

endmodule
