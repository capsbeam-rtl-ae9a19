// tb_layer_controller -- self-checking test of layer sequencing and stream
// steering.
//
// Two simple engine models stand in for the convolution and routing
// engines: each takes a fixed number of input beats, then returns a fixed
// number of output beats (data tagged with the engine), then pulses done.
// The test runs a convolution layer, a routing layer and another convolution
// layer and checks: the right engine is started, only it sees valid data,
// the weight stream reaches only the convolution engine, outputs come from
// the active engine with tlast, a start while busy is ignored, done pulses
// once per layer and the layer counter advances.
module tb_layer_controller;
  import capsbeam_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [31:0] layers_done;
  layer_cfg_t cfg;
  logic conv_start, conv_done, route_start, route_done;
  logic s_wgt_tvalid, s_wgt_tready, conv_w_tvalid, conv_w_tready;
  logic s_act_tvalid, s_act_tready, conv_a_tvalid, conv_a_tready;
  logic route_a_tvalid, route_a_tready;
  logic [SDW-1:0] conv_o_tdata, route_o_tdata, m_out_tdata;
  logic conv_o_tvalid, conv_o_tlast, conv_o_tready;
  logic route_o_tvalid, route_o_tlast, route_o_tready;
  logic m_out_tvalid, m_out_tlast, m_out_tready;

  layer_controller dut (.*);

  int checks = 0, failures = 0;

  // ---- engine model: IN input beats, OUT output beats, then done --------
  localparam int IN = 5, OUT = 4;
  typedef enum { E_IDLE, E_IN, E_OUT, E_DONE } es_e;
  es_e cs, rs;
  int  ccnt, rcnt, cw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin cs <= E_IDLE; rs <= E_IDLE; ccnt <= 0; rcnt <= 0; cw <= 0; end
    else begin
      case (cs)
        E_IDLE: if (conv_start) begin cs <= E_IN; ccnt <= 0; end
        E_IN:   if (conv_a_tvalid) begin ccnt <= ccnt + 1; if (ccnt == IN-1) begin cs <= E_OUT; ccnt <= 0; end end
        E_OUT:  if (conv_o_tready) begin ccnt <= ccnt + 1; if (ccnt == OUT-1) cs <= E_DONE; end
        default: cs <= E_IDLE;
      endcase
      case (rs)
        E_IDLE: if (route_start) begin rs <= E_IN; rcnt <= 0; end
        E_IN:   if (route_a_tvalid) begin rcnt <= rcnt + 1; if (rcnt == IN-1) begin rs <= E_OUT; rcnt <= 0; end end
        E_OUT:  if (route_o_tready) begin rcnt <= rcnt + 1; if (rcnt == OUT-1) rs <= E_DONE; end
        default: rs <= E_IDLE;
      endcase
      if (conv_w_tvalid && conv_w_tready) cw <= cw + 1;
    end
  end
  assign conv_a_tready  = (cs == E_IN);
  assign route_a_tready = (rs == E_IN);
  assign conv_w_tready  = 1'b1;
  assign conv_o_tvalid  = (cs == E_OUT);
  assign route_o_tvalid = (rs == E_OUT);
  assign conv_o_tdata   = {32'hC0C0_C0C0, 32'(ccnt)};
  assign route_o_tdata  = {32'hDEAD_0000, 32'(rcnt)};
  assign conv_o_tlast   = (cs == E_OUT) && ccnt == OUT-1;
  assign route_o_tlast  = (rs == E_OUT) && rcnt == OUT-1;
  assign conv_done      = (cs == E_DONE);
  assign route_done     = (rs == E_DONE);

  // ---- checks on every cycle ----------------------------------------------
  int done_pulses = 0;
  always @(negedge clk) if (rst_n) begin
    checks++;
    if ((conv_a_tvalid && route_a_tvalid) || (conv_o_tready && route_o_tready)) begin
      failures++; $display("both engines connected");
    end
    if (done) done_pulses++;
  end

  task automatic run(layer_op_e op);
    int outs = 0, ins = 0, wbeats = 0;
    int n0 = done_pulses;
    cfg = '0; cfg.op = op;
    @(negedge clk);
    start = 1;
    #1;
    checks++;
    if (conv_start != (op == OP_CONV) || route_start != (op == OP_ROUTE)) begin
      failures++; $display("wrong engine started");
    end
    @(negedge clk);
    start = 1;                         // ignored: controller is busy
    #1;
    checks++;
    if (conv_start || route_start) begin failures++; $display("start accepted while busy"); end
    @(negedge clk);
    start = 0;
    s_act_tvalid = 1; s_wgt_tvalid = 1; m_out_tready = 1;
    while (busy) begin
      @(posedge clk);
      if (s_act_tvalid && s_act_tready) ins++;
      if (s_wgt_tvalid && s_wgt_tready) wbeats++;
      if (m_out_tvalid && m_out_tready) begin
        outs++;
        checks++;
        if (m_out_tdata[63:32] != ((op == OP_CONV) ? 32'hC0C0_C0C0 : 32'hDEAD_0000)) begin
          failures++; $display("output from wrong engine");
        end
        checks++;
        if (m_out_tlast != (outs == OUT)) begin failures++; $display("tlast wrong"); end
      end
      #1;
    end
    s_act_tvalid = 0; s_wgt_tvalid = 0;
    @(negedge clk);
    #1;
    checks += 3;
    if (ins != IN)  begin failures++; $display("inputs %0d", ins); end
    if (outs != OUT) begin failures++; $display("outputs %0d", outs); end
    if (done_pulses != n0 + 1) begin failures++; $display("done pulses %0d", done_pulses - n0); end
    checks++;
    if ((op == OP_ROUTE) != (wbeats == 0)) begin failures++; $display("weight beats %0d in op %0d", wbeats, op); end
  endtask

  initial begin
    start = 0; cfg = '0; s_wgt_tvalid = 0; s_act_tvalid = 0; m_out_tready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(OP_CONV);
    run(OP_ROUTE);
    run(OP_CONV);
    checks++;
    if (layers_done != 3) begin failures++; $display("layers_done %0d", layers_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
