// tb_capsbeam_full -- full-size run of the accelerator: the first CapsBeam
// layer on a whole frame, with the top at its default sizes.
//
// Layer: 3x3 convolution with ReLU, 368 x 128 image, 128 input channels,
// 84 filters keeping 98 kernels each (the pruned first layer of the paper),
// Q8.8 data.  Inputs are generated from a hash of (row, column, channel), so
// any input value can be recomputed for the model without storing the
// frame; weights, biases and pruning indices are random.  Output rows 0, 1,
// 183, 366 and 367 are checked in full (these include both padding rows),
// and one output in 16 elsewhere.  The number of cycles from start to done
// is compared with the engine's schedule and reported.
module tb_capsbeam_full;
  import capsbeam_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, busy, done;
  logic [31:0] layers_done;
  logic [SDW-1:0] s_axis_wgt_tdata, s_axis_act_tdata, m_axis_out_tdata;
  logic s_axis_wgt_tvalid, s_axis_wgt_tready, s_axis_act_tvalid, s_axis_act_tready;
  logic m_axis_out_tvalid, m_axis_out_tready, m_axis_out_tlast;

  capsbeam_accel dut (.*);

  localparam int R = 368, C = 128, CI = 128, KP = 98, F = 84;

  int checks = 0, failures = 0;
  int wgt [0:F-1][0:KP-1][0:8];
  int idx [0:F-1][0:KP-1];
  int bia [0:F-1];

  function automatic int inp(int y, int x, int ch);
    logic [31:0] h;
    h = 32'(y * 7919 + x * 104729 + ch * 1299709 + 17);
    h = h * 32'd2654435761;
    h = h ^ (h >> 15);
    return int'(h[25:16]) - 512;
  endfunction

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int model(int y, int x, int f);
    longint acc = 0;
    int v;
    for (int k = 0; k < KP; k++)
      for (int t = 0; t < 9; t++) begin
        int yy, xx;
        yy = y + t / 3 - 1; xx = x + t % 3 - 1;
        if (yy >= 0 && yy < R && xx >= 0 && xx < C)
          acc += longint'(wgt[f][k][t]) * inp(yy, xx, idx[f][k]);
      end
    acc = longint'(int'(acc));
    v = sat(acc >>> 8);
    if (v < 0) v = 0;
    return sat(longint'(v) + bia[f]);
  endfunction

  task automatic send_weights();
    int words[$];
    for (int f = 0; f < F; f++) for (int k = 0; k < KP; k++) for (int t = 0; t < 9; t++)
      words.push_back(wgt[f][k][t]);
    for (int f = 0; f < F; f++) words.push_back(bia[f]);
    for (int f = 0; f < F; f++) for (int k = 0; k < KP; k++) words.push_back(idx[f][k]);
    for (int i = 0; i < words.size(); i += 4) begin
      s_axis_wgt_tdata  <= {16'(words[i+3]), 16'(words[i+2]), 16'(words[i+1]), 16'(words[i])};
      s_axis_wgt_tvalid <= 1;
      @(posedge clk);
      while (!s_axis_wgt_tready) @(posedge clk);
    end
    s_axis_wgt_tvalid <= 0;
  endtask

  task automatic send_frame();
    for (int y = 0; y < R; y++)
      for (int x = 0; x < C; x++)
        for (int q = 0; q < CI / 4; q++) begin
          s_axis_act_tdata  <= {16'(inp(y, x, 4*q+3)), 16'(inp(y, x, 4*q+2)),
                                16'(inp(y, x, 4*q+1)), 16'(inp(y, x, 4*q))};
          s_axis_act_tvalid <= 1;
          @(posedge clk);
          while (!s_axis_act_tready) @(posedge clk);
        end
    s_axis_act_tvalid <= 0;
  endtask

  task automatic collect();
    int n = R * C * F / 4;
    m_axis_out_tready <= 1;
    for (int b = 0; b < n; ) begin
      @(posedge clk);
      if (m_axis_out_tvalid) begin
        int y, x, g;
        y = b / (C * F / 4); x = (b / (F / 4)) % C; g = b % (F / 4);
        if (y == 0 || y == 1 || y == 183 || y >= R - 2 || ((b * 7) % 16) == 3)
          for (int j = 0; j < 4; j++) begin
            int got, e;
            got = int'($signed(m_axis_out_tdata[16*j +: 16]));
            e   = model(y, x, 4*g + j);
            checks++;
            if (got != e) begin
              failures++;
              if (failures < 10) $display("y%0d x%0d f%0d got %0d exp %0d", y, x, 4*g+j, got, e);
            end
          end
        if (b == n - 1) begin
          checks++;
          if (!m_axis_out_tlast) begin failures++; $display("tlast missing"); end
        end
        b++;
      end
    end
  endtask

  initial begin
    longint t0, t1, expc;
    cfg = '0; start = 0;
    s_axis_wgt_tdata = '0; s_axis_wgt_tvalid = 0;
    s_axis_act_tdata = '0; s_axis_act_tvalid = 0; m_axis_out_tready = 0;
    for (int f = 0; f < F; f++) begin
      bia[f] = $urandom_range(0, 255) - 128;
      for (int k = 0; k < KP; k++) begin
        idx[f][k] = $urandom_range(0, CI - 1);
        for (int t = 0; t < 9; t++) wgt[f][k][t] = $urandom_range(0, 16) - 8;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    cfg.op = OP_CONV; cfg.num_rows = 10'(R); cfg.num_cols = 9'(C);
    cfg.num_in_ch = 9'(CI); cfg.num_kept = 9'(KP); cfg.num_filters = 9'(F);
    cfg.k3 = 1'b1; cfg.relu = 1'b1;
    start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10;
    fork
      send_weights();
      send_frame();
      collect();
    join
    while (!done) @(posedge clk);
    t1 = $time / 10;
    // schedule of the convolution engine plus one cycle through the controller
    expc = longint'(F * KP * 9 + F + F * KP) + 1 + C * CI / 4;
    for (int y = 0; y < R; y++)
      expc += 1 + ((y == 0) ? C * CI / 4 : 0) + (F / 4) * KP * 9 + MAX_COLS + 1 + C * (F / 4);
    expc += 3;
    checks++;
    if (t1 - t0 != expc) begin
      failures++;
      $display("cycles %0d, schedule %0d", t1 - t0, expc);
    end
    $display("layer cycles %0d (%0.1f ms at 100 MHz), %0.2f GOPS",
             t1 - t0, real'(t1 - t0) / 1.0e5,
             2.0 * R * C * F * KP * 9 / (real'(t1 - t0) * 10.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
