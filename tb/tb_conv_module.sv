// tb_conv_module -- self-checking test of the row-streaming convolution
// engine.
//
// Runs three layers on a reduced engine (8 PE columns, 8 input channels,
// up to 5 kept kernels, 8 filters): a 3x3 layer with ReLU whose image is
// narrower than the array, a 1x1 (point-wise) layer without ReLU, and a
// single-row 3x3 layer.  Weights, pruning indices, biases and inputs are
// pseudo-random.  Every output value is compared with a direct convolution
// computed here (zero padding, Q8.8 rounding, ReLU then bias), and the number
// of cycles from start to done is compared with the engine's documented
// schedule.  In the second layer the input stream has random gaps (so the
// engine must wait for the prefetched row) and the output stream is
// back-pressured at random.
module tb_conv_module;
  import capsbeam_pkg::*;

  localparam int COLS = 8, CIN = 8, KEPT = 5, FILT = 8;
  localparam int NGRP = FILT / 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  layer_cfg_t cfg;
  logic [SDW-1:0] w_tdata, a_tdata, o_tdata;
  logic w_tvalid, w_tready, a_tvalid, a_tready, o_tvalid, o_tready, o_tlast;

  conv_module #(.COLS(COLS), .CIN(CIN), .KEPT(KEPT), .FILT(FILT)) dut (.*);

  int checks = 0, failures = 0;

  // layer data
  int rows, cols, cin, kept, filt, k3, relu, T;
  int inp  [0:15][0:COLS-1][0:CIN-1];
  int wgt  [0:FILT-1][0:KEPT-1][0:8];
  int idx  [0:FILT-1][0:KEPT-1];
  int bia  [0:FILT-1];
  bit full_ready;

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int expect_out(int y, int x, int f);
    longint acc = 0;
    int v;
    for (int k = 0; k < kept; k++)
      for (int t = 0; t < T; t++) begin
        int dy, dx, yy, xx;
        dy = k3 ? t / 3 - 1 : 0;
        dx = k3 ? t % 3 - 1 : 0;
        yy = y + dy; xx = x + dx;
        if (yy >= 0 && yy < rows && xx >= 0 && xx < cols)
          acc += longint'(wgt[f][k][t]) * longint'(inp[yy][xx][idx[f][k]]);
      end
    acc = longint'(int'(acc));        // 32-bit accumulator
    v = sat(acc >>> 8);
    if (relu && v < 0) v = 0;
    return sat(longint'(v) + longint'(bia[f]));
  endfunction

  task automatic send_word_stream(input int words[$]);
    for (int i = 0; i < words.size(); i += 4) begin
      w_tdata  <= {16'(words[i+3]), 16'(words[i+2]), 16'(words[i+1]), 16'(words[i])};
      w_tvalid <= 1;
      @(posedge clk);
      while (!w_tready) @(posedge clk);
    end
    w_tvalid <= 0;
  endtask

  task automatic send_inputs();
    for (int y = 0; y < rows; y++)
      for (int x = 0; x < cols; x++)
        for (int q = 0; q < cin / 4; q++) begin
          if (!full_ready && $urandom_range(0, 1) == 0) begin
            a_tvalid <= 0;
            repeat ($urandom_range(1, 6)) @(posedge clk);
          end
          a_tdata  <= {16'(inp[y][x][4*q+3]), 16'(inp[y][x][4*q+2]),
                       16'(inp[y][x][4*q+1]), 16'(inp[y][x][4*q])};
          a_tvalid <= 1;
          @(posedge clk);
          while (!a_tready) @(posedge clk);
        end
    a_tvalid <= 0;
  endtask

  int relu_clamps;

  task automatic collect();
    int nbeats = rows * cols * (filt / 4);
    int b = 0;
    while (b < nbeats) begin
      o_tready <= full_ready ? 1'b1 : 1'($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (o_tvalid && o_tready) begin
        int y, x, g;
        y = b / (cols * (filt / 4));
        x = (b / (filt / 4)) % cols;
        g = b % (filt / 4);
        for (int j = 0; j < 4; j++) begin
          int got, exp_v;
          got   = int'($signed(o_tdata[j*16 +: 16]));
          exp_v = expect_out(y, x, 4*g + j);
          checks++;
          if (got != exp_v) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH y=%0d x=%0d f=%0d got=%0d exp=%0d", y, x, 4*g+j, got, exp_v);
          end
        end
        checks++;
        if (o_tlast != (b == nbeats - 1)) begin
          failures++;
          $display("TLAST wrong at beat %0d", b);
        end
        b++;
      end
    end
    o_tready <= 0;
  endtask

  task automatic run_layer(int r_, int c_, int ci_, int kp_, int f_, int k3_, int relu_, bit fr);
    int words[$];
    int t0, t1, expc;
    rows = r_; cols = c_; cin = ci_; kept = kp_; filt = f_; k3 = k3_; relu = relu_;
    T = k3 ? 9 : 1;
    full_ready = fr;
    for (int y = 0; y < rows; y++)
      for (int x = 0; x < cols; x++)
        for (int ch = 0; ch < cin; ch++) inp[y][x][ch] = $urandom_range(0, 1023) - 512;
    for (int f = 0; f < filt; f++) begin
      bia[f] = $urandom_range(0, 511) - 256;
      for (int k = 0; k < kept; k++) begin
        idx[f][k] = $urandom_range(0, cin - 1);
        for (int t = 0; t < T; t++) wgt[f][k][t] = $urandom_range(0, 511) - 256;
      end
    end
    for (int f = 0; f < filt; f++)
      for (int k = 0; k < kept; k++)
        for (int t = 0; t < T; t++) words.push_back(wgt[f][k][t]);
    for (int f = 0; f < filt; f++) words.push_back(bia[f]);
    for (int f = 0; f < filt; f++)
      for (int k = 0; k < kept; k++) words.push_back(idx[f][k]);

    cfg = '0;
    cfg.op = OP_CONV; cfg.num_rows = 10'(rows); cfg.num_cols = 9'(cols);
    cfg.num_in_ch = 9'(cin); cfg.num_kept = 9'(kept); cfg.num_filters = 9'(filt);
    cfg.k3 = 1'(k3); cfg.relu = 1'(relu);
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    t0 = $time / 10;
    fork
      send_word_stream(words);
      send_inputs();
      collect();
    join
    while (!done) @(posedge clk);
    t1 = $time / 10;
    if (fr) begin
      // schedule: weight words + init + first row load, then per row:
      // shift (+ first row-below load) + compute + drain + output, then done;
      // later rows are prefetched during compute
      expc = words.size() + 1 + cols * cin / 4;
      for (int y = 0; y < rows; y++)
        expc += 1 + ((y == 0 && rows > 1) ? cols * cin / 4 : 0) + (filt / 4) * kept * T
                + COLS + 1 + cols * (filt / 4);
      expc += 2;                       // done state + registered done
      checks++;
      if (t1 - t0 != expc) begin
        failures++;
        $display("CYCLES got=%0d expected=%0d", t1 - t0, expc);
      end
    end
    @(posedge clk);
  endtask

  initial begin
    start = 0; w_tvalid = 0; a_tvalid = 0; o_tready = 0; cfg = '0;
    w_tdata = '0; a_tdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_layer(5, 6, 8, 5, 8, 1, 1, 1'b1);   // 3x3, ReLU, narrow image
    run_layer(4, 8, 8, 3, 8, 0, 0, 1'b0);   // 1x1 dense, back-pressure
    run_layer(1, 8, 4, 2, 4, 1, 1, 1'b1);   // single row, one group
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
