// tb_capsbeam_accel -- end-to-end test of the accelerator: one small
// CapsBeam frame, layer by layer, as the host and the two DMAs would run it.
//
// The frame is 3 rows x 4 columns with 8 input channels (the network's
// shape with reduced channel counts): conv 3x3 + ReLU, conv 3x3 + ReLU, then
// for each of the I and Q branches: conv 3x3 to 64 channels, dynamic routing
// (3 iterations), 1x1 64 -> 64 + ReLU, 1x1 64 -> 4 (one real output, three
// zero-weight pad filters).  Kernels are pruned (fewer kept kernels than
// input channels, random indices).  Each layer's output, read back from the
// output stream, is checked value by value against a model computed here
// from the same layer input, and becomes the next layer's input.  The
// input streams have random gaps and the output stream random stalls.
//
// Mechanisms counted (each must occur): 3x3 and 1x1 convolution layers,
// routing layers, top/bottom padding rows, pruned-kernel index lookups,
// ReLU clamps, softmax passes in routing, output back-pressure stalls and
// input stream gaps.
module tb_capsbeam_accel;
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

  int checks = 0, failures = 0;
  int n_conv3 = 0, n_conv1 = 0, n_route = 0, n_pad_rows = 0, n_pruned = 0;
  int n_relu_clamp = 0, n_softmax = 0, n_out_stall = 0, n_in_gap = 0;

  localparam int R = 3, C = 4, MAXC = 64;
  int fin  [0:R-1][0:C-1][0:MAXC-1];    // current layer input
  int fout [0:R-1][0:C-1][0:MAXC-1];    // current layer output (from DUT)
  int fexp [0:R-1][0:C-1][0:MAXC-1];    // model output
  int trunk[0:R-1][0:C-1][0:MAXC-1];    // output of the shared trunk

  // current layer
  int cin, kept, filt, k3, relu, iters;
  int wgt [0:MAXC-1][0:MAXC-1][0:8];
  int idx [0:MAXC-1][0:MAXC-1];
  int bia [0:MAXC-1];

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int ref_exp(int x);
    longint cf[6] = '{546, 2731, 10923, 32768, 65536, 65536};
    longint x16 = longint'(x) * 256;
    longint a = cf[0];
    for (int i = 1; i < 6; i++) a = ((a * x16) >>> 16) + cf[i];
    a = a >>> 8;
    if (a < 1) a = 1;
    if (a > 32767) a = 32767;
    return int'(a);
  endfunction

  function automatic longint isqrt(longint a);
    longint r = longint'($floor($sqrt(real'(a))));
    while (r * r > a) r--;
    while ((r + 1) * (r + 1) <= a) r++;
    return r;
  endfunction

  task automatic conv_model();
    int T = k3 ? 9 : 1;
    for (int y = 0; y < R; y++)
      for (int x = 0; x < C; x++)
        for (int f = 0; f < filt; f++) begin
          longint acc = 0;
          int v;
          for (int k = 0; k < kept; k++)
            for (int t = 0; t < T; t++) begin
              int yy = y + (k3 ? t / 3 - 1 : 0);
              int xx = x + (k3 ? t % 3 - 1 : 0);
              if (yy >= 0 && yy < R && xx >= 0 && xx < C)
                acc += longint'(wgt[f][k][t]) * fin[yy][xx][idx[f][k]];
            end
          acc = longint'(int'(acc));
          v = sat(acc >>> 8);
          if (relu && v < 0) begin v = 0; n_relu_clamp++; end
          fexp[y][x][f] = sat(longint'(v) + bia[f]);
        end
  endtask

  task automatic route_model();
    for (int y = 0; y < R; y++)
      for (int x = 0; x < C; x++) begin
        int b[0:7], c[0:7], e[0:7];
        int s[0:7][0:7];
        for (int i = 0; i < 8; i++) begin b[i] = 0; c[i] = 32; end
        for (int it = 0; it < iters; it++) begin
          if (it > 0) begin
            longint sum = 0;
            for (int i = 0; i < 8; i++) begin e[i] = ref_exp(b[i]); sum += e[i]; end
            for (int i = 0; i < 8; i++) c[i] = sat((longint'(e[i]) * 256) / sum);
          end
          for (int i = 0; i < 8; i++) begin
            longint n2 = 0, nrm, sc, ag = 0;
            for (int k = 0; k < 8; k++) s[i][k] = sat((longint'(fin[y][x][8*i+k]) * c[i]) >>> 8);
            for (int k = 0; k < 8; k++) n2 += longint'(s[i][k]) * s[i][k];
            n2 = longint'(unsigned'(32'(n2)));
            nrm = isqrt(n2); if (nrm > 32767) nrm = 32767;
            sc = (nrm * 65536) / (65536 + n2); if (sc > 32767) sc = 32767;
            for (int k = 0; k < 8; k++) s[i][k] = sat((longint'(s[i][k]) * sc) >>> 8);
            for (int k = 0; k < 8; k++) ag += longint'(fin[y][x][8*i+k]) * s[i][k];
            ag = longint'(int'(ag));
            b[i] = sat(longint'(b[i]) + sat(ag >>> 8));
          end
        end
        for (int i = 0; i < 8; i++)
          for (int k = 0; k < 8; k++) fexp[y][x][8*i+k] = s[i][k];
      end
  endtask

  // ---- host/DMA side ------------------------------------------------------
  task automatic send_weights(input int words[$]);
    for (int i = 0; i < words.size(); i += 4) begin
      s_axis_wgt_tdata  <= {16'(words[i+3]), 16'(words[i+2]), 16'(words[i+1]), 16'(words[i])};
      s_axis_wgt_tvalid <= 1;
      @(posedge clk);
      while (!s_axis_wgt_tready) @(posedge clk);
    end
    s_axis_wgt_tvalid <= 0;
  endtask

  task automatic send_fmap(int ch);
    for (int y = 0; y < R; y++)
      for (int x = 0; x < C; x++)
        for (int q = 0; q < ch / 4; q++) begin
          if ($urandom_range(0, 4) == 0) begin
            s_axis_act_tvalid <= 0;
            @(posedge clk);
            if (s_axis_act_tready) n_in_gap++;
          end
          s_axis_act_tdata  <= {16'(fin[y][x][4*q+3]), 16'(fin[y][x][4*q+2]),
                                16'(fin[y][x][4*q+1]), 16'(fin[y][x][4*q])};
          s_axis_act_tvalid <= 1;
          @(posedge clk);
          while (!s_axis_act_tready) @(posedge clk);
        end
    s_axis_act_tvalid <= 0;
  endtask

  task automatic get_fmap(int ch);
    int n = R * C * ch / 4, b = 0;
    while (b < n) begin
      m_axis_out_tready <= 1'($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (m_axis_out_tvalid && !m_axis_out_tready) n_out_stall++;
      if (m_axis_out_tvalid && m_axis_out_tready) begin
        int y, x, q;
        y = b / (C * ch / 4); x = (b / (ch / 4)) % C; q = b % (ch / 4);
        for (int j = 0; j < 4; j++) fout[y][x][4*q+j] = int'($signed(m_axis_out_tdata[16*j +: 16]));
        checks++;
        if (m_axis_out_tlast != (b == n - 1)) begin failures++; $display("tlast wrong"); end
        b++;
      end
    end
    m_axis_out_tready <= 0;
  endtask

  task automatic compare(string name, int ch);
    int bad = 0;
    for (int y = 0; y < R; y++)
      for (int x = 0; x < C; x++)
        for (int f = 0; f < ch; f++) begin
          checks++;
          if (fout[y][x][f] != fexp[y][x][f]) begin
            failures++; bad++;
            if (bad < 5) $display("%s y%0d x%0d ch%0d got %0d exp %0d", name, y, x, f, fout[y][x][f], fexp[y][x][f]);
          end
        end
  endtask

  task automatic run_conv(string name, int cin_, int kept_, int filt_, int k3_, int relu_,
                          int real_filt, int wmax);
    int words[$];
    int T;
    cin = cin_; kept = kept_; filt = filt_; k3 = k3_; relu = relu_; T = k3 ? 9 : 1;
    for (int f = 0; f < filt; f++) begin
      bia[f] = (f < real_filt) ? $urandom_range(0, 127) - 64 : 0;
      for (int k = 0; k < kept; k++) begin
        idx[f][k] = (kept == cin) ? k : $urandom_range(0, cin - 1);
        for (int t = 0; t < T; t++)
          wgt[f][k][t] = (f < real_filt) ? $urandom_range(0, 2 * wmax) - wmax : 0;
      end
    end
    for (int f = 0; f < filt; f++) for (int k = 0; k < kept; k++) for (int t = 0; t < T; t++)
      words.push_back(wgt[f][k][t]);
    for (int f = 0; f < filt; f++) words.push_back(bia[f]);
    for (int f = 0; f < filt; f++) for (int k = 0; k < kept; k++) words.push_back(idx[f][k]);
    conv_model();
    cfg = '0; cfg.op = OP_CONV; cfg.num_rows = 10'(R); cfg.num_cols = 9'(C);
    cfg.num_in_ch = 9'(cin); cfg.num_kept = 9'(kept); cfg.num_filters = 9'(filt);
    cfg.k3 = 1'(k3); cfg.relu = 1'(relu);
    start <= 1; @(posedge clk); start <= 0;
    fork
      send_weights(words);
      send_fmap(cin);
      get_fmap(filt);
    join
    while (busy) @(posedge clk);
    compare(name, filt);
    if (k3) begin n_conv3++; n_pad_rows += 2; end else n_conv1++;
    if (kept < cin) n_pruned += filt * kept;
    for (int y = 0; y < R; y++) for (int x = 0; x < C; x++) for (int f = 0; f < filt; f++)
      fin[y][x][f] = fout[y][x][f];
  endtask

  task automatic run_route(string name, int iters_);
    iters = iters_;
    route_model();
    cfg = '0; cfg.op = OP_ROUTE; cfg.num_rows = 10'(R); cfg.num_cols = 9'(C);
    cfg.num_iter = 4'(iters);
    start <= 1; @(posedge clk); start <= 0;
    fork
      send_fmap(64);
      get_fmap(64);
    join
    while (busy) @(posedge clk);
    compare(name, 64);
    n_route++;
    n_softmax += R * C * (iters - 1);
    for (int y = 0; y < R; y++) for (int x = 0; x < C; x++) for (int f = 0; f < 64; f++)
      fin[y][x][f] = fout[y][x][f];
  endtask

  task automatic count(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("%-28s %0d", what, n);
  endtask

  initial begin
    cfg = '0; start = 0;
    s_axis_wgt_tdata = '0; s_axis_wgt_tvalid = 0;
    s_axis_act_tdata = '0; s_axis_act_tvalid = 0; m_axis_out_tready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int y = 0; y < R; y++) for (int x = 0; x < C; x++) for (int ch = 0; ch < 8; ch++)
      fin[y][x][ch] = $urandom_range(0, 1023) - 512;
    run_conv("conv1", 8, 6, 8, 1, 1, 8, 64);
    run_conv("conv2", 8, 5, 8, 1, 1, 8, 64);
    trunk = fin;
    for (int br = 0; br < 2; br++) begin
      fin = trunk;
      run_conv(br ? "capsconvQ" : "capsconvI", 8, 4, 64, 1, 0, 64, 48);
      run_route(br ? "routeQ" : "routeI", 3);
      run_conv(br ? "dense1Q" : "dense1I", 64, 64, 64, 0, 1, 64, 64);
      run_conv(br ? "dense2Q" : "dense2I", 64, 64, 4, 0, 0, 1, 64);
      $display("%s image row 0: %0d %0d %0d %0d", br ? "Q" : "I",
               fout[0][0][0], fout[0][1][0], fout[0][2][0], fout[0][3][0]);
    end
    checks++;
    if (layers_done != 10) begin failures++; $display("layers_done %0d", layers_done); end
    count("3x3 convolution layers", n_conv3);
    count("1x1 (dense) layers", n_conv1);
    count("routing layers", n_route);
    count("padding rows", n_pad_rows);
    count("pruned-kernel lookups", n_pruned);
    count("ReLU clamps", n_relu_clamp);
    count("softmax passes", n_softmax);
    count("output stalls", n_out_stall);
    count("input gaps", n_in_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
