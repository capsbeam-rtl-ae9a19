// tb_dynamic_routing -- self-checking test of the point-wise dynamic routing
// engine.
//
// Streams pseudo-random capsule data (8 capsules x 8 values per pixel) for
// two small layers (3 iterations on 2x3 pixels, 1 iteration on 2x2 pixels),
// with random input gaps and output back-pressure.  Every output value is
// compared with a fixed-point model of the routing loop written here
// (softmax over the 8 logits of a pixel, s = c*u, squash, b += u.s), and
// with a floating-point evaluation of the same loop to within 0.1.  With
// steady streams the cycles per pixel pair are checked against the engine's
// schedule.
module tb_dynamic_routing;
  import capsbeam_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  layer_cfg_t cfg;
  logic [SDW-1:0] a_tdata, o_tdata;
  logic a_tvalid, a_tready, o_tvalid, o_tready, o_tlast;

  dynamic_routing dut (.*);

  int checks = 0, failures = 0;
  int npix, iters;
  bit steady;
  int uin [0:63][0:7][0:7];

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int ref_exp(int x);
    longint c[6] = '{546, 2731, 10923, 32768, 65536, 65536};
    longint x16 = longint'(x) * 256;
    longint a = c[0];
    for (int i = 1; i < 6; i++) a = ((a * x16) >>> 16) + c[i];
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

  // fixed-point model of one pixel
  task automatic model(input int px, output int v[0:7][0:7]);
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
        for (int k = 0; k < 8; k++) s[i][k] = sat((longint'(uin[px][i][k]) * c[i]) >>> 8);
        for (int k = 0; k < 8; k++) n2 += longint'(s[i][k]) * s[i][k];
        n2 = longint'(unsigned'(32'(n2)));
        nrm = isqrt(n2); if (nrm > 32767) nrm = 32767;
        sc = (nrm * 65536) / (65536 + n2); if (sc > 32767) sc = 32767;
        for (int k = 0; k < 8; k++) s[i][k] = sat((longint'(s[i][k]) * sc) >>> 8);
        for (int k = 0; k < 8; k++) ag += longint'(uin[px][i][k]) * s[i][k];
        ag = longint'(int'(ag));
        b[i] = sat(longint'(b[i]) + sat(ag >>> 8));
      end
    end
    v = s;
  endtask

  // floating-point routing of one pixel
  task automatic model_real(input int px, output real v[0:7][0:7]);
    real b[0:7], c[0:7], s[0:7][0:7];
    for (int i = 0; i < 8; i++) begin b[i] = 0.0; c[i] = 0.125; end
    for (int it = 0; it < iters; it++) begin
      if (it > 0) begin
        real sum = 0.0;
        for (int i = 0; i < 8; i++) sum += $exp(b[i]);
        for (int i = 0; i < 8; i++) c[i] = $exp(b[i]) / sum;
      end
      for (int i = 0; i < 8; i++) begin
        real n2 = 0.0, ag = 0.0, sc;
        for (int k = 0; k < 8; k++) s[i][k] = c[i] * uin[px][i][k] / 256.0;
        for (int k = 0; k < 8; k++) n2 += s[i][k] * s[i][k];
        sc = $sqrt(n2) / (1.0 + n2);
        for (int k = 0; k < 8; k++) s[i][k] = s[i][k] * sc;
        for (int k = 0; k < 8; k++) ag += uin[px][i][k] / 256.0 * s[i][k];
        b[i] += ag;
      end
    end
    v = s;
  endtask

  task automatic feed();
    for (int p = 0; p < npix; p++)
      for (int q = 0; q < 16; q++) begin
        if (!steady) begin
          a_tvalid <= 0;
          repeat ($urandom_range(0, 1)) @(posedge clk);
        end
        a_tdata <= {16'(uin[p][(4*q+3)/8][(4*q+3)%8]), 16'(uin[p][(4*q+2)/8][(4*q+2)%8]),
                    16'(uin[p][(4*q+1)/8][(4*q+1)%8]), 16'(uin[p][(4*q)/8][(4*q)%8])};
        a_tvalid <= 1;
        @(posedge clk);
        while (!a_tready) @(posedge clk);
      end
    a_tvalid <= 0;
  endtask

  task automatic collect();
    int v[0:7][0:7];
    real vr[0:7][0:7];
    for (int p = 0; p < npix; p++) begin
      model(p, v);
      model_real(p, vr);
      for (int q = 0; q < 16; q++) begin
        do begin
          o_tready <= steady ? 1'b1 : 1'($urandom_range(0, 2) != 0);
          @(posedge clk);
        end while (!(o_tvalid && o_tready));
        for (int j = 0; j < 4; j++) begin
          int got, i, k;
          real err;
          i = (4*q+j) / 8; k = (4*q+j) % 8;
          got = int'($signed(o_tdata[16*j +: 16]));
          checks++;
          if (got != v[i][k]) begin
            failures++;
            if (failures < 10) $display("px %0d cap %0d el %0d got %0d exp %0d", p, i, k, got, v[i][k]);
          end
          err = real'(got) / 256.0 - vr[i][k];
          if (err < 0.0) err = -err;
          checks++;
          if (err > 0.1) begin
            failures++;
            $display("px %0d cap %0d el %0d: %f vs real %f", p, i, k, real'(got)/256.0, vr[i][k]);
          end
        end
        checks++;
        if (o_tlast != (p == npix - 1 && q == 15)) begin
          failures++;
          $display("tlast wrong px %0d beat %0d", p, q);
        end
      end
    end
    o_tready <= 0;
  endtask

  task automatic run_layer(int rows, int cols, int it_, bit st_);
    int t0, t1, expc;
    npix = rows * cols; iters = it_; steady = st_;
    for (int p = 0; p < npix; p++)
      for (int i = 0; i < 8; i++)
        for (int k = 0; k < 8; k++) uin[p][i][k] = $urandom_range(0, 767) - 384;
    cfg = '0;
    cfg.op = OP_ROUTE; cfg.num_rows = 10'(rows); cfg.num_cols = 9'(cols);
    cfg.num_iter = 4'(iters);
    start <= 1;
    @(posedge clk);
    start <= 0;
    t0 = $time / 10;
    fork
      feed();
      collect();
    join
    while (!done) @(posedge clk);
    t1 = $time / 10;
    if (steady) begin
      // per pair: 32 load + per iteration (1 + 8 + 8 + 19 + 51 + 8 + 8 + 1)
      // + 53 softmax cycles after the first + 32 output; then done
      expc = (npix / 2) * (32 + iters * 104 + (iters - 1) * 53 + 32) + 2;
      checks++;
      if (t1 - t0 != expc) begin
        failures++;
        $display("CYCLES got=%0d expected=%0d", t1 - t0, expc);
      end
    end
    @(posedge clk);
  endtask

  initial begin
    start = 0; a_tvalid = 0; o_tready = 0; a_tdata = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_layer(2, 3, 3, 1'b1);
    run_layer(2, 2, 1, 1'b0);
    run_layer(1, 4, 4, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
