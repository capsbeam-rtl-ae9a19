// tb_squash_exp_unit -- self-checking test of the exponential / square root /
// divide unit.
//
// exp: compared bit-exactly with the Horner evaluation of the degree-5 Taylor
// polynomial and, for |x| <= 1.5, with the real exponential to within 2%.
// sqrt: compared with floor(sqrt(a)) computed here.  div: compared with the
// integer quotient (saturated).  The latency of each operation (1, 18 and 50
// clock edges from the start edge to done) is checked as well.
module tb_squash_exp_unit;
  import capsbeam_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done;
  logic [1:0]  op;
  logic [47:0] opa;
  logic [31:0] opb;
  fx_t         result;

  squash_exp_unit dut (.*);

  int checks = 0, failures = 0;

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

  function automatic longint ref_sqrt(longint a);
    longint r = longint'($floor($sqrt(real'(a))));
    while (r * r > a) r--;
    while ((r + 1) * (r + 1) <= a) r++;
    return r;
  endfunction

  task automatic run(input logic [1:0] o, input logic [47:0] a, input logic [31:0] bb,
                     input int expect_v, input int expect_lat);
    int n = 0;
    op <= o; opa <= a; opb <= bb; start <= 1;
    @(posedge clk);
    start <= 0;
    do begin @(posedge clk); n++; end while (!done && n < 100);
    checks += 2;
    if (int'(result) != expect_v) begin
      failures++;
      $display("op=%0d a=%0d b=%0d got=%0d exp=%0d", o, a, bb, result, expect_v);
    end
    if (n != expect_lat) begin
      failures++;
      $display("op=%0d latency %0d, expected %0d", o, n, expect_lat);
    end
  endtask

  initial begin
    start = 0; op = 0; opa = 0; opb = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // exponential
    for (int x = -1024; x <= 1024; x += 37) begin
      run(2'd0, 48'(signed'(64'(x))), 32'd0, ref_exp(x), 1);
      if (x >= -384 && x <= 384) begin
        real ex, er;
        ex = $exp(real'(x) / 256.0) * 256.0;
        er = real'(result) - ex;
        if (er < 0.0) er = -er;
        checks++;
        if (er > 0.02 * ex + 1.0) begin
          failures++;
          $display("exp(%0d/256) = %0d, real %f", x, result, ex);
        end
      end
    end
    // square root of Q.16 values -> Q8.8
    for (int k = 0; k < 40; k++) begin
      longint a, r;
      a = (k < 5) ? longint'(k) : longint'($urandom_range(0, 32'h7fff_ffff));
      r = ref_sqrt(a);
      run(2'd1, 48'(a), 32'd0, (r > 32767) ? 32767 : int'(r), 18);
    end
    // division
    for (int k = 0; k < 40; k++) begin
      longint a, bb, q;
      a  = longint'($urandom_range(0, 32'hffff_ffff)) << $urandom_range(0, 15);
      bb = longint'($urandom_range(1, 32'h00ff_ffff));
      q  = a / bb;
      run(2'd2, 48'(a), 32'(bb), (q > 32767) ? 32767 : int'(q), 50);
    end
    run(2'd2, 48'd1000, 32'd0, 32767, 50);     // divide by zero saturates
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
