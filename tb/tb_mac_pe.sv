// tb_mac_pe -- self-checking test of the processing element.
//
// Random and corner-case operands: out_col must equal out_col_part +
// in_act * in_wgt in the same cycle (32-bit wrap-around), and out_wgt must
// show in_wgt one clock later when wgt_en is high and hold otherwise.
module tb_mac_pe;
  import capsbeam_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wgt_en;
  fx_t  in_act, in_wgt, out_wgt;
  acc_t out_col_part, out_col;

  mac_pe dut (.*);

  int checks = 0, failures = 0;

  initial begin
    fx_t prev_w, held;
    wgt_en = 0; in_act = 0; in_wgt = 0; out_col_part = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++;
    if (out_wgt != 0) begin failures++; $display("R not reset"); end
    held = 0;
    for (int k = 0; k < 500; k++) begin
      logic signed [31:0] expect_v;
      @(negedge clk);
      case (k % 50)
        0: begin in_act = 16'sh7fff; in_wgt = 16'sh7fff; end
        1: begin in_act = 16'sh8000; in_wgt = 16'sh8000; end
        2: begin in_act = 16'sh8000; in_wgt = 16'sh7fff; end
        default: begin in_act = fx_t'($urandom); in_wgt = fx_t'($urandom); end
      endcase
      out_col_part = acc_t'($urandom);
      wgt_en = 1'($urandom_range(0, 1));
      #1;
      expect_v = 32'(longint'(out_col_part) + longint'(in_act) * longint'(in_wgt));
      checks++;
      if (out_col != expect_v) begin
        failures++;
        $display("out_col %0d != %0d", out_col, expect_v);
      end
      prev_w = in_wgt;
      @(posedge clk);
      #1;
      if (wgt_en) held = prev_w;
      checks++;
      if (out_wgt != held) begin
        failures++;
        $display("out_wgt %0d != %0d", out_wgt, held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
