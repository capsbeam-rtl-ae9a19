// tb_index_control -- self-checking test of the pruning index store.
//
// Fills the four banks in an interleaved filter order, as the weight stream
// does, reads every address back and checks that each bank returns the
// values appended to it, one cycle after rd_en, and that rd_ch holds when
// rd_en is low.  A second fill after wr_clr must overwrite from address 0.
module tb_index_control;
  import capsbeam_pkg::*;

  localparam int DEPTH = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_clr, wr_en, rd_en;
  logic [1:0] wr_bank;
  logic [CH_W-1:0] wr_ch;
  logic [$clog2(DEPTH)-1:0] rd_addr;
  logic [CH_W-1:0] rd_ch [4];

  index_control #(.BANKS(4), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int model [4][DEPTH];

  task automatic fill(int kept, int filters);
    wr_clr <= 1; @(posedge clk); wr_clr <= 0;
    for (int f = 0; f < filters; f++)
      for (int k = 0; k < kept; k++) begin
        int v = $urandom_range(0, MAX_CIN - 1);
        model[f % 4][(f / 4) * kept + k] = v;
        wr_en <= 1; wr_bank <= 2'(f % 4); wr_ch <= CH_W'(v);
        @(posedge clk);
      end
    wr_en <= 0;
  endtask

  task automatic readback(int n);
    for (int a = 0; a < n; a++) begin
      rd_en <= 1; rd_addr <= $clog2(DEPTH)'(a);
      @(posedge clk);
      rd_en <= 0;
      #1;
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (int'(rd_ch[b]) != model[b][a]) begin
          failures++;
          $display("bank %0d addr %0d got %0d exp %0d", b, a, rd_ch[b], model[b][a]);
        end
      end
      rd_addr <= $clog2(DEPTH)'((a + 1) % n);
      @(posedge clk);
      #1;
      for (int b = 0; b < 4; b++) begin        // held while rd_en is low
        checks++;
        if (int'(rd_ch[b]) != model[b][a]) failures++;
      end
    end
  endtask

  initial begin
    wr_clr = 0; wr_en = 0; rd_en = 0; wr_bank = 0; wr_ch = 0; rd_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fill(6, 16);          // 4 groups x 6 kernels = 24 entries per bank
    readback(24);
    fill(5, 8);           // refill after clear: 2 groups x 5 kernels
    readback(10);
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
