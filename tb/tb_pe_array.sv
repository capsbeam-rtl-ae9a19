// tb_pe_array -- self-checking test of the weight-passing PE array.
//
// A reduced 3 x 6 array gets groups of weight steps (random weights,
// channels and kernel positions) back to back, without gaps between groups,
// and the activation of each PE is looked up here from the descriptor the
// array reports for it.  Checks: every PE fires exactly once per group, in
// the cycle (last step + column) the weight passing implies, with the sum of
// its weight x activation products; busy drops once the array is empty.
module tb_pe_array;
  import capsbeam_pkg::*;

  localparam int ROWS = 3, COLS = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      in_valid, busy;
  tap_meta_t in_meta  [ROWS];
  fx_t       in_wgt   [ROWS];
  fx_t       act      [ROWS][COLS];
  tap_meta_t pe_meta  [ROWS][COLS];
  logic      pe_valid [ROWS][COLS];
  logic      fire     [ROWS][COLS];
  acc_t      res      [ROWS][COLS];

  pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  int table_v [ROWS][COLS][4][4];   // activation by (row, col, ch, ky)

  // activation presented to each PE from its descriptor
  always_comb
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        act[r][c] = fx_t'(table_v[r][c][pe_meta[r][c].ch[1:0]][pe_meta[r][c].ky]);

  localparam int NG = 3, NS = 7;      // groups, steps per group
  int w  [NG][NS][ROWS];
  int ch [NG][NS][ROWS];
  int ky [NG][NS];
  longint expect_sum [NG][ROWS][COLS];
  int fire_cnt [ROWS][COLS];
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // monitor: compare every firing PE
  int t_first = -1;
  always @(negedge clk) if (rst_n) begin
    if (in_valid && t_first < 0) t_first = cyc;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        if (fire[r][c]) begin
          int g, expect_cyc;
          g = int'(pe_meta[r][c].grp);
          expect_cyc = t_first + g * NS + NS - 1 + c;
          checks += 2;
          if (res[r][c] != acc_t'(expect_sum[g][r][c])) begin
            failures++;
            $display("g%0d r%0d c%0d got %0d exp %0d", g, r, c, res[r][c], expect_sum[g][r][c]);
          end
          if (cyc != expect_cyc) begin
            failures++;
            $display("g%0d r%0d c%0d fired at %0d, expected %0d", g, r, c, cyc, expect_cyc);
          end
          fire_cnt[r][c]++;
        end
  end

  initial begin
    in_valid = 0;
    for (int r = 0; r < ROWS; r++) begin in_meta[r] = '0; in_wgt[r] = '0; end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        fire_cnt[r][c] = 0;
        for (int a = 0; a < 4; a++)
          for (int b = 0; b < 4; b++) table_v[r][c][a][b] = $urandom_range(0, 2047) - 1024;
      end
    for (int g = 0; g < NG; g++)
      for (int s = 0; s < NS; s++) begin
        ky[g][s] = $urandom_range(0, 2);
        for (int r = 0; r < ROWS; r++) begin
          w[g][s][r]  = $urandom_range(0, 2047) - 1024;
          ch[g][s][r] = $urandom_range(0, 3);
        end
      end
    for (int g = 0; g < NG; g++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          expect_sum[g][r][c] = 0;
          for (int s = 0; s < NS; s++)
            expect_sum[g][r][c] += longint'(w[g][s][r]) * table_v[r][c][ch[g][s][r]][ky[g][s]];
        end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (cyc < 10) @(posedge clk);
    // cycle 10 onward: NG*NS steps back to back
    for (int g = 0; g < NG; g++)
      for (int s = 0; s < NS; s++) begin
        tap_meta_t m;
        @(posedge clk);
        in_valid <= 1;
        for (int r = 0; r < ROWS; r++) begin
          m       = '0;
          m.first = (s == 0);
          m.last  = (s == NS - 1);
          m.ch    = CH_W'(ch[g][s][r]);
          m.ky    = 2'(ky[g][s]);
          m.grp   = GRP_W'(g);
          in_wgt[r]  <= fx_t'(w[g][s][r]);
          in_meta[r] <= m;
        end
      end
    @(posedge clk);
    in_valid <= 0;
    repeat (COLS + 1) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy still high"); end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (fire_cnt[r][c] != NG) begin
          failures++;
          $display("PE %0d,%0d fired %0d times", r, c, fire_cnt[r][c]);
        end
      end
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
