// pe_array -- the 4 x 128 MAC array of the convolution engine.
//
// Row r computes output channel r of the current group of four filters,
// column c computes image column c of the current output row (paper: "array
// of 4x128 processing elements", partial output of dimension (128, 4)).
//
// Weights enter at column 0 of each row together with a tap descriptor
// (tap_meta_t: input channel, kernel row/column, filter group, first/last
// flags) and ripple to the right through each PE's R register, one column
// per cycle, as the paper's PE figure shows.  The array therefore works as a
// weight-passing systolic row: column c sees a given weight c cycles after
// column 0.  The descriptor currently at each PE is exported (pe_meta) so
// the surrounding convolution module can present the matching activation
// (act) to that PE in the same cycle.
//
// Each PE owns an accumulator.  A step with `first` set starts a new sum, a
// step with `last` set closes it: fire[r][c] is high in that cycle and
// res[r][c] holds the finished sum.  Because fire moves one column per cycle,
// a new group of filters can follow the previous one without a bubble.
//
// Interface: in_valid/in_meta/in_wgt are sampled for column 0 in the cycle
// they are presented; busy is high while any step is still in the array.
module pe_array
  import capsbeam_pkg::*;
#(
  parameter int ROWS = PE_ROWS,
  parameter int COLS = MAX_COLS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  tap_meta_t in_meta [ROWS],
  input  fx_t       in_wgt  [ROWS],
  input  fx_t       act     [ROWS][COLS],
  output tap_meta_t pe_meta [ROWS][COLS],
  output logic      pe_valid[ROWS][COLS],
  output logic      fire    [ROWS][COLS],
  output acc_t      res     [ROWS][COLS],
  output logic      busy
);

  fx_t       wgt_at  [ROWS][COLS];   // weight at each PE input
  fx_t       wgt_out [ROWS][COLS];   // R register output of each PE
  tap_meta_t meta_q  [ROWS][1:COLS-1];  // descriptor registers
  logic      vld_q   [ROWS][1:COLS-1];
  acc_t      acc     [ROWS][COLS];
  acc_t      sum     [ROWS][COLS];
  acc_t      part    [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      if (c == 0) begin : g_head
        assign wgt_at[r][c]   = in_wgt[r];
        assign pe_meta[r][c]  = in_meta[r];
        assign pe_valid[r][c] = in_valid;
      end else begin : g_tail
        assign wgt_at[r][c]   = wgt_out[r][c-1];
        assign pe_meta[r][c]  = meta_q[r][c];
        assign pe_valid[r][c] = vld_q[r][c];
      end

      assign part[r][c] = pe_meta[r][c].first ? '0 : acc[r][c];

      mac_pe u_pe (
        .clk          (clk),
        .rst_n        (rst_n),
        .wgt_en       (1'b1),
        .in_act       (act[r][c]),
        .in_wgt       (wgt_at[r][c]),
        .out_col_part (part[r][c]),
        .out_col      (sum[r][c]),
        .out_wgt      (wgt_out[r][c])
      );

      assign fire[r][c] = pe_valid[r][c] && pe_meta[r][c].last;
      assign res[r][c]  = sum[r][c];

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) acc[r][c] <= '0;
        else if (pe_valid[r][c]) acc[r][c] <= sum[r][c];
      end

      // descriptor pipeline toward the next column
      if (c < COLS - 1) begin : g_fwd
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            vld_q[r][c+1]  <= 1'b0;
            meta_q[r][c+1] <= '0;
          end else begin
            vld_q[r][c+1]  <= pe_valid[r][c];
            meta_q[r][c+1] <= pe_meta[r][c];
          end
        end
      end
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        busy |= pe_valid[r][c];
  end

endmodule
