// conv_module -- row-streaming convolution engine with pruned kernels.
//
// Runs one convolution layer as in the paper's Algorithm 1.  The layer's
// weights, biases and kernel indices arrive first on the weight stream and
// stay on chip for the whole layer.  The input feature map then arrives one
// image row at a time (all columns, all input channels) on the activation
// stream into a three-row line buffer: the row above, the current row and
// the row below.  The buffer starts with a zero row (top padding), the last
// output row is computed with a zero row below it (bottom padding), and
// between rows the buffer shifts up by one row.  Columns outside the image
// read as zero (left/right padding), so the output has the input's size.
//
// For each output row the filters are processed in groups of four on the
// 4 x 128 PE array (one PE row per filter, one PE column per image column).
// For every kept kernel of the four filters and every kernel tap, one weight
// per filter enters the array; the index store tells which input channel
// each filter's kernel reads, and the activation for every PE is taken from
// the line buffer at (kernel row, column + kernel column - 1, channel).
// Finished sums leave the array column by column and are written, after
// rounding to Q8.8, optional ReLU and bias (in that order, as Algorithm 1
// lists them), into the 4 x 21 x 128 output buffer.  When all groups are
// done the output row is streamed out, column-major, four filters per beat.
//
// A 1x1 kernel mode (k3 = 0) runs the paper's point-wise fully connected
// layers on the same array; using the convolution engine for them is this
// design's choice (the paper does not say where they run).
//
// Streams (AXI-Stream style valid/ready, 4 x 16-bit lanes, lane 0 low):
//   weights : F*num_kept*T weights ordered [filter][kernel][ky][kx]
//             (T = 9 or 1), then F biases, then F*num_kept channel indices
//   input   : per row, [column][channel], 4 channels per beat
//   output  : per row, [column][filter], 4 filters per beat; tlast on the
//             final beat of the layer
// While a row is computed and streamed out, the input row needed two rows
// later is already streamed into a staging row buffer, so from the second
// output row on, input loading overlaps computation (the paper: "the next
// input row values are stored in the BRAM block and the computation process
// continues").  Streaming the output row out is not overlapped with the
// computation of the next row.
// Cycle count per output row, with steady streams: 1 (shift) + G*num_kept*T
// (issue, G = F/4) + COLS + 1 (drain through the array) + cols*G (output);
// the first row adds one row load (cols*cin/4).  Before that come the weight
// words (one per cycle) and the first row load; two cycles close the layer.
// A row load longer than compute+drain+output would add stall cycles.
//
// Lint notes: only some fields of the stored descriptor c_q are read here
// (op and num_iter belong to the routing engine), the top bits of iss_grp are
// not needed when FILT/4 is small, and the PE array's per-PE valid output is
// not needed because the fire output already marks finished sums.
module conv_module
  import capsbeam_pkg::*;
#(
  parameter int COLS   = MAX_COLS,
  parameter int CIN    = MAX_CIN,
  parameter int KEPT   = MAX_KEPT,
  parameter int FILT   = MAX_FILT,
  localparam int NGRP  = FILT / PE_ROWS,
  localparam int WDEP  = NGRP * KEPT * 9,
  localparam int IDEP  = NGRP * KEPT,
  localparam int WAW   = $clog2(WDEP),
  localparam int IAW   = $clog2(IDEP)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  output logic             busy,
  output logic             done,
  // weight stream (DMA-1)
  input  logic [SDW-1:0]   w_tdata,
  input  logic             w_tvalid,
  output logic             w_tready,
  // activation stream in (DMA-2)
  input  logic [SDW-1:0]   a_tdata,
  input  logic             a_tvalid,
  output logic             a_tready,
  // activation stream out (DMA-2)
  output logic [SDW-1:0]   o_tdata,
  output logic             o_tvalid,
  input  logic             o_tready,
  output logic             o_tlast
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOADW, S_INIT, S_LOAD1, S_PREP, S_LOAD2, S_COMP, S_DRAIN,
    S_OUT, S_DONE
  } state_e;

  typedef enum logic [1:0] { SEC_W, SEC_B, SEC_I } sec_e;

  state_e     state;
  sec_e       sec;
  layer_cfg_t c_q;

  // ---- on-chip storage -----------------------------------------------------
  fx_t lb   [3][COLS][CIN];           // input line buffer (3 rows)
  fx_t stg  [COLS][CIN];              // next input row, loaded during compute
  fx_t wmem [PE_ROWS][WDEP];          // weight BRAM, banked by filter mod 4
  fx_t bias [FILT];
  fx_t obuf [PE_ROWS][NGRP][COLS];    // output BRAM (4, 21, 128)

  // ---- derived layer sizes ---------------------------------------------------
  logic [3:0]  taps;                  // 9 or 1
  logic [13:0] per_filt;              // kernels*taps per filter
  logic [6:0]  ngrp;                  // filters / 4
  logic [6:0]  nchq;                  // input channels / 4

  always_comb begin
    taps     = c_q.k3 ? 4'd9 : 4'd1;
    per_filt = c_q.k3 ? (14'(c_q.num_kept) * 14'd9) : 14'(c_q.num_kept);
    ngrp     = 7'(c_q.num_filters >> 2);
    nchq     = 7'(c_q.num_in_ch >> 2);
  end

  // ---- weight loader ---------------------------------------------------------
  logic [1:0]     wsel;               // lane of the current weight beat
  logic [13:0]    wpos;               // word within the filter's section
  logic [8:0]     wf;                 // filter number
  logic [WAW-1:0] wa [PE_ROWS];       // per-bank write pointers
  fx_t            wword;
  logic           wlast_word;

  always_comb begin
    wword = fx_t'(w_tdata[wsel*DW +: DW]);
    case (sec)
      SEC_W:   wlast_word = 1'b0;
      SEC_B:   wlast_word = 1'b0;
      default: wlast_word = (wf == c_q.num_filters - 1) && (wpos == 14'(c_q.num_kept) - 1);
    endcase
  end

  assign w_tready = (state == S_LOADW) && (wsel == 2'd3);

  logic idx_wr;
  assign idx_wr = (state == S_LOADW) && w_tvalid && (sec == SEC_I);

  // ---- input row loader -----------------------------------------------------
  logic [7:0] lcol;                   // column being loaded
  logic [6:0] lchq;                   // channel quad being loaded
  logic       lrow_last_beat;
  logic       pf_active;              // prefetch of a later row into stg
  logic       pf_full;                // stg holds the next row
  logic       direct_load;
  assign direct_load    = (state == S_LOAD1) || (state == S_LOAD2);
  assign a_tready       = direct_load || pf_active;
  assign lrow_last_beat = (9'(lcol) == c_q.num_cols - 1) && (lchq == nchq - 1);

  // ---- compute sequencer -----------------------------------------------------
  logic [WAW-1:0] rd_addr;
  logic [IAW-1:0] idx_addr;
  logic [3:0]     tap;
  logic [1:0]     ky, kx;
  logic [8:0]     kk;
  logic [6:0]     grp;
  logic           issue, issue_last;
  logic [9:0]     row;

  assign issue      = (state == S_COMP);
  assign issue_last = (grp == ngrp - 1) && (kk == c_q.num_kept - 1) && (tap == taps - 1);

  // issue stage registers (aligned with the BRAM read latency)
  logic      iss_valid, iss_first, iss_last;
  logic [1:0] iss_ky, iss_kx;
  logic [6:0] iss_grp;
  fx_t       iss_wgt [PE_ROWS];
  logic [CH_W-1:0] idx_ch [PE_ROWS];

  index_control #(.BANKS(PE_ROWS), .DEPTH(IDEP)) u_idx (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_clr  (start && state == S_IDLE),
    .wr_en   (idx_wr),
    .wr_bank (wf[1:0]),
    .wr_ch   (wword[CH_W-1:0]),
    .rd_en   (issue),
    .rd_addr (idx_addr),
    .rd_ch   (idx_ch)
  );

  // ---- PE array ------------------------------------------------------------
  tap_meta_t in_meta  [PE_ROWS];
  tap_meta_t pe_meta  [PE_ROWS][COLS];
  logic      pe_valid [PE_ROWS][COLS];
  logic      fire     [PE_ROWS][COLS];
  acc_t      res      [PE_ROWS][COLS];
  fx_t       act      [PE_ROWS][COLS];
  logic      pe_busy;

  always_comb begin
    for (int r = 0; r < PE_ROWS; r++) begin
      in_meta[r].first = iss_first;
      in_meta[r].last  = iss_last;
      in_meta[r].ch    = idx_ch[r];
      in_meta[r].ky    = iss_ky;
      in_meta[r].kx    = iss_kx;
      in_meta[r].grp   = GRP_W'(iss_grp);
    end
  end

  // activation for every PE, chosen by the tap descriptor it holds
  always_comb begin
    for (int r = 0; r < PE_ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        int col;
        col = c + int'(pe_meta[r][c].kx) - (c_q.k3 ? 1 : 0);
        if (col < 0 || col >= int'(c_q.num_cols) || col >= COLS ||
            int'(pe_meta[r][c].ch) >= CIN)
          act[r][c] = '0;
        else
          act[r][c] = lb[pe_meta[r][c].ky][col][pe_meta[r][c].ch];
      end
    end
  end

  pe_array #(.ROWS(PE_ROWS), .COLS(COLS)) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (iss_valid),
    .in_meta  (in_meta),
    .in_wgt   (iss_wgt),
    .act      (act),
    .pe_meta  (pe_meta),
    .pe_valid (pe_valid),
    .fire     (fire),
    .res      (res),
    .busy     (pe_busy)
  );

  // ---- output streaming -----------------------------------------------------
  logic [7:0] ocol;
  logic [6:0] ogrp;
  logic       out_last_beat;
  assign out_last_beat = (9'(ocol) == c_q.num_cols - 1) && (ogrp == ngrp - 1);
  assign o_tvalid = (state == S_OUT);
  assign o_tlast  = o_tvalid && out_last_beat && (row == c_q.num_rows - 1);
  always_comb begin
    for (int j = 0; j < LANES; j++)
      o_tdata[j*DW +: DW] = obuf[j][ogrp[GRP_W-1:0]][ocol[$clog2(COLS)-1:0]];
  end

  assign busy = (state != S_IDLE);

  // ---- post-processing of a finished sum (Algorithm 1: ReLU, then bias) ----
  function automatic fx_t finish(input acc_t s, input logic relu, input fx_t b);
    fx_t v;
    v = acc_to_fx(s);
    if (relu && v < 0) v = '0;
    return fx_add(v, b);
  endfunction

  // ---- control FSM -----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      sec       <= SEC_W;
      c_q       <= '0;
      wsel      <= '0;
      wpos      <= '0;
      wf        <= '0;
      for (int b = 0; b < PE_ROWS; b++) wa[b] <= '0;
      lcol      <= '0;
      lchq      <= '0;
      pf_active <= 1'b0;
      pf_full   <= 1'b0;
      rd_addr   <= '0;
      idx_addr  <= '0;
      tap       <= '0;
      ky        <= '0;
      kx        <= '0;
      kk        <= '0;
      grp       <= '0;
      row       <= '0;
      ocol      <= '0;
      ogrp      <= '0;
      done      <= 1'b0;
      iss_valid <= 1'b0;
      iss_first <= 1'b0;
      iss_last  <= 1'b0;
      iss_ky    <= '0;
      iss_kx    <= '0;
      iss_grp   <= '0;
    end else begin
      done      <= 1'b0;
      // issue stage follows the sequencer by one cycle
      iss_valid <= issue;
      iss_first <= (kk == 0) && (tap == 0);
      iss_last  <= (kk == c_q.num_kept - 1) && (tap == taps - 1);
      iss_ky    <= c_q.k3 ? ky : 2'd1;
      iss_kx    <= c_q.k3 ? kx : 2'd0;
      iss_grp   <= grp;

      case (state)
        S_IDLE: if (start) begin
          c_q   <= cfg;
          state <= S_LOADW;
          pf_active <= 1'b0;
          pf_full   <= 1'b0;
          sec   <= SEC_W;
          wsel  <= '0;
          wpos  <= '0;
          wf    <= '0;
          for (int b = 0; b < PE_ROWS; b++) wa[b] <= '0;
        end

        S_LOADW: if (w_tvalid) begin
          wsel <= wsel + 2'd1;
          case (sec)
            SEC_W: begin
              wa[wf[1:0]] <= wa[wf[1:0]] + 1'b1;
              if (wpos == per_filt - 1) begin
                wpos <= '0;
                if (wf == c_q.num_filters - 1) begin
                  wf  <= '0;
                  sec <= SEC_B;
                end else wf <= wf + 1'b1;
              end else wpos <= wpos + 1'b1;
            end
            SEC_B: begin
              if (wf == c_q.num_filters - 1) begin
                wf  <= '0;
                sec <= SEC_I;
              end else wf <= wf + 1'b1;
            end
            default: begin
              if (wpos == 14'(c_q.num_kept) - 1) begin
                wpos <= '0;
                wf   <= wf + 1'b1;
              end else wpos <= wpos + 1'b1;
              if (wlast_word) begin
                state <= S_INIT;
                sec   <= SEC_W;
              end
            end
          endcase
        end

        S_INIT: begin                  // top padding row, then first row
          row   <= '0;
          lcol  <= '0;
          lchq  <= '0;
          state <= S_LOAD1;
        end

        S_LOAD1, S_LOAD2: if (a_tvalid) begin
          if (lchq == nchq - 1) begin
            lchq <= '0;
            lcol <= lcol + 1'b1;
          end else lchq <= lchq + 1'b1;
          if (lrow_last_beat) begin
            lcol  <= '0;
            lchq  <= '0;
            if (state == S_LOAD1) state <= S_PREP;
            else begin
              state     <= S_COMP;
              pf_active <= (11'(row) + 11'd2 < 11'(c_q.num_rows));
            end
          end
        end

        // row 0: the row below comes straight from the stream; later rows:
        // shift, and take the row below from the prefetch buffer (or zeros)
        S_PREP: begin
          if (row == c_q.num_rows - 1) begin
            state     <= S_COMP;
          end else if (row == 0) begin
            state     <= S_LOAD2;
          end else if (pf_full) begin
            state     <= S_COMP;
            pf_full   <= 1'b0;
            pf_active <= (11'(row) + 11'd2 < 11'(c_q.num_rows));
          end
        end

        S_COMP: begin
          if (tap == taps - 1) begin
            tap <= '0;
            ky  <= '0;
            kx  <= '0;
            idx_addr <= idx_addr + 1'b1;
            if (kk == c_q.num_kept - 1) begin
              kk  <= '0;
              grp <= grp + 1'b1;
            end else kk <= kk + 1'b1;
          end else begin
            tap <= tap + 1'b1;
            if (kx == 2'd2) begin
              kx <= '0;
              ky <= ky + 1'b1;
            end else kx <= kx + 1'b1;
          end
          rd_addr <= rd_addr + 1'b1;
          if (issue_last) state <= S_DRAIN;
        end

        S_DRAIN: if (!iss_valid && !pe_busy) begin
          ocol  <= '0;
          ogrp  <= '0;
          state <= S_OUT;
        end

        S_OUT: if (o_tready) begin
          if (ogrp == ngrp - 1) begin
            ogrp <= '0;
            ocol <= ocol + 1'b1;
          end else ogrp <= ogrp + 1'b1;
          if (out_last_beat) begin
            if (row == c_q.num_rows - 1) state <= S_DONE;
            else begin
              row   <= row + 1'b1;
              state <= S_PREP;
            end
          end
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase

      // prefetch of the row after next while this row is computed
      if (pf_active && a_tvalid) begin
        if (lchq == nchq - 1) begin
          lchq <= '0;
          lcol <= lcol + 1'b1;
        end else lchq <= lchq + 1'b1;
        if (lrow_last_beat) begin
          lcol      <= '0;
          lchq      <= '0;
          pf_active <= 1'b0;
          pf_full   <= 1'b1;
        end
      end

      // sequencer restarts at the top of the weight memory for every row
      if (state != S_COMP) begin
        rd_addr  <= '0;
        idx_addr <= '0;
        tap      <= '0;
        ky       <= '0;
        kx       <= '0;
        kk       <= '0;
        grp      <= '0;
      end
    end
  end

  // ---- memories --------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (state == S_LOADW && w_tvalid && sec == SEC_W)
      wmem[wf[1:0]][wa[wf[1:0]]] <= wword;
    for (int r = 0; r < PE_ROWS; r++)
      if (issue) iss_wgt[r] <= wmem[r][rd_addr];
  end

  always_ff @(posedge clk) begin
    if (state == S_LOADW && w_tvalid && sec == SEC_B)
      bias[wf[$clog2(FILT)-1:0]] <= wword;
  end

  // line buffer: load, shift and padding
  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      for (int c = 0; c < COLS; c++)
        for (int ch = 0; ch < CIN; ch++) lb[0][c][ch] <= '0;
    end
    if ((state == S_LOAD1 || state == S_LOAD2) && a_tvalid) begin
      for (int j = 0; j < LANES; j++)
        lb[(state == S_LOAD1) ? 1 : 2][lcol[$clog2(COLS)-1:0]][CH_W'({lchq, 2'(j)})] <=
          fx_t'(a_tdata[j*DW +: DW]);
    end
    if (pf_active && a_tvalid) begin
      for (int j = 0; j < LANES; j++)
        stg[lcol[$clog2(COLS)-1:0]][CH_W'({lchq, 2'(j)})] <= fx_t'(a_tdata[j*DW +: DW]);
    end
    if (state == S_PREP && row != 0 && (row == c_q.num_rows - 1 || pf_full)) begin
      for (int c = 0; c < COLS; c++)
        for (int ch = 0; ch < CIN; ch++) begin
          lb[0][c][ch] <= lb[1][c][ch];
          lb[1][c][ch] <= lb[2][c][ch];
          lb[2][c][ch] <= pf_full ? stg[c][ch] : '0;
        end
    end
    if (state == S_PREP && row == 0 && row == c_q.num_rows - 1) begin
      for (int c = 0; c < COLS; c++)
        for (int ch = 0; ch < CIN; ch++) lb[2][c][ch] <= '0;
    end
  end

  // output buffer: written as sums leave the PE array
  always_ff @(posedge clk) begin
    for (int r = 0; r < PE_ROWS; r++)
      for (int c = 0; c < COLS; c++)
        if (fire[r][c])
          obuf[r][pe_meta[r][c].grp][c] <=
            finish(res[r][c], c_q.relu, bias[{pe_meta[r][c].grp, 2'(r)}]);
  end

  // ---- protocol checks ------------------------------------------------------
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    o_tvalid && !o_tready |=> o_tvalid && $stable(o_tdata));
  a_cfg_quads: assert property (@(posedge clk) disable iff (!rst_n)
    start && state == S_IDLE |-> cfg.num_filters[1:0] == 2'b00 && cfg.num_in_ch[1:0] == 2'b00);

endmodule
