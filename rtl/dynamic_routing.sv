// dynamic_routing -- point-wise dynamic routing engine of the convolutional
// capsule layers.
//
// The 64 channels of one pixel are read as 8 capsules of 8 values (reshape
// 64 -> 8 x 8, row-major: channel = 8*capsule + element).  For each pixel the
// engine runs the routing loop of the paper's Algorithm 2:
//   b = 0;  c = softmax(b)
//   repeat num_iter times:
//     if not the first pass: c = softmax(b)          (exponential unit)
//     s[i][:] = c[i] * u[i][:]                       ("fully connected")
//     s[i][:] = squash(s[i][:])                      (sqrt + divide)
//     b[i]   += u[i][:] . s[i][:]                    ("agreement")
//   output s
// The paper prints only the shapes of this loop (input 8 x 8, 8 logits per
// pixel, output 8 x 8); reading "s = input * c" as scaling capsule i by its
// own coupling coefficient c[i], with the softmax taken over the 8 capsules
// of the pixel, is this design's interpretation.  squash(s) is computed as
// s * |s| / (1 + |s|^2).
//
// RPIX pixels (2, as in the paper's routing figure) are processed side by
// side.  Each pixel has 8 MAC lanes (one per capsule, the same PE as the
// convolution array) and 8 non-linear units (squash_exp_unit), so the
// element loops take 8 cycles and the non-linear steps run for all capsules
// at once.  All arithmetic is Q8.8 with Q16.16 accumulation.
//
// Streams (valid/ready, 4 x 16-bit lanes): input and output are 16 beats per
// pixel, pixels in raster order; tlast marks the last output beat.  The
// number of pixels (num_rows * num_cols) must be a multiple of RPIX.
// Per pair of pixels: 32 load beats, per iteration 8 (FC) + 8 (norm) +
// 19 (sqrt) + 51 (divide) + 8 (scale) + 8 (agree) + 1 cycles plus, after
// the first pass, 2 (exp) + 51 (divide) for the softmax, then 32 output beats.
//
// Lint notes: only num_rows, num_cols and num_iter of the stored descriptor
// c_q are read; the MAC lanes reuse mac_pe, whose weight pass-through output
// (out_wgt) has no use here and is left unconnected; the non-linear units'
// busy outputs are not needed because the sequencer waits on their done.
module dynamic_routing
  import capsbeam_pkg::*;
#(
  parameter int P = RPIX
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  layer_cfg_t     cfg,
  output logic           busy,
  output logic           done,
  input  logic [SDW-1:0] a_tdata,
  input  logic           a_tvalid,
  output logic           a_tready,
  output logic [SDW-1:0] o_tdata,
  output logic           o_tvalid,
  input  logic           o_tready,
  output logic           o_tlast
);

  localparam int NB = NCAP * CDIM / LANES;    // beats per pixel (16)
  localparam logic [1:0] SE_EXP = 2'd0, SE_SQRT = 2'd1, SE_DIV = 2'd2;

  typedef enum logic [3:0] {
    R_IDLE, R_LOAD, R_ITER, R_EXP, R_SMDIV, R_FC, R_NORM, R_SQRT, R_SQDIV,
    R_SCALE, R_AGREE, R_BUPD, R_OUT, R_DONE
  } rstate_e;

  rstate_e    st;
  layer_cfg_t c_q;

  // on-chip buffers: input, logits/coefficients ("parameter"), output
  fx_t  u    [P][NCAP][CDIM];
  fx_t  s    [P][NCAP][CDIM];
  fx_t  b    [P][NCAP];
  fx_t  cc   [P][NCAP];
  fx_t  e    [P][NCAP];
  fx_t  scl  [P][NCAP];
  acc_t acc  [P][NCAP];

  logic [19:0] npix, pix;          // pixels in layer, first pixel of pair
  logic [5:0]  beat;               // load / output beat within the pair
  logic [2:0]  d;                  // element counter
  logic [3:0]  it;                 // routing iteration

  // ---- MAC lanes -------------------------------------------------------------
  fx_t  l_act [P][NCAP];
  fx_t  l_wgt [P][NCAP];
  acc_t l_part[P][NCAP];
  acc_t l_out [P][NCAP];

  always_comb begin
    for (int p = 0; p < P; p++)
      for (int i = 0; i < NCAP; i++) begin
        l_act[p][i]  = u[p][i][d];
        l_wgt[p][i]  = cc[p][i];
        l_part[p][i] = '0;
        case (st)
          R_NORM:  begin
            l_act[p][i]  = s[p][i][d];
            l_wgt[p][i]  = s[p][i][d];
            l_part[p][i] = (d == 0) ? '0 : acc[p][i];
          end
          R_SCALE: begin
            l_act[p][i]  = s[p][i][d];
            l_wgt[p][i]  = scl[p][i];
          end
          R_AGREE: begin
            l_wgt[p][i]  = s[p][i][d];
            l_part[p][i] = (d == 0) ? '0 : acc[p][i];
          end
          default: ;
        endcase
      end
  end

  for (genvar p = 0; p < P; p++) begin : g_pix
    for (genvar i = 0; i < NCAP; i++) begin : g_cap
      mac_pe u_pe (
        .clk          (clk),
        .rst_n        (rst_n),
        .wgt_en       (1'b0),
        .in_act       (l_act[p][i]),
        .in_wgt       (l_wgt[p][i]),
        .out_col_part (l_part[p][i]),
        .out_col      (l_out[p][i]),
        .out_wgt      ()
      );
    end
  end

  // ---- non-linear units --------------------------------------------------------
  logic        nl_start;
  logic [1:0]  nl_op;
  logic [47:0] nl_a [P][NCAP];
  logic [31:0] nl_b [P][NCAP];
  logic        nl_busy [P][NCAP];
  logic        nl_done [P][NCAP];
  fx_t         nl_y    [P][NCAP];
  logic        nl_wait;             // a non-linear step has been launched
  logic [31:0] esum [P];

  always_comb begin
    for (int p = 0; p < P; p++) begin
      esum[p] = '0;
      for (int i = 0; i < NCAP; i++) esum[p] += 32'(unsigned'(e[p][i]));
    end
    nl_op = SE_EXP;
    case (st)
      R_SQRT:  nl_op = SE_SQRT;
      R_SQDIV, R_SMDIV: nl_op = SE_DIV;
      default: nl_op = SE_EXP;
    endcase
    for (int p = 0; p < P; p++)
      for (int i = 0; i < NCAP; i++) begin
        nl_a[p][i] = {{32{b[p][i][DW-1]}}, b[p][i]};     // exp(b)
        nl_b[p][i] = 32'd1;
        case (st)
          R_SMDIV: begin                                  // e / sum(e)
            nl_a[p][i] = {24'd0, e[p][i][DW-1:0], 8'd0};
            nl_b[p][i] = esum[p];
          end
          R_SQRT:  nl_a[p][i] = {16'd0, acc[p][i]};       // |s|^2, Q.16
          R_SQDIV: begin                                  // |s| / (1+|s|^2)
            nl_a[p][i] = {16'd0, scl[p][i][DW-1:0], 16'd0};
            nl_b[p][i] = 32'h0001_0000 + acc[p][i];
          end
          default: ;
        endcase
      end
  end

  assign nl_start = !nl_wait && (st == R_EXP || st == R_SMDIV || st == R_SQRT || st == R_SQDIV);

  for (genvar p = 0; p < P; p++) begin : g_nlp
    for (genvar i = 0; i < NCAP; i++) begin : g_nli
      squash_exp_unit u_nl (
        .clk    (clk),
        .rst_n  (rst_n),
        .start  (nl_start),
        .op     (nl_op),
        .opa    (nl_a[p][i]),
        .opb    (nl_b[p][i]),
        .busy   (nl_busy[p][i]),
        .done   (nl_done[p][i]),
        .result (nl_y[p][i])
      );
    end
  end

  // ---- streams -----------------------------------------------------------------
  logic [3:0] bq;                   // beat within a pixel
  logic       bp;                   // pixel of the pair
  assign bq = beat[3:0];
  assign bp = beat[4];

  assign a_tready = (st == R_LOAD);
  assign o_tvalid = (st == R_OUT);
  assign o_tlast  = o_tvalid && (beat == 6'(P * NB - 1)) && (pix + 20'(P) >= npix);
  always_comb begin
    for (int j = 0; j < LANES; j++) begin
      int v;
      v = int'(bq) * LANES + j;
      o_tdata[j*DW +: DW] = s[bp][v / CDIM][v % CDIM];
    end
  end

  assign busy = (st != R_IDLE);

  // ---- control ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= R_IDLE;
      c_q     <= '0;
      npix    <= '0;
      pix     <= '0;
      beat    <= '0;
      d       <= '0;
      it      <= '0;
      nl_wait <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (nl_start) nl_wait <= 1'b1;
      case (st)
        R_IDLE: if (start) begin
          c_q  <= cfg;
          npix <= 20'(cfg.num_rows) * 20'(cfg.num_cols);
          pix  <= '0;
          beat <= '0;
          st   <= R_LOAD;
        end

        R_LOAD: if (a_tvalid) begin
          beat <= beat + 1'b1;
          if (beat == 6'(P * NB - 1)) begin
            beat <= '0;
            it   <= '0;
            st   <= R_ITER;
          end
        end

        R_ITER: begin
          d  <= '0;
          st <= (it == 0) ? R_FC : R_EXP;
        end

        R_EXP:   if (nl_wait && nl_done[0][0]) begin nl_wait <= 1'b0; st <= R_SMDIV; end
        R_SMDIV: if (nl_wait && nl_done[0][0]) begin nl_wait <= 1'b0; st <= R_FC;    end

        R_FC: begin
          d <= d + 1'b1;
          if (d == 3'(CDIM - 1)) st <= R_NORM;
        end

        R_NORM: begin
          d <= d + 1'b1;
          if (d == 3'(CDIM - 1)) st <= R_SQRT;
        end

        R_SQRT:  if (nl_wait && nl_done[0][0]) begin nl_wait <= 1'b0; st <= R_SQDIV; end
        R_SQDIV: if (nl_wait && nl_done[0][0]) begin nl_wait <= 1'b0; st <= R_SCALE; end

        R_SCALE: begin
          d <= d + 1'b1;
          if (d == 3'(CDIM - 1)) st <= R_AGREE;
        end

        R_AGREE: begin
          d <= d + 1'b1;
          if (d == 3'(CDIM - 1)) st <= R_BUPD;
        end

        R_BUPD: begin
          it <= it + 1'b1;
          if (it + 1'b1 >= c_q.num_iter) begin
            beat <= '0;
            st   <= R_OUT;
          end else st <= R_ITER;
        end

        R_OUT: if (o_tready) begin
          beat <= beat + 1'b1;
          if (beat == 6'(P * NB - 1)) begin
            beat <= '0;
            if (pix + 20'(P) >= npix) st <= R_DONE;
            else begin
              pix <= pix + 20'(P);
              st  <= R_LOAD;
            end
          end
        end

        R_DONE: begin
          done <= 1'b1;
          st   <= R_IDLE;
        end

        default: st <= R_IDLE;
      endcase
    end
  end

  // ---- datapath registers ---------------------------------------------------
  always_ff @(posedge clk) begin
    if (st == R_LOAD && a_tvalid)
      for (int j = 0; j < LANES; j++) begin
        int v;
        v = int'(bq) * LANES + j;
        u[bp][v / CDIM][v % CDIM] <= fx_t'(a_tdata[j*DW +: DW]);
      end
    for (int p = 0; p < P; p++)
      for (int i = 0; i < NCAP; i++) begin
        case (st)
          R_LOAD: begin                         // b = 0, c = softmax(0) = 1/8
            b[p][i]  <= '0;
            cc[p][i] <= fx_t'((1 << FRAC) / NCAP);
          end
          R_EXP:   if (nl_done[p][i]) e[p][i]  <= nl_y[p][i];
          R_SMDIV: if (nl_done[p][i]) cc[p][i] <= nl_y[p][i];
          R_FC:    s[p][i][d] <= acc_to_fx(l_out[p][i]);
          R_NORM:  acc[p][i]  <= l_out[p][i];
          R_SQRT:  if (nl_done[p][i]) scl[p][i] <= nl_y[p][i];   // |s|
          R_SQDIV: if (nl_done[p][i]) scl[p][i] <= nl_y[p][i];   // scale
          R_SCALE: s[p][i][d] <= acc_to_fx(l_out[p][i]);
          R_AGREE: acc[p][i]  <= l_out[p][i];
          R_BUPD:  b[p][i]    <= fx_add(b[p][i], acc_to_fx(acc[p][i]));
          default: ;
        endcase
      end
  end

  a_pix_pairs: assert property (@(posedge clk) disable iff (!rst_n)
    start && st == R_IDLE |-> (20'(cfg.num_rows) * 20'(cfg.num_cols)) % P == 0);
  a_iter: assert property (@(posedge clk) disable iff (!rst_n)
    start && st == R_IDLE |-> cfg.num_iter != 0);

endmodule
