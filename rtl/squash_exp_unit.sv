// squash_exp_unit -- non-linear unit for softmax and squash.
//
// Three operations, selected by op when start is pulsed:
//   SE_EXP  : y = exp(x) for a Q8.8 input, by the first terms of the Taylor
//             series evaluated in Horner form with five multiplications and
//             five additions, coefficients c1..c6 = 1/120, 1/24, 1/6, 1/2,
//             1, 1 (the structure of the paper's exponential PE; the paper
//             credits the idea to FastCaps).  Computed with 16 fraction bits
//             inside; result ready one cycle after start.
//   SE_SQRT : y = sqrt(a) for an unsigned Q16.16 a, giving Q8.8; bit-serial
//             integer square root, 16 cycles (the paper uses a vendor HLS
//             square root; this is a plain replacement).
//   SE_DIV  : y = a / b, unsigned, restoring division over 48 bits, 48
//             cycles.  The caller pre-shifts a to get the fraction bits it
//             needs.
// All results saturate to 0..32767.  A degree-5 polynomial goes negative for
// x below about -3.5; this design clamps exp results to at least one LSB so
// that a softmax denominator can never be zero.  Division by zero returns
// the saturated maximum.
//
// Interface: start/op/opa/opb are sampled when busy is low; done pulses for
// one cycle with result valid in the same cycle and held afterwards.
// SE_DIV is the default branch of the op decode (op 3 also divides), so
// lint reports the SE_DIV name itself as unused.
// The top bit of the divider remainder and the top two bits of the square
// root remainder are guard bits for the compare and are never read back.
module squash_exp_unit
  import capsbeam_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [1:0]  op,
  input  logic [47:0] opa,
  input  logic [31:0] opb,
  output logic        busy,
  output logic        done,
  output fx_t         result
);

  localparam logic [1:0] SE_EXP = 2'd0, SE_SQRT = 2'd1, SE_DIV = 2'd2;

  // Taylor coefficients in Q.16, highest power first (c1 .. c6)
  localparam logic signed [63:0] C [6] = '{64'sd546, 64'sd2731, 64'sd10923,
                                           64'sd32768, 64'sd65536, 64'sd65536};

  function automatic fx_t exp_taylor(input fx_t x);
    logic signed [63:0] x16, acc;
    x16 = 64'(x) <<< 8;                       // Q8.8 -> Q.16
    acc = C[0];
    for (int i = 1; i < 6; i++)
      acc = ((acc * x16) >>> 16) + C[i];      // one multiply and one add
    acc = acc >>> 8;                          // Q.16 -> Q8.8
    if (acc < 64'sd1)     return 16'sd1;
    if (acc > 64'sd32767) return 16'sh7fff;
    return fx_t'(acc);
  endfunction

  function automatic fx_t usat(input logic [47:0] v);
    return (v > 48'd32767) ? 16'sh7fff : fx_t'(v[15:0]);
  endfunction

  typedef enum logic [1:0] { U_IDLE, U_SQRT, U_DIV, U_DONE } ustate_e;
  ustate_e     st;
  logic [5:0]  cnt;
  logic [1:0]  op_q;
  logic [47:0] num, quo;
  logic [48:0] rem;
  logic [31:0] den;
  logic [31:0] sq_a;
  logic [33:0] sq_rem;
  logic [15:0] sq_root;

  assign busy = (st != U_IDLE);

  // one restoring-division step
  logic [48:0] rem_sh, rem_sub;
  always_comb begin
    rem_sh  = {rem[47:0], num[47]};
    rem_sub = rem_sh - {17'd0, den};
  end

  // one square-root step (two bits of the radicand per step)
  logic [33:0] sq_trial, sq_rem_sh;
  always_comb begin
    sq_rem_sh = {sq_rem[31:0], sq_a[31:30]};
    sq_trial  = {16'd0, sq_root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= U_IDLE;
      cnt     <= '0;
      num     <= '0;
      quo     <= '0;
      rem     <= '0;
      den     <= '0;
      sq_a    <= '0;
      sq_rem  <= '0;
      sq_root <= '0;
      done    <= 1'b0;
      result  <= '0;
      op_q    <= SE_EXP;
    end else begin
      done <= 1'b0;
      case (st)
        U_IDLE: if (start) begin
          op_q <= op;
          case (op)
            SE_EXP: begin
              result <= exp_taylor(fx_t'(opa[15:0]));
              done   <= 1'b1;
            end
            SE_SQRT: begin
              sq_a    <= opa[31:0];
              sq_rem  <= '0;
              sq_root <= '0;
              cnt     <= 6'd16;
              st      <= U_SQRT;
            end
            default: begin
              num <= opa;
              den <= opb;
              rem <= '0;
              quo <= '0;
              cnt <= 6'd48;
              st  <= U_DIV;
            end
          endcase
        end

        U_SQRT: begin
          sq_a <= {sq_a[29:0], 2'b00};
          if (sq_rem_sh >= sq_trial) begin
            sq_rem  <= sq_rem_sh - sq_trial;
            sq_root <= {sq_root[14:0], 1'b1};
          end else begin
            sq_rem  <= sq_rem_sh;
            sq_root <= {sq_root[14:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
          if (cnt == 6'd1) st <= U_DONE;
        end

        U_DIV: begin
          num <= {num[46:0], 1'b0};
          if (!rem_sub[48]) begin
            rem <= rem_sub;
            quo <= {quo[46:0], 1'b1};
          end else begin
            rem <= rem_sh;
            quo <= {quo[46:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
          if (cnt == 6'd1) st <= U_DONE;
        end

        default: begin                // U_DONE: publish the result
          done <= 1'b1;
          st   <= U_IDLE;
          if (op_q == SE_SQRT)     result <= usat({32'd0, sq_root});
          else if (den == 32'd0)   result <= 16'sh7fff;
          else                     result <= usat(quo);
        end
      endcase
    end
  end

endmodule
