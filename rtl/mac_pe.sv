// mac_pe -- one processing element of the CapsBeam PE arrays.
//
// Follows the PE drawn in the paper's convolution and routing figures: the
// input activation is multiplied by the input weight and the product is added
// to the incoming partial output (out_col_part), giving out_col.  The weight
// is also captured in a register R and presented on out_wgt one cycle later,
// so that a row of PEs can pass one weight along, one column per cycle.
//
// Interface: in_act/in_wgt are Q8.8, out_col_part/out_col are full-width
// accumulators (Q16.16).  out_col is combinational; out_wgt is registered
// and loads whenever wgt_en is high.  Widths of the accumulator are this
// design's choice; the paper gives only "16-bit fixed point".
module mac_pe
  import capsbeam_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic wgt_en,
  input  fx_t  in_act,
  input  fx_t  in_wgt,
  input  acc_t out_col_part,
  output acc_t out_col,
  output fx_t  out_wgt
);

  always_comb out_col = out_col_part + acc_t'(in_act) * acc_t'(in_wgt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      out_wgt <= '0;
    else if (wgt_en) out_wgt <= in_wgt;
  end

endmodule
