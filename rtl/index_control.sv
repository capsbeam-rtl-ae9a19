// index_control -- kernel-pruning index store and lookup of the convolution
// engine ("Index Control Module" with its "Index (BRAM block)").
//
// After pruning, every filter keeps only num_kept of its 3x3 kernels; for
// each kept kernel the index store records which input channel it reads.
// The store is split into one bank per PE row (bank r holds the filters with
// number f mod 4 == r, in filter order), so the four filters that the PE
// array computes together are looked up in the same cycle.
//
// Loading: wr_clr rewinds the write pointers; every wr_en appends wr_ch to
// bank wr_bank.  Lookup: rd_en with rd_addr (= group * num_kept + kernel
// number) returns, one cycle later, the input channel of that kernel for
// each of the four filters of the group on rd_ch.  The banked organisation
// and one-cycle read latency are this design's choices; the paper gives the
// index table size (98 x 84 for the first layer) and its role.
module index_control
  import capsbeam_pkg::*;
#(
  parameter int BANKS = PE_ROWS,
  parameter int DEPTH = (MAX_FILT / PE_ROWS) * MAX_KEPT,
  localparam int AddrW = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_clr,
  input  logic                     wr_en,
  input  logic [$clog2(BANKS)-1:0] wr_bank,
  input  logic [CH_W-1:0]          wr_ch,
  input  logic                     rd_en,
  input  logic [AddrW-1:0]         rd_addr,
  output logic [CH_W-1:0]          rd_ch [BANKS]
);

  logic [CH_W-1:0]  mem  [BANKS][DEPTH];
  logic [AddrW-1:0] wptr [BANKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++) wptr[b] <= '0;
    end else if (wr_clr) begin
      for (int b = 0; b < BANKS; b++) wptr[b] <= '0;
    end else if (wr_en) begin
      wptr[wr_bank] <= wptr[wr_bank] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !wr_clr) mem[wr_bank][wptr[wr_bank]] <= wr_ch;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++) rd_ch[b] <= '0;
    end else if (rd_en) begin
      for (int b = 0; b < BANKS; b++) rd_ch[b] <= mem[b][rd_addr];
    end
  end

endmodule
