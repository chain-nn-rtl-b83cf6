// imem: iMemory, the on-chip ifmap buffer feeding the 1D chain.
//
// Two banks of IDEPTH 16-bit words: bank 0 holds the pixels of odd ifmap
// columns and feeds the OddIF channel, bank 1 holds the even columns and
// feeds EvenIF, so both channels get one pixel per cycle. Within a bank the
// pixels are stored in streaming order: for each ifmap channel of the tile,
// its columns of that parity left to right, each column's 2K-1 rows top to
// bottom. Words are written one at a time from the off-chip side.
//
// Timing: registered read; rdata is valid one cycle after re and is 0 when
// re was low (an idle channel slot). The host write port and the reads are
// independent.
//
// Follows the paper: a 32KB iMemory between off-chip memory and the chain
// (Fig. 7, Sec. V.B). This design's choices: the split into an odd-column
// and an even-column bank and the storage order.
module imem
  import chain_nn_pkg::*;
#(
  parameter int unsigned IDEPTH = IMEM_DEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // off-chip write port
  input  logic                      we,
  input  logic                      wbank,      // 0: odd columns, 1: even
  input  logic [$clog2(IDEPTH)-1:0] waddr,
  input  data_t                     wdata,
  // channel read ports
  input  logic                      odd_re,
  input  logic [$clog2(IDEPTH)-1:0] odd_addr,
  output data_t                     odd_rdata,
  input  logic                      even_re,
  input  logic [$clog2(IDEPTH)-1:0] even_addr,
  output data_t                     even_rdata
);
  data_t bank_odd  [IDEPTH];
  data_t bank_even [IDEPTH];

  always_ff @(posedge clk) begin
    if (we && !wbank) bank_odd[waddr]  <= wdata;
    if (we &&  wbank) bank_even[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      odd_rdata  <= '0;
      even_rdata <= '0;
    end else begin
      odd_rdata  <= odd_re  ? bank_odd[odd_addr]   : '0;
      even_rdata <= even_re ? bank_even[even_addr] : '0;
    end
  end
endmodule
