// omem: oMemory, the on-chip ofmap partial-sum buffer behind the 1D chain.
//
// Every cycle in which the chain's lanes are valid, all n_prim primitives
// deliver one result each, for n_prim consecutive output channels. These
// are accumulated over the n_c ifmap channels of an output tile: the first
// channel's result is stored, later ones are added to what is stored
// (read-modify-write), which implements the sum over c of Eq. (1). With acc
// set the first channel is added as well, so a tile whose channels are
// split over several runs keeps accumulating.
//
// Storage is BANKS banks of DEPTH words. A result is identified by a linear
// index L = (g*KE + pos)*n_prim + p, where g is the output-channel group,
// pos the output position in the tile (pos = K*column + row), p the
// primitive (lane) and KE = K*E the positions per tile. Word L lives in
// bank L mod BANKS at row L div BANKS. Since a cycle's n_prim results have
// consecutive indices and n_prim <= BANKS, they always fall into different
// banks: lane p is rotated to bank (L0+p) mod BANKS. The write sequencer
// counts positions, channels and groups itself from the valid strobe.
//
// The off-chip side reads word L through rd_addr (registered, one cycle).
// overflow is set when a result would fall beyond the storage.
//
// Follows the paper: an oMemory of 25KB accumulating ofmaps
// ("ofmaps[n][m] += conv(...)", Fig. 7). This design's choices: word width,
// banking, the linear layout and single-cycle read-modify-write.
module omem
  import chain_nn_pkg::*;
#(
  parameter int unsigned BANKS = OMEM_BANKS,
  parameter int unsigned DEPTH = OMEM_DEPTH,
  parameter int unsigned NPRIM = MAX_PRIM
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // tile set-up
  input  logic                           start,
  input  logic [$clog2(NPRIM+1)-1:0]     n_prim,
  input  logic [15:0]                    ke,
  input  logic [CNT_W-1:0]               n_c,
  input  logic                           acc,   // add the first channel too
  // results from the chain
  input  acc_t                           lane_psum [NPRIM],
  input  logic                           lane_valid,
  // off-chip read port
  input  logic [$clog2(BANKS*DEPTH)-1:0] rd_addr,
  output acc_t                           rd_data,
  output logic                           overflow
);
  localparam int unsigned BW = $clog2(BANKS);
  localparam int unsigned LW = $clog2(BANKS*DEPTH) + 1;
  localparam int unsigned RW = $clog2(DEPTH);

  // ---- write sequencer -------------------------------------------------------
  logic [LW-1:0]    l0, g_base;
  logic [15:0]      pos;
  logic [CNT_W-1:0] c_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l0 <= '0; g_base <= '0; pos <= '0; c_cnt <= '0;
    end else if (start) begin
      l0 <= '0; g_base <= '0; pos <= '0; c_cnt <= '0;
    end else if (lane_valid) begin
      if (pos == ke - 1'b1) begin
        pos <= '0;
        if (c_cnt == n_c - 1'b1) begin
          c_cnt  <= '0;
          g_base <= l0 + LW'(n_prim);
          l0     <= l0 + LW'(n_prim);
        end else begin
          c_cnt <= c_cnt + 1'b1;
          l0    <= g_base;
        end
      end else begin
        pos <= pos + 1'b1;
        l0  <= l0 + LW'(n_prim);
      end
    end
  end

  logic [BW-1:0] off;
  logic [LW-1:0] row0;
  assign off  = l0[BW-1:0];
  assign row0 = l0 >> BW;

  // ---- banks ------------------------------------------------------------------
  acc_t bank_rd [BANKS];
  logic [BANKS-1:0] ovf_b;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    acc_t          mem [DEPTH];
    logic [BW:0]   diff;                         // b - off, top bit = borrow
    logic [BW-1:0] lane;
    logic [LW-1:0] row;
    logic          wen;
    acc_t          din;

    always_comb begin
      diff = {1'b0, BW'(b)} - {1'b0, off};
      lane = diff[BW-1:0];                       // lane that lands in this bank
      row  = row0 + LW'(diff[BW]);               // banks below off wrap to the next row
      wen  = lane_valid && (LW'(lane) < LW'(n_prim));
      din  = lane_psum[lane];
      ovf_b[b] = wen && (row >= LW'(DEPTH));
    end

    always_ff @(posedge clk) begin
      if (wen && row < LW'(DEPTH))
        mem[row[RW-1:0]] <= ((c_cnt == '0 && !acc) ? '0 : mem[row[RW-1:0]]) + din;
    end

    assign bank_rd[b] = mem[RW'(rd_addr >> BW)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data  <= '0;
      overflow <= 1'b0;
    end else begin
      rd_data <= bank_rd[rd_addr[BW-1:0]];
      if (start)       overflow <= 1'b0;
      else if (|ovf_b) overflow <= 1'b1;
    end
  end

  initial assert (NPRIM <= BANKS && (BANKS & (BANKS - 1)) == 0)
    else $error("omem: NPRIM must not exceed BANKS, BANKS must be a power of 2");

endmodule
