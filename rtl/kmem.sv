// kmem: kMemory, the register-file kernel store inside every PE.
//
// Holds DEPTH stationary kernel weights. The write port is filled from the
// PE's kernel shift register during kernel loading; the read port is
// addressed by the window control that travels with the data, so the weight
// a PE multiplies by changes exactly when a new input pattern (a new ifmap
// channel or output-channel group) reaches that PE.
//
// Timing: synchronous write; synchronous read, rdata is valid the cycle
// after raddr. No reset (storage only).
// Paper: register-file kMemory of 256 weights per PE. This design's choice:
// one write and one read port, registered read.
module kmem #(
  parameter int unsigned DEPTH = chain_nn_pkg::KMEM_DEPTH,
  parameter int unsigned W     = chain_nn_pkg::DATA_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
