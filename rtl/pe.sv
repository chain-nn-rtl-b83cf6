// pe: the dual-channel processing engine of the Chain-NN 1D chain.
//
// Each PE holds stationary kernel weights in its kMemory and performs one
// 16-bit fixed-point multiply-accumulate per cycle. Ifmap pixels arrive on
// two channels, OddIF (odd ifmap columns) and EvenIF (even columns); both are
// passed on to the next PE through two registers each. A multiplexer picks the
// channel whose pixel belongs to the convolution window currently at this PE
// and feeds it to the MAC, which adds the product to the partial sum (PSum)
// coming from the previous PE.
//
// Primitive ports: when cfg_first is set this PE starts a systolic primitive:
// it takes ifmaps and window control from the primitive input (broadcast from
// iMemory) instead of the previous PE, and starts its PSum from 0. When
// cfg_last is set its PSum is a primitive output (out_valid marks it).
//
// Timing. Let a window's control reach this PE at cycle T (ctrl_in). Then
//   T+1: selected pixel and kMemory weight registered      (stage 1)
//   T+2: product registered                                  (stage 2)
//   T+3: psum_out = psum_in + product registered             (stage 3)
// The ifmap channels are delayed 2 cycles per PE and the control 1 cycle per
// PE, so the PE j places down the primitive multiplies the pixel that entered
// the primitive j cycles before the window's newest pixel: a primitive of K*K
// PEs sums K*K consecutive pixels of the stream against K*K weights.
//
// Follows the paper: two ifmap channels with two registers each, the channel
// multiplexer, the primitive-input / zero-PSum / primitive-output multiplexers
// (Fig. 6), kMemory of 256 weights, three pipeline stages per PE (Sec. V.B).
// This design's choices: what the three stages hold, the channel-select rule
// (window-start column parity carried with the control, flipped by
// cfg_flip), and kernel loading through a shift register per PE
// (ksh_in -> ksh_out) committed to kMemory by kcommit.
module pe
  import chain_nn_pkg::*;
#(
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned AW    = ACC_W,
  parameter int unsigned KDEP  = KMEM_DEPTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration (static while streaming)
  input  logic                    cfg_first,   // PE starts a primitive
  input  logic                    cfg_last,    // PE ends a primitive
  input  logic                    cfg_flip,    // its window column is odd-offset
  // ifmap channels
  input  logic signed [DW-1:0]    odd_prev,
  input  logic signed [DW-1:0]    even_prev,
  input  logic signed [DW-1:0]    odd_prim,
  input  logic signed [DW-1:0]    even_prim,
  output logic signed [DW-1:0]    odd_out,
  output logic signed [DW-1:0]    even_out,
  // window control
  input  win_ctrl_t               ctrl_prev,
  input  win_ctrl_t               ctrl_prim,
  output win_ctrl_t               ctrl_out,
  // partial sums
  input  logic signed [AW-1:0]    psum_prev,
  output logic signed [AW-1:0]    psum_out,
  output logic                    out_valid,   // psum_out is a primitive output
  // kernel loading
  input  logic                    kshift,
  input  logic signed [DW-1:0]    ksh_in,
  output logic signed [DW-1:0]    ksh_out,
  input  logic                    kcommit,
  input  logic [$clog2(KDEP)-1:0] kcommit_addr
);
  // ---- primitive input multiplexers (gray muxes of Fig. 6) ----------------
  logic signed [DW-1:0] odd_in, even_in;
  win_ctrl_t            ctrl_in;
  logic signed [AW-1:0] psum_in;

  always_comb begin
    odd_in  = cfg_first ? odd_prim  : odd_prev;
    even_in = cfg_first ? even_prim : even_prev;
    ctrl_in = cfg_first ? ctrl_prim : ctrl_prev;
    psum_in = cfg_first ? '0        : psum_prev;
  end

  // ---- ifmap channels: two registers per channel ---------------------------
  logic signed [DW-1:0] odd_r1, even_r1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      odd_r1   <= '0;
      even_r1  <= '0;
      odd_out  <= '0;
      even_out <= '0;
      ctrl_out <= '0;
    end else begin
      odd_r1   <= odd_in;
      even_r1  <= even_in;
      odd_out  <= odd_r1;
      even_out <= even_r1;
      ctrl_out <= ctrl_in;
    end
  end

  // ---- channel multiplexer ----------------------------------------------------
  // The pixel this PE needs lies in window column (podd XOR cfg_flip) odd.
  logic sel_even;
  assign sel_even = ~(ctrl_in.podd ^ cfg_flip);

  // ---- kMemory and kernel shift register --------------------------------------
  logic signed [DW-1:0] kweight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      ksh_out <= '0;
    else if (kshift) ksh_out <= ksh_in;
  end

  kmem #(.DEPTH(KDEP), .W(DW)) u_kmem (
    .clk   (clk),
    .we    (kcommit),
    .waddr (kcommit_addr),
    .wdata (ksh_out),
    .raddr (ctrl_in.kaddr[$clog2(KDEP)-1:0]),   // KDEP may be below the package depth
    .rdata (kweight)
  );

  // ---- three-stage MAC ------------------------------------------------------
  logic signed [DW-1:0]   x_s1;
  logic signed [2*DW-1:0] prod_s2;
  logic [2:0]             v_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_s1     <= '0;
      prod_s2  <= '0;
      psum_out <= '0;
      v_pipe   <= '0;
    end else begin
      x_s1     <= sel_even ? even_in : odd_in;                 // stage 1
      prod_s2  <= x_s1 * kweight;                              // stage 2
      psum_out <= psum_in + AW'(prod_s2);                      // stage 3
      v_pipe   <= {v_pipe[1:0], ctrl_in.wv};
    end
  end

  assign out_valid = cfg_last & v_pipe[2];

endmodule
