// chain: the Chain-NN 1D chain architecture, N_PE dual-channel PEs in a row.
//
// The chain is cut at run time into systolic primitives of K*K adjacent PEs
// (K = cfg_k, the kernel size). Every primitive receives the same ifmap
// stream (odd_in / even_in) and the same window control (ctrl_in) at its
// first PE, holds the weights of one output channel, and delivers one
// convolution result per cycle at its last PE. prim_count(K) = floor(N_PE/K^2)
// primitives are active (at most MAX_PRIM); leftover PEs at the end of the
// chain are idle. For K = 3, 5, 7, 9, 11 and 576 PEs this uses 576, 575, 539,
// 567 and 484 PEs.
//
// Per-PE configuration (first / last PE of a primitive, and the parity of
// the window column the PE's weight belongs to) depends only on the PE's
// position and on K. It is a constant table per PE, selected by cfg_k.
// Likewise output lane p is taken from PE (p+1)*K^2-1 through a small
// multiplexer whose inputs are fixed at elaboration.
//
// Timing: the result of the window whose newest pixel is presented at cycle
// T appears on lane_psum at cycle T + K^2 + 2, with lane_valid set, for all
// primitives at once. One window per cycle, with no bubbles.
//
// Kernel loading: kin is shifted through all N_PE PEs (first word ends in
// the last PE); kcommit writes every PE's shift register into its kMemory at
// kcommit_addr. kcommit may coincide with the next shift.
//
// Follows the paper: chain of 576 PEs, primitives of K^2 adjacent PEs with
// primitive input/output ports (Fig. 3, Table II). This design's choices:
// the configuration tables, broadcast primitive inputs, the output lane
// multiplexer and the kernel shift chain.
module chain
  import chain_nn_pkg::*;
#(
  parameter int unsigned N_PE  = N_PE_DEF,
  parameter int unsigned NPRIM = MAX_PRIM,
  parameter int unsigned KDEP  = KMEM_DEPTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [K_W-1:0]          cfg_k,
  // primitive inputs (broadcast)
  input  data_t                   odd_in,
  input  data_t                   even_in,
  input  win_ctrl_t               ctrl_in,
  // primitive outputs
  output acc_t                    lane_psum [NPRIM],
  output logic                    lane_valid,
  // kernel loading
  input  logic                    kshift,
  input  data_t                   kin,
  input  logic                    kcommit,
  input  logic [$clog2(KDEP)-1:0] kcommit_addr
);
  data_t     odd_c   [N_PE+1];
  data_t     even_c  [N_PE+1];
  win_ctrl_t ctrl_c  [N_PE+1];
  acc_t      psum_c  [N_PE+1];
  data_t     ksh_c   [N_PE+1];
  logic      valid_c [N_PE];

  assign odd_c[0]  = odd_in;
  assign even_c[0] = even_in;
  assign ctrl_c[0] = ctrl_in;
  assign psum_c[0] = '0;
  assign ksh_c[0]  = kin;

  // position of PE g inside a primitive of kernel size k: j = g mod k^2
  function automatic logic [2:0] pe_cfg(int unsigned g, int unsigned k);
    int unsigned j, cw;
    j  = g % (k * k);
    cw = (k - 1) - (j / k);      // window column of the pixel PE j multiplies
    return {logic'(j == 0), logic'(j == k * k - 1), logic'(cw % 2 == 1)};
  endfunction

  for (genvar g = 0; g < N_PE; g++) begin : g_pe
    logic first, last, flip;

    always_comb begin
      {first, last, flip} = 3'b100;
      for (int unsigned k = K_MIN; k <= K_MAX; k++)
        if (cfg_k == K_W'(k)) {first, last, flip} = pe_cfg(g, k);
    end

    pe #(.DW(DATA_W), .AW(ACC_W), .KDEP(KDEP)) u_pe (
      .clk          (clk),
      .rst_n        (rst_n),
      .cfg_first    (first),
      .cfg_last     (last),
      .cfg_flip     (flip),
      .odd_prev     (odd_c[g]),
      .even_prev    (even_c[g]),
      .odd_prim     (odd_in),
      .even_prim    (even_in),
      .odd_out      (odd_c[g+1]),
      .even_out     (even_c[g+1]),
      .ctrl_prev    (ctrl_c[g]),
      .ctrl_prim    (ctrl_in),
      .ctrl_out     (ctrl_c[g+1]),
      .psum_prev    (psum_c[g]),
      .psum_out     (psum_c[g+1]),
      .out_valid    (valid_c[g]),
      .kshift       (kshift),
      .ksh_in       (ksh_c[g]),
      .ksh_out      (ksh_c[g+1]),
      .kcommit      (kcommit),
      .kcommit_addr (kcommit_addr)
    );
  end

  // index of the last PE of primitive p for kernel size k (clamped in range)
  function automatic int unsigned last_pe(int unsigned p, int unsigned k);
    int unsigned i;
    i = (p + 1) * k * k - 1;
    return (i < N_PE) ? i : N_PE - 1;
  endfunction

  // ---- primitive output lanes ---------------------------------------------
  for (genvar p = 0; p < NPRIM; p++) begin : g_lane
    always_comb begin
      lane_psum[p] = '0;
      for (int unsigned k = K_MIN; k <= K_MAX; k++)
        if (cfg_k == K_W'(k) && p < prim_count(k, N_PE, NPRIM))
          lane_psum[p] = psum_c[last_pe(p, k) + 1];
    end
  end

  always_comb begin
    lane_valid = 1'b0;
    for (int unsigned k = K_MIN; k <= K_MAX; k++)
      if (cfg_k == K_W'(k) && prim_count(k, N_PE, NPRIM) > 0)
        lane_valid = valid_c[last_pe(0, k)];
  end

endmodule
