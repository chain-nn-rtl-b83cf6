// chain_nn: top level of the Chain-NN convolution accelerator.
//
// Chain-NN computes CNN convolutional layers on a 1D chain of N_PE
// dual-channel PEs. The chain is cut into systolic primitives of K*K PEs;
// each primitive keeps the weights of one output channel stationary in its
// PEs' kMemories while an ifmap tile of 2K-1 rows flows through it in
// column-wise scan order on two channels (odd and even columns). Every
// primitive then finishes one KxK convolution per cycle, and all primitives
// work on the same ifmap data, so n_prim output channels are produced in
// parallel. Results are accumulated over ifmap channels in oMemory.
//
//   off-chip --> iMemory (odd/even banks) --> chain of PEs --> oMemory --> off-chip
//   off-chip --> kernel stream ------------^      ^
//                                   scan_gen / ctrl (state machine)
//
// Use: (1) write the tile's ifmaps into iMemory (im_*), (2) start with
// OP_KLOAD and stream C*G*N_PE kernel words (k_*), (3) start with OP_RUN,
// (4) after done read the results from oMemory (om_*). A tile whose ifmap
// channels do not fit iMemory at once is run in parts: each part names its
// first kMemory address (cfg_kbase), and all parts but the first set cfg_acc
// so that oMemory keeps adding. Kernels stay loaded
// across any number of OP_RUN operations (e.g. all images of a batch).
// Data layouts of the three memories are described in imem, chain, omem.
//
// The off-chip memory is not part of this design; its traffic is these
// ports. Follows the paper: 576 PEs, 16-bit data, 256 weights per PE,
// 32KB iMemory, 25KB oMemory. This design's choices are listed in the
// sub-modules.
module chain_nn
  import chain_nn_pkg::*;
#(
  parameter int unsigned N_PE   = N_PE_DEF,
  parameter int unsigned KDEP   = KMEM_DEPTH,
  parameter int unsigned IDEPTH = IMEM_DEPTH,
  parameter int unsigned OBANKS = OMEM_BANKS,
  parameter int unsigned ODEPTH = OMEM_DEPTH
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // command and configuration
  input  logic                             start,
  input  logic                             op,        // 0: load kernels, 1: run
  input  logic [K_W-1:0]                   cfg_k,     // kernel size K
  input  logic [W_W-1:0]                   cfg_w,     // ifmap tile width W
  input  logic [CNT_W-1:0]                 cfg_c,     // ifmap channels C
  input  logic [CNT_W-1:0]                 cfg_g,     // output-channel groups G
  input  logic [KA_W-1:0]                  cfg_kbase, // first kMemory address (run)
  input  logic                             cfg_acc,   // run adds to oMemory contents
  output logic                             busy,
  output logic                             done,
  output logic                             cfg_err,
  output logic [$clog2(OBANKS+1)-1:0]      n_prim,    // output channels per group
  // kernel stream from off-chip memory
  input  logic                             k_valid,
  input  logic [DATA_W-1:0]                k_data,
  output logic                             k_ready,
  // iMemory write port from off-chip memory
  input  logic                             im_we,
  input  logic                             im_bank,   // 0: odd columns, 1: even
  input  logic [$clog2(IDEPTH)-1:0]        im_addr,
  input  logic [DATA_W-1:0]                im_wdata,
  // oMemory read port to off-chip memory
  input  logic [$clog2(OBANKS*ODEPTH)-1:0] om_addr,
  output logic [ACC_W-1:0]                 om_rdata,
  output logic                             om_overflow
);
  logic [K_W-1:0]   k_q;
  logic [W_W-1:0]   w_q;
  logic [CNT_W-1:0] c_q, g_q;
  kaddr_t           kbase_q;
  logic             acc_q;
  logic [15:0]      ke;
  logic             kshift, kcommit, run_start, scan_done;
  logic [$clog2(KDEP)-1:0] kcommit_addr;

  ctrl #(.N_PE(N_PE), .NPRIM(OBANKS), .KDEP(KDEP), .IDEPTH(IDEPTH),
         .OWORDS(OBANKS*ODEPTH)) u_ctrl (
    .clk, .rst_n, .start, .op(op_e'(op)),
    .k_in(cfg_k), .w_in(cfg_w), .c_in(cfg_c), .g_in(cfg_g),
    .kbase_in(kaddr_t'(cfg_kbase)), .acc_in(cfg_acc),
    .busy, .done, .cfg_err,
    .cfg_k(k_q), .cfg_w(w_q), .cfg_c(c_q), .cfg_g(g_q),
    .cfg_kbase(kbase_q), .cfg_acc(acc_q), .n_prim, .ke,
    .k_valid, .k_ready,
    .kshift, .kcommit, .kcommit_addr,
    .run_start, .scan_done
  );

  logic                      odd_re, even_re;
  logic [$clog2(IDEPTH)-1:0] odd_addr, even_addr;
  win_ctrl_t                 wctrl;
  logic                      scan_busy;

  scan_gen #(.IDEPTH(IDEPTH)) u_scan (
    .clk, .rst_n, .start(run_start),
    .cfg_k(k_q), .cfg_w(w_q), .n_c(c_q), .n_g(g_q), .kbase(kbase_q),
    .odd_re, .odd_addr, .even_re, .even_addr,
    .ctrl_out(wctrl), .busy(scan_busy), .done(scan_done)
  );

  data_t odd_px, even_px;

  imem #(.IDEPTH(IDEPTH)) u_imem (
    .clk, .rst_n,
    .we(im_we), .wbank(im_bank), .waddr(im_addr), .wdata(data_t'(im_wdata)),
    .odd_re, .odd_addr, .odd_rdata(odd_px),
    .even_re, .even_addr, .even_rdata(even_px)
  );

  acc_t lane_psum [OBANKS];
  logic lane_valid;

  chain #(.N_PE(N_PE), .NPRIM(OBANKS), .KDEP(KDEP)) u_chain (
    .clk, .rst_n, .cfg_k(k_q),
    .odd_in(odd_px), .even_in(even_px), .ctrl_in(wctrl),
    .lane_psum, .lane_valid,
    .kshift, .kin(data_t'(k_data)), .kcommit, .kcommit_addr
  );

  acc_t om_q;

  omem #(.BANKS(OBANKS), .DEPTH(ODEPTH), .NPRIM(OBANKS)) u_omem (
    .clk, .rst_n, .start(run_start),
    .n_prim, .ke, .n_c(c_q), .acc(acc_q),
    .lane_psum, .lane_valid,
    .rd_addr(om_addr), .rd_data(om_q), .overflow(om_overflow)
  );

  assign om_rdata = om_q;

  // the scan generator only runs inside a run operation
  a_scan_in_run: assert property (@(posedge clk) disable iff (!rst_n) scan_busy |-> busy);

endmodule
