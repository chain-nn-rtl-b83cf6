// chain_nn_pkg: sizes, types and helper functions shared by the Chain-NN RTL.
//
// Numbers that come from the paper: 16-bit fixed-point operands, 576 PEs in
// the chain, 256 kernel weights of kMemory per PE, a 32KB iMemory and a 25KB
// oMemory. Everything else here (accumulator width, bank counts, field
// widths, the supported kernel-size range) is a choice of this design.
package chain_nn_pkg;

  // ---- sizes from the paper ------------------------------------------------
  localparam int unsigned DATA_W     = 16;   // fixed-point ifmap / weight width
  localparam int unsigned N_PE_DEF   = 576;  // PEs in the 1D chain
  localparam int unsigned KMEM_DEPTH = 256;  // kernel weights held per PE

  // ---- sizes chosen by this design -----------------------------------------
  localparam int unsigned ACC_W      = 32;   // partial-sum / oMemory word width
  localparam int unsigned KA_W       = $clog2(KMEM_DEPTH); // kMemory address
  localparam int unsigned K_W        = 4;    // kernel size field (K <= 15)
  localparam int unsigned K_MIN      = 2;    // smallest supported kernel size
  localparam int unsigned K_MAX      = 11;   // largest supported kernel size
  localparam int unsigned W_W        = 8;    // ifmap pattern width field
  localparam int unsigned CNT_W      = 9;    // channel / group count fields

  // iMemory: two banks (odd and even ifmap columns) of 8192 x 16 bit = 32KB
  localparam int unsigned IMEM_DEPTH = 8192;
  // oMemory: 64 banks of 100 x 32 bit = 25.6KB
  localparam int unsigned OMEM_BANKS = 64;
  localparam int unsigned OMEM_DEPTH = 100;
  // primitive output lanes collected from the chain (= oMemory banks)
  localparam int unsigned MAX_PRIM   = OMEM_BANKS;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [KA_W-1:0]          kaddr_t;

  // Control that travels along the chain with each convolution window.
  // wv    : the window ending at this timestamp is a real output
  // podd  : the first (leftmost) ifmap column of the window is odd
  // kaddr : kMemory address of the weights for this window
  typedef struct packed {
    logic   wv;
    logic   podd;
    kaddr_t kaddr;
  } win_ctrl_t;

  // Operations the controller accepts with start
  typedef enum logic [0:0] {
    OP_KLOAD = 1'b0,   // shift kernels into the kMemories
    OP_RUN   = 1'b1    // stream the ifmap patterns held in iMemory
  } op_e;

  // Number of primitives used for kernel size k in a chain of n_pe PEs,
  // limited by the number of output lanes.
  function automatic int unsigned prim_count(int unsigned k, int unsigned n_pe,
                                             int unsigned max_prim);
    int unsigned p;
    p = n_pe / (k * k);
    return (p > max_prim) ? max_prim : p;
  endfunction

endpackage
