// ctrl: the finite state machine that sequences Chain-NN.
//
// The accelerator works in the order the paper gives: the state machine is
// first set to the layer's parameters, then kernels are loaded into the
// PEs, then ifmaps are streamed and results produced. Each start latches a
// configuration (kernel size K, pattern width W, ifmap channels C per tile,
// output-channel groups G per tile, for runs also the first kMemory address
// kbase and the accumulate flag acc) and an operation:
//
//   OP_KLOAD  accepts C*G*N_PE kernel words on a valid/ready stream (the
//             words themselves go straight from the port to the chain). Every
//             N_PE words fill the chain's kernel shift registers, after which
//             kcommit writes them to kMemory address 0, 1, ... C*G-1. A word
//             missing on the stream (k_valid low) stalls the shift.
//   OP_RUN    starts the scan generator (G*C patterns) and the oMemory write
//             sequencer together, waits for the generator to finish and then
//             K^2+6 more cycles for the last results to reach oMemory.
//
// done pulses for one cycle when an operation ends. A configuration that the
// hardware cannot hold (K outside 2..11, C or G zero, C*G above the kMemory
// depth, counted from kbase for OP_RUN; for OP_RUN also W < K or a tile larger than iMemory or oMemory)
// is refused: cfg_err
// is set and done pulses at once. n_prim and ke are derived outputs:
// n_prim = min(floor(N_PE/K^2), MAX_PRIM) primitives and ke = K*(W-K+1)
// outputs per primitive and pattern.
//
// Follows the paper: a state machine initialised with the CNN parameters,
// loading kernels once, then streaming ifmaps (Sec. III.B). This design's
// choices: the states, the command interface and the validity checks.
module ctrl
  import chain_nn_pkg::*;
#(
  parameter int unsigned N_PE   = N_PE_DEF,
  parameter int unsigned NPRIM  = MAX_PRIM,
  parameter int unsigned KDEP   = KMEM_DEPTH,
  parameter int unsigned IDEPTH = IMEM_DEPTH,
  parameter int unsigned OWORDS = OMEM_BANKS * OMEM_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // command
  input  logic                       start,
  input  op_e                        op,
  input  logic [K_W-1:0]             k_in,
  input  logic [W_W-1:0]             w_in,
  input  logic [CNT_W-1:0]           c_in,
  input  logic [CNT_W-1:0]           g_in,
  input  kaddr_t                     kbase_in,
  input  logic                       acc_in,
  output logic                       busy,
  output logic                       done,
  output logic                       cfg_err,
  // latched configuration
  output logic [K_W-1:0]             cfg_k,
  output logic [W_W-1:0]             cfg_w,
  output logic [CNT_W-1:0]           cfg_c,
  output logic [CNT_W-1:0]           cfg_g,
  output kaddr_t                     cfg_kbase,
  output logic                       cfg_acc,
  output logic [$clog2(NPRIM+1)-1:0] n_prim,
  output logic [15:0]                ke,
  // kernel stream handshake and chain kernel loading
  input  logic                       k_valid,
  output logic                       k_ready,
  output logic                       kshift,
  output logic                       kcommit,
  output logic [$clog2(KDEP)-1:0]    kcommit_addr,
  // scan generator and oMemory
  output logic                       run_start,
  input  logic                       scan_done
);
  typedef enum logic [1:0] {S_IDLE, S_KLOAD, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [$clog2(N_PE)-1:0] sh_cnt;
  logic [CNT_W*2-1:0]      ka_cnt, ka_total;
  logic [7:0]              drain;

  // primitives and sizes for a candidate configuration
  function automatic int unsigned nprim_of(logic [K_W-1:0] k);
    int unsigned r;
    r = 0;
    for (int unsigned kk = K_MIN; kk <= K_MAX; kk++)
      if (k == K_W'(kk)) r = prim_count(kk, N_PE, NPRIM);
    return r;
  endfunction

  logic        bad;
  int unsigned imem_need, omem_need, np_in;
  always_comb begin
    np_in     = nprim_of(k_in);
    imem_need = 32'(c_in) * (2 * 32'(k_in) - 1) * ((32'(w_in) + 1) / 2);
    omem_need = 32'(g_in) * 32'(k_in) * (32'(w_in) - 32'(k_in) + 1) * np_in;
    bad = (32'(k_in) < K_MIN) || (32'(k_in) > K_MAX) ||
          (c_in == '0) || (g_in == '0) ||
          (32'(kbase_in) + 32'(c_in) * 32'(g_in) > KDEP) ||
          (np_in == 0) ||
          (op == OP_RUN && (w_in < W_W'(k_in) || imem_need > IDEPTH ||
                            omem_need > OWORDS));
  end

  assign busy     = (state != S_IDLE);
  assign k_ready  = (state == S_KLOAD) && (ka_cnt < ka_total);
  assign kshift   = k_ready && k_valid;
  assign ka_total = cfg_c * cfg_g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; cfg_err <= 1'b0;
      cfg_k <= '0; cfg_w <= '0; cfg_c <= '0; cfg_g <= '0; n_prim <= '0; ke <= '0;
      cfg_kbase <= '0; cfg_acc <= 1'b0;
      sh_cnt <= '0; ka_cnt <= '0; drain <= '0;
      kcommit <= 1'b0; kcommit_addr <= '0; run_start <= 1'b0;
    end else begin
      done      <= 1'b0;
      kcommit   <= 1'b0;
      run_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          if (bad) begin
            cfg_err <= 1'b1;
            done    <= 1'b1;
          end else begin
            cfg_err <= 1'b0;
            cfg_k <= k_in; cfg_w <= w_in; cfg_c <= c_in; cfg_g <= g_in;
            cfg_kbase <= (op == OP_RUN) ? kbase_in : '0;
            cfg_acc   <= acc_in;
            n_prim <= $bits(n_prim)'(np_in);
            ke     <= 16'(k_in) * (16'(w_in) - 16'(k_in) + 16'd1);
            sh_cnt <= '0; ka_cnt <= '0;
            if (op == OP_KLOAD) state <= S_KLOAD;
            else begin
              state     <= S_RUN;
              run_start <= 1'b1;
            end
          end
        end
        S_KLOAD: begin
          if (kshift) begin
            if (sh_cnt == $bits(sh_cnt)'(N_PE - 1)) begin
              sh_cnt       <= '0;
              kcommit      <= 1'b1;
              kcommit_addr <= $bits(kcommit_addr)'(ka_cnt);
              ka_cnt       <= ka_cnt + 1'b1;
            end else begin
              sh_cnt <= sh_cnt + 1'b1;
            end
          end
          if (kcommit && ka_cnt == ka_total) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_RUN: if (scan_done) begin
          state <= S_DRAIN;
          drain <= 8'(32'(cfg_k) * 32'(cfg_k) + 6);
        end
        S_DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 8'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a kernel word is only taken while it is wanted
  a_kshift: assert property (@(posedge clk) disable iff (!rst_n)
                             kshift |-> (state == S_KLOAD));

endmodule
