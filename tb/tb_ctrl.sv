// tb_ctrl: checks the Chain-NN control state machine (20 PEs, 16-word kMemory).
//
// Kernel loading: C*G*N_PE words are offered with random gaps; every
// accepted word must raise kshift, each N_PE-th shift must be
// followed by kcommit with addresses 0, 1, ..., and done must follow the
// last commit. Run: run_start must pulse right after start, and done must
// come K^2+6 edges after scan_done. Derived outputs n_prim = floor(20/K^2)
// and ke = K*(W-K+1) are checked, and configurations the hardware cannot
// hold must be refused with cfg_err.
module tb_ctrl;
  import chain_nn_pkg::*;
  localparam int NPE = 20, KD = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, cfg_err, k_valid, k_ready, kshift, kcommit, run_start, scan_done;
  op_e op;
  logic [K_W-1:0] k_in, cfg_k;
  logic [W_W-1:0] w_in, cfg_w;
  logic [CNT_W-1:0] c_in, g_in, cfg_c, cfg_g;
  kaddr_t kbase_in, cfg_kbase;
  logic acc_in, cfg_acc;
  logic [4:0] n_prim;
  logic [15:0] ke;
  logic [3:0] kcommit_addr;

  ctrl #(.N_PE(NPE), .NPRIM(16), .KDEP(KD), .IDEPTH(64), .OWORDS(128)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic cmd(input op_e o, input int k, input int w, input int c, input int g,
                    input int kb = 0, input bit ac = 0);
    @(negedge clk);
    op = o; k_in = K_W'(k); w_in = W_W'(w); c_in = CNT_W'(c); g_in = CNT_W'(g);
    kbase_in = kaddr_t'(kb); acc_in = ac;
    start = 1;
    @(negedge clk) start = 0;
  endtask

  task automatic kload(input int k, input int c, input int g);
    int total = c*g*NPE, sent = 0, shifts = 0, commits = 0, t = 0;
    cmd(OP_KLOAD, k, 1, c, g);
    chk(busy && !cfg_err, "kernel load accepted");
    while (!done && t < 4000) begin
      k_valid = (sent < total) && ($urandom_range(0, 3) != 0);
      #1;
      chk(kshift == (k_valid && k_ready), "kshift follows the handshake");
      if (kshift) sent++;
      if (kcommit) begin
        chk(int'(kcommit_addr) == commits, $sformatf("commit address %0d expected %0d", kcommit_addr, commits));
        chk(shifts == (commits + 1) * NPE, "commit after every N_PE shifts");
        commits++;
      end
      if (kshift) shifts++;
      @(negedge clk);
      t++;
    end
    k_valid = 0;
    chk(done && sent == total && commits == c*g, $sformatf("load: sent %0d commits %0d", sent, commits));
    chk(int'(n_prim) == NPE / (k*k), "n_prim");
  endtask

  task automatic run(input int k, input int w, input int c, input int g, input int scan_len,
                     input int kb = 0, input bit ac = 0);
    int t = 0;
    cmd(OP_RUN, k, w, c, g, kb, ac);
    chk(int'(cfg_kbase) == kb && cfg_acc == ac, "kbase / acc latched");
    chk(!cfg_err && busy, "run accepted");
    chk(run_start == 1'b1, "run_start pulses after start");
    chk(int'(n_prim) == NPE / (k*k) && int'(ke) == k*(w-k+1), "n_prim / ke");
    repeat (scan_len) begin @(negedge clk); chk(busy && !done, "busy while scanning"); end
    scan_done = 1;
    @(negedge clk) scan_done = 0;
    while (!done && t < 500) begin @(negedge clk); t++; end
    chk(t == k*k + 6, $sformatf("drain %0d expected %0d", t, k*k + 6));
    @(negedge clk);
    chk(!busy, "idle after run");
  endtask

  task automatic refuse(input op_e o, input int k, input int w, input int c, input int g);
    cmd(o, k, w, c, g);
    chk(cfg_err && !busy, $sformatf("K=%0d W=%0d C=%0d G=%0d not refused", k, w, c, g));
  endtask

  int n_run_start = 0;
  always @(negedge clk) if (run_start) n_run_start++;

  initial begin
    start = 0; kbase_in = 0; acc_in = 0; op = OP_KLOAD; k_in = 3; w_in = 5; c_in = 1; g_in = 1;
    k_valid = 0; scan_done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    kload(2, 2, 3);
    kload(3, 4, 4);
    run(3, 5, 1, 2, 40);
    run(2, 6, 2, 1, 25, 9, 1);
    chk(n_run_start == 2, "run_start count");
    refuse(OP_KLOAD, 5, 5, 1, 1);   // no primitive fits in 20 PEs
    refuse(OP_KLOAD, 3, 5, 4, 5);   // C*G above kMemory depth
    refuse(OP_RUN,   3, 2, 1, 1);   // W < K
    refuse(OP_RUN,   3, 9, 4, 1);   // tile above iMemory
    refuse(OP_RUN,   2, 12, 1, 3);  // tile above oMemory
    refuse(OP_KLOAD, 1, 5, 1, 1);   // K below range
    cmd(OP_RUN, 3, 5, 2, 3, 11);    // kbase + C*G above kMemory depth
    chk(cfg_err, "kbase overflow not refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
