// tb_chain_nn: end-to-end test of the Chain-NN accelerator at its default
// size (576 PEs, 256-word kMemory, 32KB iMemory, 25KB oMemory).
//
// For several layer shapes (K = 3, 5, 2, 11, 7 and 9) the test fills iMemory
// with a random ifmap tile in the column-wise scan layout, streams the
// kernels with random gaps in the kernel stream, runs the tile, and reads
// every result back from oMemory. Each result is compared with a direct
// evaluation of Eq. (1) without bias:
//   out[m][s][e] = sum_c sum_i sum_j ifmap[c][s+i][e+j] * W[m][c][i][j]
// It also checks the number of active primitives (Table II of the paper,
// capped at 64 lanes), the run time of G*C*(K*W+K-1) + K^2 + 8 cycles from
// the edge that takes start to the edge that raises done, a second image
// run with kernels kept loaded, a tile whose ifmap channels are split over
// two runs (kMemory base address and accumulate flag), and that an
// impossible configuration is refused. Each of these mechanisms is counted
// and a failure is counted for one that never happened.
module tb_chain_nn;
  import chain_nn_pkg::*;

  localparam int unsigned NPE = N_PE_DEF;
  localparam int MAXC = 4, MAXR = 21, MAXW = 16, MAXM = 128, MAXK = 11;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, op, busy, done, cfg_err, k_valid, k_ready, im_we, im_bank, om_overflow;
  logic [K_W-1:0]   cfg_k;
  logic [W_W-1:0]   cfg_w;
  logic [CNT_W-1:0] cfg_c, cfg_g;
  logic [KA_W-1:0]  cfg_kbase;
  logic             cfg_acc;
  logic [6:0]       n_prim;
  logic [15:0]      k_data, im_wdata;
  logic [12:0]      im_addr, om_addr;
  logic [31:0]      om_rdata;

  chain_nn dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_stall = 0, n_sel_odd = 0, n_sel_even = 0, n_multi_prim = 0, n_accum = 0;
  int n_bank_wrap = 0, n_mode_switch = 0, n_refused = 0, n_kernel_reuse = 0, n_idle_slot = 0,
      n_split = 0;

  int ifm  [MAXC][MAXR][MAXW];
  int wgt  [MAXM][MAXC][MAXK][MAXK];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int expect_prims(int k);
    int p = NPE / (k * k);
    return (p > 64) ? 64 : p;
  endfunction

  task automatic new_ifmap(input int k, input int w, input int c);
    for (int ci = 0; ci < c; ci++)
      for (int r = 0; r < 2*k-1; r++)
        for (int col = 0; col < w; col++)
          ifm[ci][r][col] = $signed($urandom_range(0, 30)) - 15;
  endtask

  // write channels c0 .. c0+cn-1 of the tile into iMemory
  task automatic fill_ifmap(input int k, input int w, input int c0, input int cn);
    int a_o = 0, a_e = 0;
    for (int ci = c0; ci < c0 + cn; ci++)
      for (int col = 0; col < w; col++)
        for (int r = 0; r < 2*k-1; r++) begin
          @(negedge clk);
          im_we    = 1'b1;
          im_bank  = col[0];              // 0-based even index = odd column
          im_addr  = col[0] ? 13'(a_e) : 13'(a_o);
          im_wdata = 16'(ifm[ci][r][col]);
          if (col[0]) a_e++; else a_o++;
        end
    @(negedge clk) im_we = 1'b0;
  endtask

  task automatic do_start(input bit o, input int k, input int w, input int c, input int g,
                         input int kb = 0, input bit ac = 0);
    @(negedge clk);
    op = o; cfg_k = K_W'(k); cfg_w = W_W'(w); cfg_c = CNT_W'(c); cfg_g = CNT_W'(g);
    cfg_kbase = KA_W'(kb); cfg_acc = ac;
    start = 1'b1;
    @(negedge clk) start = 1'b0;
  endtask

  task automatic load_kernels(input int k, input int c, input int g, input int p);
    int words = 0, total = c * g * NPE;
    for (int m = 0; m < g * p; m++)
      for (int ci = 0; ci < c; ci++)
        for (int i = 0; i < k; i++)
          for (int j = 0; j < k; j++)
            wgt[m][ci][i][j] = $signed($urandom_range(0, 30)) - 15;
    do_start(1'b0, k, 1, c, g);
    while (words < total) begin
      int a, sh, pe_i, prim, jj, posw;
      a  = words / NPE;
      sh = words % NPE;
      pe_i = NPE - 1 - sh;            // first word of a batch ends in the last PE
      prim = pe_i / (k*k);
      jj   = pe_i % (k*k);
      posw = k*k - 1 - jj;            // column-scan position within the window
      k_data = 16'(0);
      if (prim < p)
        k_data = 16'(wgt[(a / c) * p + prim][a % c][posw % k][posw / k]);
      k_valid = ($urandom_range(0, 7) != 0);
      #1;
      if (k_valid && k_ready) words++;
      else if (!k_valid) n_stall++;
      @(negedge clk);
    end
    k_valid = 1'b0;
    while (!done) @(negedge clk);
    check(!cfg_err, "kernel load refused");
    @(negedge clk);
  endtask

  // run channels c0 .. c0+c-1 of a tile whose kernels for C_all channels are
  // loaded; the expected results sum all channels up to c0+c-1
  task automatic run_and_check(input int k, input int w, input int c, input int g, input int p,
                               input int c_all = 0, input int c0 = 0);
    int cyc = 0, e = w - k + 1, ke = k * (w - k + 1), exp_cyc;
    if (c_all == 0) c_all = c;
    do_start(1'b1, k, w, c, g, c0, c0 > 0);
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (dut.u_chain.g_pe[0].u_pe.ctrl_in.wv) begin
        if (dut.u_chain.g_pe[0].u_pe.sel_even) n_sel_even++;
        else n_sel_odd++;
      end
      if (dut.odd_re == 1'b0 && dut.u_scan.busy) n_idle_slot++;
      if (dut.lane_valid && (int'(dut.u_omem.off) + p > 64)) n_bank_wrap++;
    end
    // done rises G*C*T_p + K^2 + 8 clock edges after the edge that samples
    // start; cyc counts one more negedge than that
    exp_cyc = g * c * (k * w + k - 1) + k * k + 8 + 1;
    check(cyc == exp_cyc, $sformatf("K=%0d run took %0d cycles, expected %0d", k, cyc, exp_cyc));
    check(!cfg_err && !om_overflow, "run refused or overflowed");
    check(int'(n_prim) == p, $sformatf("K=%0d n_prim %0d expected %0d", k, n_prim, p));
    if (p > 1) n_multi_prim++;
    if (c > 1) n_accum++;
    for (int gi = 0; gi < g; gi++)
      for (int pi = 0; pi < p; pi++)
        for (int ei = 0; ei < e; ei++)
          for (int s = 0; s < k; s++) begin
            int m = gi * p + pi, L = (gi * ke + k * ei + s) * p + pi, ref_v = 0;
            for (int ci = 0; ci < c0 + c; ci++)
              for (int i = 0; i < k; i++)
                for (int j = 0; j < k; j++)
                  ref_v += ifm[ci][s+i][ei+j] * wgt[m][ci][i][j];
            @(negedge clk) om_addr = 13'(L);
            @(negedge clk);
            check($signed(om_rdata) == ref_v,
                  $sformatf("K=%0d m=%0d row=%0d col=%0d got %0d expected %0d",
                            k, m, s, ei, $signed(om_rdata), ref_v));
          end
  endtask

  task automatic layer(input int k, input int w, input int c, input int g, input int images);
    int p = expect_prims(k);
    load_kernels(k, c, g, p);
    for (int n = 0; n < images; n++) begin
      new_ifmap(k, w, c);
      fill_ifmap(k, w, 0, c);
      run_and_check(k, w, c, g, p);
      if (n > 0) n_kernel_reuse++;
    end
    n_mode_switch++;
  endtask

  // a tile of 4 ifmap channels run as two parts of 2 channels (G = 1)
  task automatic split_layer(input int k, input int w);
    int p = expect_prims(k);
    load_kernels(k, 4, 1, p);
    new_ifmap(k, w, 4);
    fill_ifmap(k, w, 0, 2);
    run_and_check(k, w, 2, 1, p, 4, 0);
    fill_ifmap(k, w, 2, 2);
    run_and_check(k, w, 2, 1, p, 4, 2);
    n_split++;
    n_mode_switch++;
  endtask

  initial begin
    start = 0; op = 0; cfg_kbase = 0; cfg_acc = 0; cfg_k = 3; cfg_w = 5; cfg_c = 1; cfg_g = 1;
    k_valid = 0; k_data = 0; im_we = 0; im_bank = 0; im_addr = 0; im_wdata = 0; om_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    layer(3, 6, 2, 2, 2);
    layer(5, 7, 3, 1, 1);
    layer(2, 5, 1, 2, 1);
    layer(11, 12, 1, 1, 1);
    layer(7, 8, 1, 1, 1);
    layer(9, 10, 1, 1, 1);
    split_layer(3, 7);
    // an impossible configuration is refused
    do_start(1'b1, 12, 14, 1, 1);
    while (!done) @(negedge clk);
    check(cfg_err, "K=12 not refused");
    if (cfg_err) n_refused++;
    // every mechanism happened
    check(n_stall > 0,        "no kernel stream stall");
    check(n_sel_odd > 0,      "odd channel never selected");
    check(n_sel_even > 0,     "even channel never selected");
    check(n_multi_prim > 0,   "never more than one primitive");
    check(n_accum > 0,        "no accumulation over channels");
    check(n_bank_wrap > 0,    "no oMemory bank wrap");
    check(n_mode_switch > 1,  "no kernel-size switch");
    check(n_kernel_reuse > 0, "kernels never reused");
    check(n_idle_slot > 0,    "no idle channel slot");
    check(n_refused > 0,      "no refused configuration");
    check(n_split > 0,        "no channel-split tile");
    $display("mechanisms: stall=%0d odd=%0d even=%0d multi_prim=%0d accum=%0d wrap=%0d switch=%0d reuse=%0d idle=%0d refused=%0d split=%0d",
             n_stall, n_sel_odd, n_sel_even, n_multi_prim, n_accum, n_bank_wrap,
             n_mode_switch, n_kernel_reuse, n_idle_slot, n_refused, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
