// tb_alexnet_tiles: runs one full row tile of two AlexNet layers on the
// accelerator at its default size (576 PEs, 256-word kMemory, 32KB iMemory,
// 25KB oMemory), with the layers' real channel counts and widths.
//
//   conv2: K = 5, 48 ifmap channels per group, 27x27 ofmap padded to a
//          31-pixel-wide input; two output-channel groups of 23 primitives
//          (46 output channels) in one run.
//   conv3: K = 3, 256 ifmap channels, 13x13 ofmap padded to 15 pixels; the
//          256 channels do not fit iMemory together, so the tile runs as two
//          parts of 128 channels (kMemory base 0 and 128, the second part
//          accumulating onto the first) with one kernel load for both.
//
// The layer sizes are those of the usual AlexNet definition; pixels and
// weights are random. For each tile the test loads all kernels once (one
// word per cycle), writes iMemory in the column-wise scan layout, runs, and
// compares every oMemory word with a direct evaluation of the convolution
// (stride 1, no bias). It also checks the run time G*C*(K*W+K-1) + K^2 + 8
// cycles and that no configuration error or overflow was flagged.
module tb_alexnet_tiles;
  import chain_nn_pkg::*;

  localparam int unsigned NPE = N_PE_DEF;
  localparam int MAXC = 256, MAXR = 9, MAXW = 31, MAXM = 64, MAXK = 5;

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
  int ifm [MAXC][MAXR][MAXW];
  int wgt [MAXM][MAXC][MAXK][MAXK];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic do_start(input bit o, input int k, input int w, input int c, input int g,
                         input int kb, input bit ac);
    @(negedge clk);
    op = o; cfg_k = K_W'(k); cfg_w = W_W'(w); cfg_c = CNT_W'(c); cfg_g = CNT_W'(g);
    cfg_kbase = KA_W'(kb); cfg_acc = ac;
    start = 1'b1;
    @(negedge clk) start = 1'b0;
  endtask

  task automatic new_tile(input int k, input int w, input int c, input int m_all);
    for (int ci = 0; ci < c; ci++)
      for (int r = 0; r < 2*k-1; r++)
        for (int col = 0; col < w; col++)
          ifm[ci][r][col] = $signed($urandom_range(0, 254)) - 127;
    for (int m = 0; m < m_all; m++)
      for (int ci = 0; ci < c; ci++)
        for (int i = 0; i < k; i++)
          for (int j = 0; j < k; j++)
            wgt[m][ci][i][j] = $signed($urandom_range(0, 254)) - 127;
  endtask

  // kernel words for kMemory address a = g*C + c, PE 575-s for word s
  task automatic load_kernels(input int k, input int c, input int g, input int p);
    int total = c * g * NPE;
    do_start(1'b0, k, 1, c, g, 0, 1'b0);
    for (int words = 0; words < total; ) begin
      int a = words / NPE, pe_i = NPE - 1 - words % NPE;
      int prim = pe_i / (k*k), posw = k*k - 1 - pe_i % (k*k);
      k_data  = (prim < p) ? 16'(wgt[(a / c) * p + prim][a % c][posw % k][posw / k]) : 16'(0);
      k_valid = 1'b1;
      #1;
      if (k_ready) words++;
      @(negedge clk);
    end
    k_valid = 1'b0;
    while (!done) @(negedge clk);
    check(!cfg_err, "kernel load refused");
  endtask

  task automatic fill_ifmap(input int k, input int w, input int c0, input int cn);
    int a_o = 0, a_e = 0;
    for (int ci = c0; ci < c0 + cn; ci++)
      for (int col = 0; col < w; col++)
        for (int r = 0; r < 2*k-1; r++) begin
          @(negedge clk);
          im_we    = 1'b1;
          im_bank  = col[0];
          im_addr  = col[0] ? 13'(a_e) : 13'(a_o);
          im_wdata = 16'(ifm[ci][r][col]);
          if (col[0]) a_e++; else a_o++;
        end
    @(negedge clk) im_we = 1'b0;
  endtask

  task automatic run_part(input int k, input int w, input int c0, input int cn, input int g);
    int cyc = 1, exp_cyc = g * cn * (k * w + k - 1) + k * k + 8 + 1;
    do_start(1'b1, k, w, cn, g, c0, c0 > 0);
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == exp_cyc, $sformatf("K=%0d run took %0d cycles, expected %0d", k, cyc, exp_cyc));
    check(!cfg_err && !om_overflow, "run refused or overflowed");
  endtask

  task automatic read_and_check(input int k, input int w, input int c, input int g,
                                input int p, input string name);
    int e = w - k + 1, ke = k * (w - k + 1), bad0 = failures;
    check(int'(n_prim) == p, $sformatf("%s n_prim %0d expected %0d", name, n_prim, p));
    for (int gi = 0; gi < g; gi++)
      for (int pi = 0; pi < p; pi++)
        for (int ei = 0; ei < e; ei++)
          for (int s = 0; s < k; s++) begin
            int m = gi * p + pi, L = (gi * ke + k * ei + s) * p + pi, ref_v = 0;
            for (int ci = 0; ci < c; ci++)
              for (int i = 0; i < k; i++)
                for (int j = 0; j < k; j++)
                  ref_v += ifm[ci][s+i][ei+j] * wgt[m][ci][i][j];
            @(negedge clk) om_addr = 13'(L);
            @(negedge clk);
            check($signed(om_rdata) == ref_v,
                  $sformatf("%s m=%0d row=%0d col=%0d got %0d expected %0d",
                            name, m, s, ei, $signed(om_rdata), ref_v));
          end
    $display("%s: %0d output channels x %0d rows x %0d columns, %0d mismatches",
             name, g * p, k, e, failures - bad0);
  endtask

  initial begin
    start = 0; op = 0; cfg_kbase = 0; cfg_acc = 0; cfg_k = 3; cfg_w = 5; cfg_c = 1; cfg_g = 1;
    k_valid = 0; k_data = 0; im_we = 0; im_bank = 0; im_addr = 0; im_wdata = 0; om_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // conv2 row tile: K=5, C=48, W=31, G=2 (23 primitives each)
    new_tile(5, 31, 48, 46);
    load_kernels(5, 48, 2, 23);
    fill_ifmap(5, 31, 0, 48);
    run_part(5, 31, 0, 48, 2);
    read_and_check(5, 31, 48, 2, 23, "conv2");

    // conv3 row tile: K=3, C=256 in two parts of 128, W=15, G=1 (64 primitives)
    new_tile(3, 15, 256, 64);
    load_kernels(3, 256, 1, 64);
    fill_ifmap(3, 15, 0, 128);
    run_part(3, 15, 0, 128, 1);
    fill_ifmap(3, 15, 128, 128);
    run_part(3, 15, 128, 128, 1);
    read_and_check(3, 15, 256, 1, 64, "conv3");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
