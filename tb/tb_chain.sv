// tb_chain: checks the 1D chain (20 PEs, 8 output lanes) for K = 2, 3 and 4.
//
// The testbench loads two kMemory words per PE through the kernel shift
// chain, then streams two ifmap patterns (one per kMemory word) of 2K-1 rows
// and W columns in column-wise scan order, built here from the rule
// "pixel (column c, row r) is sent at timestamp K*(c-1)+r on the channel of
// c's parity". Every valid lane output is compared with a direct KxK
// convolution; output n of a pattern is ofmap column n/K, row n%K. It also
// checks the number of outputs and the latency: the window ending at
// timestamp t leaves the chain K^2+2 cycles after t is presented.
module tb_chain;
  import chain_nn_pkg::*;
  localparam int NPE = 20, NP = 8, KD = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [K_W-1:0] cfg_k;
  data_t odd_in, even_in, kin;
  win_ctrl_t ctrl_in;
  acc_t lane_psum [NP];
  logic lane_valid, kshift, kcommit;
  logic [1:0] kcommit_addr;

  chain #(.N_PE(NPE), .NPRIM(NP), .KDEP(KD)) dut (.*);

  int checks = 0, failures = 0;
  int img [2][7][12];           // [pattern][row][col]
  int wt  [2][NP][4][4];        // [pattern][primitive][row][col]
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic test(input int k, input int w);
    int np = NPE / (k*k), tp = k*w + k - 1, e = w - k + 1;
    int seen [2];
    int t_first;
    if (np > NP) np = NP;
    cfg_k = K_W'(k);
    for (int a = 0; a < 2; a++) begin
      for (int p = 0; p < NP; p++) for (int i = 0; i < k; i++) for (int j = 0; j < k; j++)
        wt[a][p][i][j] = $urandom_range(0, 20) - 10;
      for (int r = 0; r < 2*k-1; r++) for (int c = 0; c < w; c++)
        img[a][r][c] = $urandom_range(0, 200) - 100;
      // shift NPE words: the first ends in the last PE
      for (int s = 0; s < NPE; s++) begin
        int g = NPE - 1 - s, p = g / (k*k), j = g % (k*k), pos = k*k - 1 - j;
        @(negedge clk);
        kcommit = 1'b0;
        kshift = 1'b1;
        kin = (p < np) ? data_t'(wt[a][p][pos % k][pos / k]) : data_t'(0);
      end
      @(negedge clk) begin kshift = 1'b0; kcommit = 1'b1; kcommit_addr = 2'(a); end
      @(negedge clk) kcommit = 1'b0;
    end
    seen = '{0, 0};
    t_first = -1;
    fork
      // stream the two patterns back to back
      begin
      for (int a = 0; a < 2; a++)
        for (int t = 1; t <= tp; t++) begin
          @(negedge clk);
          odd_in = '0; even_in = '0;
          for (int c = 1; c <= w; c++) begin
            int r = t - k*(c-1);
            if (r >= 1 && r <= 2*k-1) begin
              if (c % 2 == 1) odd_in = data_t'(img[a][r-1][c-1]);
              else            even_in = data_t'(img[a][r-1][c-1]);
            end
          end
          ctrl_in.wv    = (t >= k*k);
          ctrl_in.podd  = (((t - k*k) / k) % 2 == 0);   // window start column odd
          ctrl_in.kaddr = kaddr_t'(a);
          if (a == 0 && t == k*k) t_first = cyc;
        end
      @(negedge clk) ctrl_in = '0;
      end
      // collect outputs
      begin
        for (int n = 0; n < 2*tp + k*k + 10; n++) begin
          @(negedge clk);
          if (lane_valid) begin
            int a = (seen[0] < k*e) ? 0 : 1;
            int idx = seen[a], col = idx / k, row = idx % k;
            if (a == 0 && idx == 0) chk(cyc - t_first == k*k + 2,
                $sformatf("K=%0d latency %0d expected %0d", k, cyc - t_first, k*k+2));
            for (int p = 0; p < np; p++) begin
              int ref_v = 0;
              for (int i = 0; i < k; i++) for (int j = 0; j < k; j++)
                ref_v += img[a][row+i][col+j] * wt[a][p][i][j];
              chk(lane_psum[p] == ref_v, $sformatf("K=%0d pattern %0d lane %0d out %0d got %0d expected %0d",
                                                  k, a, p, idx, lane_psum[p], ref_v));
            end
            for (int p = np; p < NP; p++) chk(lane_psum[p] == 0, "unused lane not 0");
            seen[a]++;
          end
        end
      end
    join
    ctrl_in = '0;
    chk(seen[0] == k*e && seen[1] == k*e, $sformatf("K=%0d outputs %0d/%0d expected %0d", k, seen[0], seen[1], k*e));
  endtask

  initial begin
    cfg_k = 3; odd_in = 0; even_in = 0; kin = 0; ctrl_in = '0; kshift = 0; kcommit = 0; kcommit_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    test(3, 7);
    test(2, 6);
    test(4, 9);
    test(3, 8);
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
