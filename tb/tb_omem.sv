// tb_omem: checks oMemory accumulation and its banked layout (8 banks of
// 16 words, 8 lanes).
//
// Results for n_prim lanes are delivered with random gaps for G groups of
// C channels of KE positions; lanes beyond n_prim carry junk that must be
// ignored. The expected word at L = (g*KE + pos)*n_prim + p is the sum over
// the C channels of what lane p delivered at that group and position (the
// first channel overwrites old contents unless acc is set, in which case it
// adds to the previous run's results). All words are read back through
// the read port. A tile that does not fit must raise overflow.
module tb_omem;
  import chain_nn_pkg::*;
  localparam int B = 8, D = 16, NP = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, lane_valid, overflow, acc;
  logic [3:0] n_prim;
  logic [15:0] ke;
  logic [CNT_W-1:0] n_c;
  acc_t lane_psum [NP];
  logic [6:0] rd_addr;
  acc_t rd_data;

  omem #(.BANKS(B), .DEPTH(D), .NPRIM(NP)) dut (.*);

  int checks = 0, failures = 0;
  int ref_m [B*D];
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic test(input int np, input int kep, input int c, input int g, input bit expect_ovf,
                     input bit add = 0);
    @(negedge clk);
    n_prim = 4'(np); ke = 16'(kep); n_c = CNT_W'(c); acc = add;
    start = 1;
    @(negedge clk) start = 0;
    if (!add) for (int i = 0; i < B*D; i++) ref_m[i] = 0;
    for (int gi = 0; gi < g; gi++)
      for (int ci = 0; ci < c; ci++)
        for (int pos = 0; pos < kep; pos++) begin
          while ($urandom_range(0, 3) == 0) begin
            lane_valid = 0;
            @(negedge clk);
          end
          lane_valid = 1;
          for (int p = 0; p < NP; p++) begin
            lane_psum[p] = acc_t'($urandom_range(0, 2000)) - 1000;
            if (p < np) begin
              int L = (gi*kep + pos)*np + p;
              if (L < B*D) ref_m[L] += lane_psum[p];
            end
          end
          @(negedge clk);
        end
    lane_valid = 0;
    @(negedge clk);
    chk(overflow == expect_ovf, "overflow flag");
    if (!expect_ovf)
      for (int L = 0; L < g*kep*np; L++) begin
        rd_addr = 7'(L);
        @(negedge clk);
        chk(rd_data == ref_m[L], $sformatf("np=%0d L=%0d got %0d expected %0d", np, L, rd_data, ref_m[L]));
      end
  endtask

  initial begin
    start = 0; acc = 0; lane_valid = 0; n_prim = 1; ke = 1; n_c = 1; rd_addr = 0;
    foreach (lane_psum[p]) lane_psum[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    test(3, 4, 2, 3, 0);
    test(8, 5, 3, 2, 0);
    test(5, 6, 1, 4, 0);
    test(8, 10, 1, 2, 1);
    test(7, 6, 2, 3, 0);
    test(7, 6, 1, 3, 0, 1);       // a second run adds onto the first
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
