// tb_pe: checks one dual-channel PE against a cycle model.
//
// Kernel weights are shifted in and committed to kMemory, then random
// pixels, window control and incoming partial sums are driven every cycle,
// with the PE configured as first / not first of a primitive and with both
// column parities. Expected, for inputs applied in cycle n:
//   odd_out/even_out(n+2) = channel inputs(n)          (two registers)
//   ctrl_out(n+1)         = control input(n)
//   psum_out(n+3)         = psum_in(n+2) + x(n) * kMemory[kaddr(n)]
// where x(n) is the odd-channel pixel when the window column holding this
// PE's weight is odd (podd XOR flip), the even one otherwise, and psum_in is
// 0 for the first PE of a primitive. out_valid(n+3) = last AND wv(n).
module tb_pe;
  import chain_nn_pkg::*;
  localparam int KD = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_first, cfg_last, cfg_flip, out_valid, kshift, kcommit;
  data_t odd_prev, even_prev, odd_prim, even_prim, odd_out, even_out, ksh_in, ksh_out;
  win_ctrl_t ctrl_prev, ctrl_prim, ctrl_out;
  acc_t psum_prev, psum_out;
  logic [3:0] kcommit_addr;

  pe #(.KDEP(KD)) dut (.*);

  data_t kw [KD];
  int checks = 0, failures = 0, n_odd = 0, n_even = 0;
  // history of applied inputs
  data_t     h_x [$], h_odd [$], h_even [$];
  win_ctrl_t h_ctrl [$];
  acc_t      h_psum [$];

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    {cfg_first, cfg_last, cfg_flip, kshift, kcommit} = '0;
    {odd_prev, even_prev, odd_prim, even_prim, ksh_in} = '0;
    ctrl_prev = '0; ctrl_prim = '0; psum_prev = '0; kcommit_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // kernel loading: shift one word, commit it
    for (int a = 0; a < KD; a++) begin
      kw[a] = data_t'($urandom);
      @(negedge clk) begin kshift = 1; ksh_in = kw[a]; end
      @(negedge clk) begin
        kshift = 0; kcommit = 1; kcommit_addr = 4'(a);
        chk(ksh_out == kw[a], "kernel shift register");
      end
    end
    @(negedge clk) kcommit = 0;

    for (int phase = 0; phase < 8; phase++) begin
      cfg_first = phase[0]; cfg_flip = phase[1]; cfg_last = phase[2];
      h_x.delete(); h_odd.delete(); h_even.delete(); h_ctrl.delete(); h_psum.delete();
      for (int n = 0; n < 100; n++) begin
        win_ctrl_t ci;
        data_t oi, ei;
        // drive cycle n
        odd_prev  = data_t'($urandom); even_prev = data_t'($urandom);
        odd_prim  = data_t'($urandom); even_prim = data_t'($urandom);
        ctrl_prev = win_ctrl_t'($urandom); ctrl_prim = win_ctrl_t'($urandom);
        ctrl_prev.kaddr[7:4] = '0; ctrl_prim.kaddr[7:4] = '0;
        psum_prev = acc_t'($urandom);
        oi = cfg_first ? odd_prim  : odd_prev;
        ei = cfg_first ? even_prim : even_prev;
        ci = cfg_first ? ctrl_prim : ctrl_prev;
        h_odd.push_back(oi); h_even.push_back(ei); h_ctrl.push_back(ci);
        h_psum.push_back(cfg_first ? acc_t'(0) : psum_prev);
        if (ci.podd ^ cfg_flip) begin h_x.push_back(oi); n_odd++; end
        else begin h_x.push_back(ei); n_even++; end
        @(negedge clk);
        // outputs now reflect the edge that took cycle n
        if (n >= 1) chk(ctrl_out == h_ctrl[n], "ctrl_out");
        if (n >= 1) chk(odd_out == h_odd[n-1] && even_out == h_even[n-1], "channel registers");
        if (n >= 2) begin
          acc_t e;
          e = h_psum[n] + acc_t'(h_x[n-2] * kw[h_ctrl[n-2].kaddr[3:0]]);
          chk(psum_out == e, $sformatf("phase %0d psum got %0d expected %0d", phase, psum_out, e));
          chk(out_valid == (cfg_last & h_ctrl[n-2].wv), "out_valid");
        end
      end
    end
    chk(n_odd > 0 && n_even > 0, "both channels used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
