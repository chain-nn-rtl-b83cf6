// tb_scan_gen: checks the column-wise scan generator cycle by cycle.
//
// For each timestamp t of each pattern the expected channel activity is
// derived from the pattern rule: the odd (even) channel is busy at t when
// some odd (even) column c <= W has a row r in 1..2K-1 with t = K*(c-1)+r.
// Each bank's read address must count up over the busy slots and restart
// with every output-channel group. One cycle later the window control must
// show wv = (t >= K^2), podd = window start column (t-K^2)/K+1 is odd, and
// kaddr = kbase + pattern number. The run must last exactly G*C*(K*W+K-1) cycles.
module tb_scan_gen;
  import chain_nn_pkg::*;
  localparam int D = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, odd_re, even_re, busy, done;
  logic [K_W-1:0] cfg_k;
  logic [W_W-1:0] cfg_w;
  logic [CNT_W-1:0] n_c, n_g;
  logic [7:0] odd_addr, even_addr;
  win_ctrl_t ctrl_out;
  kaddr_t kbase;

  scan_gen #(.IDEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic test(input int k, input int w, input int c, input int g);
    int tp = k*w + k - 1, ao = 0, ae = 0, cycles = 0;
    bit  exp_wv = 0, exp_podd = 0;
    int  exp_ka = 0;
    @(negedge clk);
    cfg_k = K_W'(k); cfg_w = W_W'(w); n_c = CNT_W'(c); n_g = CNT_W'(g);
    kbase = kaddr_t'($urandom_range(0, 200));
    start = 1;
    @(negedge clk) start = 0;
    for (int gi = 0; gi < g; gi++) begin
      ao = 0; ae = 0;
      for (int ci = 0; ci < c; ci++)
        for (int t = 1; t <= tp; t++) begin
          bit eo = 0, ee = 0;
          for (int col = 1; col <= w; col++) begin
            int r = t - k*(col-1);
            if (r >= 1 && r <= 2*k-1) begin
              if (col % 2 == 1) eo = 1; else ee = 1;
            end
          end
          // control registered for the previous timestamp
          if (cycles > 0) begin
            chk(ctrl_out.wv == exp_wv, $sformatf("K=%0d t=%0d wv", k, t));
            if (exp_wv) chk(ctrl_out.podd == exp_podd && int'(ctrl_out.kaddr) == exp_ka,
                            $sformatf("K=%0d t=%0d podd/kaddr", k, t));
          end
          chk(busy, "busy");
          chk(odd_re == eo && even_re == ee, $sformatf("K=%0d W=%0d t=%0d re %b%b expected %b%b",
                                                     k, w, t, odd_re, even_re, eo, ee));
          if (eo) chk(int'(odd_addr) == ao,  $sformatf("odd address %0d expected %0d", odd_addr, ao));
          if (ee) chk(int'(even_addr) == ae, $sformatf("even address %0d expected %0d", even_addr, ae));
          ao += eo; ae += ee;
          exp_wv   = (t >= k*k);
          exp_podd = (((t - k*k) / k) % 2 == 0);
          exp_ka   = int'(kbase) + gi * c + ci;
          cycles++;
          @(negedge clk);
        end
      chk(ao == c * (2*k-1) * ((w+1)/2) && ae == c * (2*k-1) * (w/2), "pixels read per group");
    end
    chk(ctrl_out.wv == exp_wv && int'(ctrl_out.kaddr) == exp_ka, "last window control");
    chk(!busy, "busy after the last pattern");
    chk(cycles == g * c * tp, "run length");
    repeat (3) @(negedge clk);
  endtask

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  initial begin
    start = 0; kbase = 0; cfg_k = 3; cfg_w = 5; n_c = 1; n_g = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    test(3, 5, 2, 2);
    test(2, 6, 1, 2);
    test(5, 8, 2, 1);
    test(11, 11, 1, 1);
    chk(n_done == 4, "one done pulse per run");
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
