// tb_imem: fills both iMemory banks with random pixels and checks that the
// odd and even read ports return them one cycle after the request, both in
// the same cycle, and return 0 for a cycle without a request.
module tb_imem;
  import chain_nn_pkg::*;
  localparam int D = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic we, wbank, odd_re, even_re;
  logic [5:0] waddr, odd_addr, even_addr;
  data_t wdata, odd_rdata, even_rdata;
  data_t m_odd [D], m_even [D];
  int checks = 0, failures = 0;

  imem #(.IDEPTH(D)) dut (.*);

  task automatic chk(input data_t got, input data_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    we = 0; wbank = 0; waddr = 0; wdata = 0; odd_re = 0; even_re = 0; odd_addr = 0; even_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        we = 1; wbank = b[0]; waddr = 6'(i); wdata = data_t'($urandom);
        if (b == 0) m_odd[i] = wdata; else m_even[i] = wdata;
      end
    @(negedge clk) we = 0;
    for (int n = 0; n < 300; n++) begin
      automatic int ao = $urandom_range(0, D-1), ae = $urandom_range(0, D-1);
      automatic bit ro = $urandom_range(0, 1) == 1, re = $urandom_range(0, 1) == 1;
      @(negedge clk);
      odd_re = ro; even_re = re; odd_addr = 6'(ao); even_addr = 6'(ae);
      @(negedge clk);
      odd_re = 0; even_re = 0;
      chk(odd_rdata,  ro ? m_odd[ao]  : data_t'(0), "odd");
      chk(even_rdata, re ? m_even[ae] : data_t'(0), "even");
    end
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
