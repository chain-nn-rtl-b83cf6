// tb_kmem: writes random weights to every kMemory word, reads them back in
// random order and checks the one-cycle read latency and the contents.
module tb_kmem;
  localparam int D = 256, W = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we; logic [7:0] waddr, raddr; logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  kmem #(.DEPTH(D), .W(W)) dut (.*);

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 600; n++) begin
      automatic int a = $urandom_range(0, D-1);
      @(negedge clk) raddr = 8'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h expected %h", a, rdata, model[a]);
      end
    end
    // write and read in the same cycle: read returns the old word
    @(negedge clk) begin we = 1; waddr = 8'd7; raddr = 8'd7; wdata = ~model[7]; end
    @(negedge clk) we = 0;
    checks++; if (rdata !== model[7]) failures++;
    @(negedge clk);
    checks++; if (rdata !== ~model[7]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
