// tb_weights_memory: fills the 784-word FIFO, runs three rotation passes in
// the pass pattern (pop in cycle n, push back one cycle later, modified on
// the second pass) and checks order, data, count and flags.
module tb_weights_memory;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [23:0] wdata = 0, rdata;
  logic [9:0] count;
  logic [23:0] ref_w [784];
  weights_memory dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1; @(posedge clk); #1;
    chk(empty && !full && count == 0, "empty after reset");
    for (int i = 0; i < 784; i++) begin
      ref_w[i] = 24'($urandom);
      push <= 1; wdata <= ref_w[i]; @(posedge clk);
    end
    push <= 0; @(posedge clk); #1;
    chk(full && count == 784, "full after fill");
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i <= 784; i++) begin
        pop  <= (i < 784);
        push <= (i > 0);
        if (i > 0) wdata <= (pass == 1) ? rdata + 24'd1 : rdata;
        if (i > 0) chk(rdata == ref_w[i-1], $sformatf("pass %0d word %0d = %h expected %h", pass, i-1, rdata, ref_w[i-1]));
        @(posedge clk); #1;
      end
      pop <= 0; push <= 0; @(posedge clk); #1;
      if (pass == 1) for (int i = 0; i < 784; i++) ref_w[i] = ref_w[i] + 24'd1;
      chk(full && count == 784, "full after pass");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
