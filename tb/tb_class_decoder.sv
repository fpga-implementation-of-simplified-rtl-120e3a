// tb_class_decoder: writes a label per neuron, then reads every neuron's label
// back through the decoder.
module tb_class_decoder;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, lbl_we = 0;
  logic [3:0] lbl_idx = 0, lbl_data = 0, idx = 0, cls;
  logic [3:0] ref_lbl [16];
  class_decoder dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    idx = 4'd7; #1 chk(cls == 0, "label after reset");
    for (int j = 0; j < 16; j++) begin
      ref_lbl[j] = 4'($urandom_range(0, 9));
      lbl_we <= 1; lbl_idx <= 4'(j); lbl_data <= ref_lbl[j];
      @(posedge clk);
    end
    lbl_we <= 0;
    @(posedge clk);
    for (int j = 0; j < 16; j++) begin
      idx = 4'(j);
      #1 chk(cls == ref_lbl[j], $sformatf("neuron %0d", j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
