// tb_threshold_unit: feeds random spike vectors with random densities and
// checks vth = max population count * 4096 / 3; clear and sample gating too.
module tb_threshold_unit;
  int checks = 0, failures = 0;
  logic clk = 0, clear = 0, sample = 0;
  logic [783:0] spikes = '0;
  logic [9:0] max_count;
  logic signed [23:0] vth;
  threshold_unit dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int img = 0; img < 5; img++) begin
      int mx;
      clear <= 1; @(posedge clk); clear <= 0;
      mx = 0;
      for (int t = 0; t < 50; t++) begin
        int p, dens;
        dens = $urandom_range(1, 100);
        p = 0;
        for (int i = 0; i < 784; i++) begin
          spikes[i] = ($urandom_range(0, 99) < dens);
          p += int'(spikes[i]);
        end
        sample <= (t % 5 != 4);
        if (t % 5 != 4 && p > mx) mx = p;
        @(posedge clk);
      end
      sample <= 0;
      @(posedge clk); #1;
      checks += 2;
      if (int'(max_count) != mx) begin failures++; $display("FAIL max %0d vs %0d", max_count, mx); end
      if (int'(vth) != mx * 4096 / 3) begin failures++; $display("FAIL vth %0d vs %0d", vth, mx * 4096 / 3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
