// tb_spike_freq_gen: checks period = RP_MIN*R_MAX/RF (saturated to 1..65535)
// and period 0 for RF <= 0, over every RF value from -256 to 255.
module tb_spike_freq_gen;
  int checks = 0, failures = 0;
  logic signed [8:0] rf;
  logic [15:0] period;
  spike_freq_gen dut (.rf, .period);
  initial begin
    for (int v = -256; v <= 255; v++) begin
      int exp_p;
      rf = 9'(v);
      #1;
      exp_p = (v <= 0) ? 0 : (1275 / v);
      checks++;
      if (int'(period) != exp_p) begin
        failures++;
        $display("FAIL rf=%0d period=%0d expected %0d", v, period, exp_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
