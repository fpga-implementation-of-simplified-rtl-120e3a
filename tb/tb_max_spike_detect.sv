// tb_max_spike_detect: random spike counts (often tied); the index must be the
// first neuron holding the maximum.
module tb_max_spike_detect;
  int checks = 0, failures = 0;
  logic [7:0] counts [16];
  logic [3:0] idx;
  logic [7:0] max_cnt;
  max_spike_detect dut (.counts, .idx, .max_cnt);
  initial begin
    for (int n = 0; n < 2000; n++) begin
      int m, mi;
      for (int j = 0; j < 16; j++) counts[j] = 8'($urandom_range(0, (n % 2) ? 7 : 255));
      m = -1; mi = 0;
      for (int j = 0; j < 16; j++) if (int'(counts[j]) > m) begin m = counts[j]; mi = j; end
      #1;
      checks++;
      if (int'(idx) != mi || int'(max_cnt) != m) begin
        failures++;
        if (failures < 10) $display("FAIL idx=%0d max=%0d expected %0d %0d", idx, max_cnt, mi, m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
