// tb_input_neuron_block: random spike vectors on some ticks; checks spike
// latch, saturating ages (31 after restart) and any_spike for random inputs.
module tb_input_neuron_block;
  int checks = 0, failures = 0;
  logic clk = 0, restart = 0, tick = 0, spk_sel, any_spike;
  logic [783:0] spikes_in = '0;
  logic [9:0] sel = 0;
  logic [4:0] age_sel;
  int age [784];
  bit spk [784];
  input_neuron_block dut (.*);
  always #5 clk = ~clk;
  initial begin
    restart <= 1; @(posedge clk); restart <= 0;
    for (int i = 0; i < 784; i++) begin age[i] = 31; spk[i] = 0; end
    for (int t = 0; t < 100; t++) begin
      bit any;
      tick <= (t % 4 != 3);
      any = 0;
      for (int i = 0; i < 784; i++) spikes_in[i] = (t % 10 != 5) && ($urandom_range(0, 99) < 3);
      if (t % 4 != 3)
        for (int i = 0; i < 784; i++) begin
          spk[i] = spikes_in[i];
          age[i] = spikes_in[i] ? 0 : (age[i] < 31 ? age[i] + 1 : 31);
        end
      for (int i = 0; i < 784; i++) any |= spk[i];
      @(posedge clk);
      tick <= 0;
      for (int k = 0; k < 8; k++) begin
        int s;
        s = (k == 0) ? 0 : $urandom_range(0, 783);
        sel = 10'(s);
        #1;
        checks++;
        if (spk_sel != spk[s] || int'(age_sel) != age[s] || any_spike != any) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d i=%0d spk=%b age=%0d any=%b expected %b %0d %b", t, s, spk_sel, age_sel, any_spike, spk[s], age[s], any);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
