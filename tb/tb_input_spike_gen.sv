// tb_input_spike_gen: random periods for all 784 inputs; over 120 ticks each
// input must fire exactly at t = P-1, 2P-1, ... (t counted from 0 after
// restart) and next_dt must give the distance to its next spike.
module tb_input_spike_gen;
  int checks = 0, failures = 0;
  logic clk = 0, per_we = 0, restart = 0, tick = 0;
  logic [9:0] per_idx = 0, sel = 0;
  logic [15:0] per_data = 0, next_dt;
  logic [783:0] spikes;
  int per [784];
  input_spike_gen dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 784; i++) begin
      per[i] = (i % 9 == 0) ? 0 : $urandom_range(1, 30);
      per_we <= 1; per_idx <= 10'(i); per_data <= 16'(per[i]);
      @(posedge clk);
    end
    per_we <= 0; restart <= 1; @(posedge clk); restart <= 0;
    for (int t = 0; t < 120; t++) begin
      int bad, s, nx;
      tick <= 1;
      #1;
      bad = 0;
      for (int i = 0; i < 784; i++)
        if (spikes[i] != (per[i] != 0 && (t + 1) % per[i] == 0)) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL t=%0d: %0d inputs wrong", t, bad); end
      @(posedge clk);
      tick <= 0;
      s = $urandom_range(0, 783);
      sel = 10'(s);
      #1;
      // next firing time t' > t with (t'+1) % P == 0
      nx = (per[s] == 0) ? 0 : per[s] - ((t + 1) % per[s]);
      checks++;
      if (int'(next_dt) != nx) begin failures++; $display("FAIL t=%0d next_dt[%0d]=%0d expected %0d", t, s, next_dt, nx); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
