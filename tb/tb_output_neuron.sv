// tb_output_neuron: one neuron with 32 synapses. Fills the FIFO, then runs
// time units of decay, adder pass with random input spikes, firing when the
// threshold is reached, weight-change pass with random STDP factors and the
// spike-counter step. Checks potential, threshold flag, spike count, and all
// weights read back through the host port against a model.
module tb_output_neuron;
  localparam int NI = 32;
  int checks = 0, failures = 0, n_fire = 0;
  logic clk = 0, rst_n = 0, h_push = 0, h_rot = 0, h_rvalid;
  logic init = 0, decay = 0, pass_pop = 0, pass_wc = 0, d_spk = 0, fire = 0, inhibit = 0, sc = 0;
  logic signed [23:0] h_wdata = 0, h_rdata, p, vth = 24'sd12000;
  logic signed [17:0] d_dw_pot = 0, d_dw_dep = 0;
  logic above, fired;
  logic [7:0] spike_cnt;
  int w [NI], mp, mcnt, refr;
  output_neuron #(.N_IN(NI)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  function automatic int wcu(int wv, int dp, int dd);
    int w1;
    w1 = wv + int'((longint'(dp) * longint'(8192 - wv)) >>> 16);
    return w1 + int'((longint'(dd) * longint'(w1 + 4915)) >>> 16);
  endfunction
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NI; i++) begin
      w[i] = $urandom_range(0, 3000) - 500;
      h_push = 1; h_wdata = 24'(w[i]); @(negedge clk);
    end
    h_push = 0;
    init = 1; @(negedge clk); init = 0;
    mp = 0; mcnt = 0; refr = 0;
    for (int t = 0; t < 60; t++) begin
      bit blk, f;
      int spk [NI], dp [NI], dd [NI];
      decay = 1; @(negedge clk); decay = 0;
      blk = (refr != 0);
      if (refr != 0) begin refr--; mp = 0; end
      else if (mp <= -16384) mp = 0;
      else if (mp > 0) mp = (mp < 1024) ? 0 : mp - 1024;
      // adder pass
      for (int k = 0; k <= NI; k++) begin
        pass_pop = (k < NI); pass_wc = 0;
        if (k > 0) begin
          spk[k-1] = ($urandom_range(0, 3) == 0);
          d_spk = spk[k-1];
          if (spk[k-1] && !blk) mp += w[k-1];
        end
        @(negedge clk);
      end
      pass_pop = 0; d_spk = 0;
      chk(int'(p) == mp, $sformatf("t %0d p=%0d expected %0d", t, p, mp));
      f = !blk && mp >= int'(vth);
      chk(above == f, $sformatf("t %0d above", t));
      fire = f; @(negedge clk); fire = 0;
      if (f) begin mp = 0; refr = 15; n_fire++; mcnt++; end
      // weight-change pass (always run; only a fired neuron may change)
      for (int k = 0; k <= NI; k++) begin
        pass_pop = (k < NI); pass_wc = (k < NI);
        if (k > 0) begin
          dp[k-1] = ($urandom_range(0, 1)) ? $urandom_range(0, 6000) : 0;
          dd[k-1] = ($urandom_range(0, 1)) ? -$urandom_range(0, 2000) : 0;
          d_dw_pot = 18'(dp[k-1]); d_dw_dep = 18'(dd[k-1]);
          if (f) w[k-1] = wcu(w[k-1], dp[k-1], dd[k-1]);
        end
        @(negedge clk);
      end
      pass_pop = 0; pass_wc = 0;
      sc = 1; @(negedge clk); sc = 0;
      chk(int'(spike_cnt) == mcnt, $sformatf("t %0d count %0d expected %0d", t, spike_cnt, mcnt));
    end
    for (int i = 0; i < NI; i++) begin
      h_rot = 1; @(negedge clk); h_rot = 0;
      chk(h_rvalid && int'(h_rdata) == w[i], $sformatf("weight %0d = %0d expected %0d", i, h_rdata, w[i]));
    end
    chk(n_fire > 0, "neuron fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
