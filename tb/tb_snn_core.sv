// tb_snn_core: core with 64 inputs and 4 output neurons, sequenced by the
// testbench in the controller's pattern and fed with regular spike trains of
// random periods. Over two training images and one classification image the
// output spikes of every time unit, the spike counts and finally all weights
// are compared with the reference model; lateral inhibition, potentiation and
// depression must each occur.
module tb_snn_core;
  import snn_ref_pkg::*;
  localparam int NI = 64, NO = 4, T = 80;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, h_push = 0, h_rot = 0, h_rvalid;
  logic [1:0] h_sel = 0;
  logic signed [23:0] h_wdata = 0, h_rdata, vth = 0;
  logic init = 0, tick = 0, pass_pop = 0, pass_wc = 0, fire_eval = 0, sc = 0;
  logic [NI-1:0] spikes_in = 0;
  logic [15:0] next_dt = 0;
  logic [5:0] idx = 0;
  logic any_spike, any_fire, li_event;
  logic [NO-1:0] fire;
  logic [7:0] spike_cnt [NO];
  snn_ref #(NI, NO, 8, T) m;
  snn_core #(.N_IN(NI), .N_OUT(NO)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  task automatic pass(bit wc, int t);
    for (int k = 0; k <= NI; k++) begin
      pass_pop = (k < NI); pass_wc = wc && (k < NI);
      idx = 6'(k < NI ? k : 0);
      next_dt = (k >= NI || m.period[k] == 0) ? 16'd0 : 16'(m.period[k] - ((t + 1) % m.period[k]));
      @(negedge clk);
    end
    pass_pop = 0; pass_wc = 0;
  endtask
  initial begin
    m = new();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < NO; j++)
      for (int i = 0; i < NI; i++) begin
        m.w[j][i] = $urandom_range(0, 6000) - 1500;
        h_push = 1; h_sel = 2'(j); h_wdata = 24'(m.w[j][i]); @(negedge clk);
      end
    h_push = 0;
    for (int img = 0; img < 3; img++) begin
      bit tr;
      tr = (img < 2);
      for (int i = 0; i < NI; i++) m.period[i] = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(3, 25);
      m.vth = 20000; vth = 24'(m.vth);
      m.start_image();
      init = 1; @(negedge clk); init = 0;
      for (int t = 0; t < T; t++) begin
        longint fm;
        fm = m.time_unit(t, tr);
        for (int i = 0; i < NI; i++) spikes_in[i] = m.fires_at(i, t);
        tick = 1; @(negedge clk); tick = 0;
        chk(any_spike == (spikes_in != 0), "any_spike");
        if (any_spike) begin
          pass(0, t);
          @(negedge clk);            // last weight added
          fire_eval = 1; #1;
          chk(longint'(fire) == fm, $sformatf("img %0d t %0d fire %b expected %0h", img, t, fire, fm));
          @(negedge clk); fire_eval = 0;
          if (tr && fm != 0) begin pass(1, t); @(negedge clk); end
        end
        sc = 1; @(negedge clk); sc = 0;
      end
      for (int j = 0; j < NO; j++)
        chk(int'(spike_cnt[j]) == m.cnt[j], $sformatf("img %0d neuron %0d count %0d expected %0d", img, j, spike_cnt[j], m.cnt[j]));
    end
    for (int j = 0; j < NO; j++)
      for (int i = 0; i < NI; i++) begin
        h_rot = 1; h_sel = 2'(j); @(negedge clk); h_rot = 0;
        chk(h_rvalid && int'(h_rdata) == m.w[j][i], $sformatf("weight %0d/%0d = %0d expected %0d", j, i, h_rdata, m.w[j][i]));
      end
    chk(m.n_li > 0 && m.n_pot > 0 && m.n_dep > 0 && m.n_tu_wc > 0, "mechanisms");
    $display("li=%0d pot=%0d dep=%0d wc=%0d fire=%0d", m.n_li, m.n_pot, m.n_dep, m.n_tu_wc, m.n_fire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
