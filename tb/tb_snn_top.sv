// tb_snn_top: end-to-end test of the whole network at its default size
// (784 inputs, 16 outputs, 200 time units per image).
//
// Fills all weight FIFOs with random weights, writes class labels, then runs
// NTRAIN images with STDP on and NCLASS images in classification mode. The
// images are synthetic strokes on a dark background. Every image is also run
// through the behavioural reference model (snn_ref_pkg); the test compares,
// time unit by time unit, the output spikes, and per image the threshold,
// spike counts, winner and class. After training it reads back all 12,544
// weights and compares them with the model. It checks the length of every
// time unit (2 cycles without input, N_IN+4 with input, 2*N_IN+5 with STDP)
// and that none exceeds 850 cycles when classifying or 1700 when training
// (8.5 us and 17 us at 100 MHz). Each mechanism (quiet time unit, adder pass,
// weight-change pass, lateral inhibition, refractory blocking, leak, P_MIN
// reset, potentiation, depression) must occur at least once.
module tb_snn_top;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  localparam int NI = 784, NO = 16, T = 200, IW = 28;
  localparam int NTRAIN = 3, NCLASS = 2;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic pix_we = 0, w_we = 0, w_rd = 0, lbl_we = 0, start = 0, train = 0;
  logic [9:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic [3:0] w_sel = 0, lbl_idx = 0, lbl_data = 0;
  logic signed [23:0] w_wdata = 0, w_rdata, threshold;
  logic w_rvalid, busy, done, out_valid, li_event;
  logic [3:0] out_class, winner;
  logic [7:0] spike_count [16];
  phase_e phase;
  logic [15:0] fire;
  logic [7:0] tu;

  snn_top dut (.*);
  always #5 clk = ~clk;

  snn_ref #(NI, NO, IW, T) m;
  int n_dut_quiet = 0, n_dut_add = 0, n_dut_wc = 0, n_dut_li = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic void make_image(int k);
    for (int i = 0; i < NI; i++) m.img[i] = 0;
    // one vertical and one diagonal stroke whose place depends on k, plus a few specks
    for (int r = 4; r < 24; r++) begin
      m.img[r*IW + 6 + 3*k] = 255;
      m.img[r*IW + 7 + 3*k] = 180;
      if (r + k < IW) m.img[r*IW + ((r + 2*k) % 20) + 4] = 220;
    end
    for (int s = 0; s < 6; s++) m.img[$urandom_range(0, NI-1)] = $urandom_range(40, 120);
  endfunction

  task automatic run_image(bit tr);
    int tu, cyc, last_start, exp_len;
    longint fm;
    phase_e prev;
    for (int i = 0; i < NI; i++) begin
      @(negedge clk);
      pix_we = 1; pix_addr = 10'(i); pix_data = 8'(m.img[i]);
    end
    @(negedge clk); pix_we = 0;
    m.prep(); m.threshold(); m.start_image();
    start = 1; train = tr;
    @(negedge clk); start = 0;
    tu = -1; cyc = 0; last_start = 0; prev = PH_IDLE; exp_len = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (phase == PH_DECAY) begin
        if (tu >= 0) begin
          int len;
          len = cyc - last_start;
          chk(len == exp_len, $sformatf("time unit %0d lasted %0d cycles, expected %0d", tu, len, exp_len));
          chk(len <= (tr ? 1700 : 850), $sformatf("time unit %0d longer than the paper's maximum", tu));
        end
        tu++;
        last_start = cyc;
        fm = m.time_unit(tu, tr);
        if (m.spk.sum() with (int'(item)) == 0) exp_len = 2;
        else if (tr && fm != 0)                 exp_len = 2*NI + 5;
        else                                    exp_len = NI + 4;
      end
      if (phase == PH_ADD && prev != PH_ADD) n_dut_add++;
      if (phase == PH_WC && prev != PH_WC) n_dut_wc++;
      if (phase == PH_SC && prev == PH_DECAY) n_dut_quiet++;
      if (li_event) n_dut_li++;
      if (phase == PH_FIRE)
        chk(longint'(fire) == fm, $sformatf("tu %0d fire %h expected %h", tu, fire, fm));
      prev = phase;
    end
    chk(threshold == 24'(m.vth), $sformatf("threshold %0d expected %0d", threshold, m.vth));
    chk(tu == T - 1, $sformatf("%0d time units", tu + 1));
    for (int j = 0; j < NO; j++)
      chk(int'(spike_count[j]) == m.cnt[j], $sformatf("neuron %0d spike count %0d expected %0d", j, spike_count[j], m.cnt[j]));
    @(negedge clk);
    chk(int'(winner) == m.winner(), $sformatf("winner %0d expected %0d", winner, m.winner()));
    chk(int'(out_class) == m.winner() % 10, "class");
    chk(out_valid == (m.cnt[m.winner()] != 0), "valid");
    $display("image done (%s): %0d cycles, threshold=%0d winner=%0d spikes=%0d", tr ? "training" : "classification", cyc, m.vth, m.winner(), m.cnt[m.winner()]);
  endtask

  initial begin
    m = new();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weights: random in [-0.5, 1.0]; neuron NO-1 all negative
    for (int j = 0; j < NO; j++)
      for (int i = 0; i < NI; i++) begin
        m.w[j][i] = (j == NO-1) ? -$urandom_range(0, 2048) : $urandom_range(0, 6144) - 2048;
        @(negedge clk);
        w_we = 1; w_sel = 4'(j); w_wdata = 24'(m.w[j][i]);
      end
    @(negedge clk); w_we = 0;
    for (int j = 0; j < NO; j++) begin
      lbl_we = 1; lbl_idx = 4'(j); lbl_data = 4'(j % 10);
      @(negedge clk);
    end
    lbl_we = 0;
    for (int k = 0; k < NTRAIN; k++) begin make_image(k); run_image(1); end
    // read back every weight
    for (int j = 0; j < NO; j++) begin
      int bad;
      bad = 0;
      for (int i = 0; i < NI; i++) begin
        w_rd = 1; w_sel = 4'(j);
        @(negedge clk);
        w_rd = 0;
        if (!w_rvalid || int'(w_rdata) != m.w[j][i]) begin
          bad++;
          if (bad < 3) $display("weight %0d/%0d = %0d expected %0d", j, i, w_rdata, m.w[j][i]);
        end
      end
      chk(bad == 0, $sformatf("neuron %0d: %0d weights differ after training", j, bad));
    end
    for (int k = 0; k < NCLASS; k++) begin make_image(k); run_image(0); end
    $display("mechanisms: quiet=%0d add=%0d wc=%0d li=%0d block=%0d leak=%0d pmin=%0d pot=%0d dep=%0d fire=%0d",
             m.n_tu_quiet, m.n_tu_input, m.n_tu_wc, m.n_li, m.n_block, m.n_leak, m.n_pmin, m.n_pot, m.n_dep, m.n_fire);
    $display("design passes: quiet=%0d add=%0d wc=%0d li=%0d", n_dut_quiet, n_dut_add, n_dut_wc, n_dut_li);
    chk(n_dut_quiet > 0 && n_dut_quiet == m.n_tu_quiet, "quiet time units");
    chk(n_dut_add > 0 && n_dut_add == m.n_tu_input, "adder passes");
    chk(n_dut_wc > 0 && n_dut_wc == m.n_tu_wc, "weight-change passes");
    chk(n_dut_li > 0 && n_dut_li == m.n_li, "lateral inhibition");
    chk(m.n_block > 0, "refractory blocking happened");
    chk(m.n_leak > 0, "leak happened");
    chk(m.n_pmin > 0, "P_MIN reset happened");
    chk(m.n_pot > 0, "potentiation happened");
    chk(m.n_dep > 0, "depression happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
