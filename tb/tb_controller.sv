// tb_controller: small configuration (N_IN = 16, T_UNITS = 12). Drives
// any_spike / any_fire at random and checks the phase sequence: PREP over all
// pixels, threshold pre-pass of T_UNITS ticks between two INITs, then per time
// unit DECAY, [ADD x N_IN, ADD_END, FIRE, [WC x N_IN, WC_END]], SC, with
// lengths 2, N_IN+4 and 2*N_IN+5; done after T_UNITS time units. WC only
// in training mode.
module tb_controller;
  import snn_pkg::*;
  localparam int NI = 16, TU = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, train = 0, any_spike = 0, any_fire = 0;
  phase_e phase;
  logic [3:0] idx;
  logic [3:0] tu;
  logic prep_we, gen_restart, gen_tick, thr_clear, thr_sample, init, decay;
  logic pass_pop, pass_wc, fire_eval, sc, done, busy;
  int n_kind [3];
  controller #(.N_IN(NI), .T_UNITS(TU)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (phase %s)", what, phase.name()); end
  endtask
  task automatic expect_n(phase_e ph, int n, bit pop, bit check_idx);
    for (int k = 0; k < n; k++) begin
      chk(phase == ph, $sformatf("expected %s cycle %0d", ph.name(), k));
      if (check_idx) chk(int'(idx) == k, $sformatf("idx %0d expected %0d", idx, k));
      chk(pass_pop == pop, "pass_pop");
      @(negedge clk);
    end
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int img = 0; img < 4; img++) begin
      bit tr;
      tr = img[0];
      @(negedge clk);
      chk(phase == PH_IDLE && !busy, "idle");
      start = 1; train = tr;
      #1 chk(thr_clear, "thr_clear with start");
      @(negedge clk); start = 0;
      for (int k = 0; k < NI; k++) begin chk(phase == PH_PREP && prep_we && int'(idx) == k, "prep"); @(negedge clk); end
      chk(phase == PH_INIT && gen_restart && init, "init 1"); @(negedge clk);
      for (int k = 0; k < TU; k++) begin chk(phase == PH_THR && gen_tick && thr_sample, "thr"); @(negedge clk); end
      chk(phase == PH_INIT && gen_restart, "init 2"); @(negedge clk);
      for (int t = 0; t < TU; t++) begin
        int kind;
        kind = $urandom_range(0, 2);   // 0 quiet, 1 input, 2 input and output
        n_kind[kind]++;
        any_spike = (kind != 0);
        chk(phase == PH_DECAY && decay && gen_tick, "decay");
        @(negedge clk);
        any_spike = 0;
        if (kind != 0) begin
          expect_n(PH_ADD, NI, 1, 1);
          expect_n(PH_ADD_END, 1, 0, 0);
          any_fire = (kind == 2);
          chk(phase == PH_FIRE && fire_eval, "fire");
          @(negedge clk);
          any_fire = 0;
          if (kind == 2 && tr) begin
            for (int k = 0; k < NI; k++) begin chk(phase == PH_WC && pass_wc && pass_pop && int'(idx) == k, "wc"); @(negedge clk); end
            expect_n(PH_WC_END, 1, 0, 0);
          end
        end
        chk(phase == PH_SC && sc, "sc");
        @(negedge clk);
      end
      chk(phase == PH_DONE && done, "done");
      @(negedge clk);
    end
    chk(n_kind[0] > 0 && n_kind[1] > 0 && n_kind[2] > 0, "all time-unit kinds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
