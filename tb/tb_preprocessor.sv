// tb_preprocessor: loads a synthetic 28x28 image, runs the per-pixel period
// computation, the threshold pre-pass and then the real spike trains for 200
// time units, comparing threshold, every spike and next_dt with the
// reference model (blur, period = 1275/RF, regular trains).
module tb_preprocessor;
  import snn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, pix_we = 0, prep_we = 0, gen_restart = 0, gen_tick = 0, thr_clear = 0, thr_sample = 0;
  logic [9:0] pix_addr = 0, idx = 0;
  logic [7:0] pix_data = 0;
  logic [783:0] spikes;
  logic [15:0] next_dt;
  logic signed [23:0] vth;
  snn_ref #(784, 1, 28, 200) m;
  preprocessor dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    m = new();
    for (int i = 0; i < 784; i++) m.img[i] = ((i / 28) % 7 == 3 || (i % 28) == 9) ? $urandom_range(100, 255) : 0;
    for (int i = 0; i < 784; i++) begin
      @(negedge clk); pix_we = 1; pix_addr = 10'(i); pix_data = 8'(m.img[i]);
    end
    @(negedge clk); pix_we = 0;
    m.prep(); m.threshold();
    thr_clear = 1; @(negedge clk); thr_clear = 0;
    for (int i = 0; i < 784; i++) begin prep_we = 1; idx = 10'(i); @(negedge clk); end
    prep_we = 0;
    gen_restart = 1; @(negedge clk); gen_restart = 0;
    for (int t = 0; t < 200; t++) begin gen_tick = 1; thr_sample = 1; @(negedge clk); end
    gen_tick = 0; thr_sample = 0;
    chk(int'(vth) == m.vth && m.vth > 0, $sformatf("vth %0d expected %0d", vth, m.vth));
    gen_restart = 1; @(negedge clk); gen_restart = 0;
    for (int t = 0; t < 200; t++) begin
      int bad, s, nx;
      gen_tick = 1;
      #1;
      bad = 0;
      for (int i = 0; i < 784; i++) if (spikes[i] != m.fires_at(i, t)) bad++;
      chk(bad == 0, $sformatf("t %0d: %0d spikes wrong", t, bad));
      @(negedge clk);
      gen_tick = 0;
      s = $urandom_range(0, 783);
      idx = 10'(s);
      #1;
      nx = (m.period[s] == 0) ? 0 : m.period[s] - ((t + 1) % m.period[s]);
      chk(int'(next_dt) == nx, $sformatf("t %0d next_dt[%0d] %0d expected %0d", t, s, next_dt, nx));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
