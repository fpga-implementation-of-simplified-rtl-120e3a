// tb_lateral_inhibition: random crossings and potentials over several images;
// the first firing time unit of an image must let only the highest-potential
// crosser fire (lowest index on ties) and inhibit all others, later ones let
// every crosser fire with no inhibition.
module tb_lateral_inhibition;
  int checks = 0, failures = 0, n_first = 0, n_later = 0;
  logic clk = 0, init = 0, eval = 0, event_o;
  logic [15:0] above = 0, fire, inhibit;
  logic signed [23:0] pot [16];
  lateral_inhibition dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int img = 0; img < 50; img++) begin
      bit first;
      init = 1; @(negedge clk); init = 0;
      first = 1;
      for (int t = 0; t < 20; t++) begin
        logic [15:0] wf, wi;
        int win;
        for (int j = 0; j < 16; j++) pot[j] = 24'($urandom_range(0, 7) * 1000);
        above = ($urandom_range(0, 2) == 0) ? 16'($urandom) & 16'($urandom) : 16'h0;
        eval = 1;
        win = -1;
        for (int j = 0; j < 16; j++) if (above[j] && (win < 0 || pot[j] > pot[win])) win = j;
        wf = 0; wi = 0;
        if (above != 0) begin
          if (first) begin wf[win] = 1; wi = ~wf; n_first++; end
          else begin wf = above; n_later++; end
        end
        #1;
        checks++;
        if (fire != wf || inhibit != wi || event_o != (first && above != 0)) begin
          failures++;
          if (failures < 10) $display("FAIL img %0d t %0d above=%h fire=%h/%h inh=%h/%h", img, t, above, fire, wf, inhibit, wi);
        end
        if (above != 0) first = 0;
        @(negedge clk);
        eval = 0;
      end
    end
    checks++;
    if (n_first == 0 || n_later == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
