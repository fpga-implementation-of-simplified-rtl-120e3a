// tb_exp_lut: compares both tables against sigma*A*exp(-dt/tau) computed here
// in real arithmetic (within one Q16 step) and checks zeros outside [2,20].
module tb_exp_lut;
  int checks = 0, failures = 0;
  function automatic real absr(real x); return x < 0.0 ? -x : x; endfunction
  logic [4:0] age;
  logic [15:0] next_dt;
  logic signed [17:0] dw_pot, dw_dep;
  exp_lut dut (.age, .next_dt, .dw_pot, .dw_dep);
  initial begin
    for (int d = 0; d < 32; d++) begin
      real ep, ed;
      age = 5'(d); next_dt = 16'(d);
      #1;
      ep = (d >= 2 && d <= 20) ?  0.1 * 0.8 * $exp(-d / 8.0) * 65536.0 : 0.0;
      ed = (d >= 2 && d <= 20) ? -0.1 * 0.3 * $exp(-d / 5.0) * 65536.0 : 0.0;
      checks += 2;
      if (absr(real'(dw_pot) - ep) > 1.0) begin failures++; $display("FAIL pot dt=%0d %0d vs %f", d, dw_pot, ep); end
      if (absr(real'(dw_dep) - ed) > 1.0) begin failures++; $display("FAIL dep dt=%0d %0d vs %f", d, dw_dep, ed); end
    end
    next_dt = 16'd300; #1; checks++;
    if (dw_dep != 0) begin failures++; $display("FAIL dep far"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
