// tb_weight_change_unit: random weights and factors against a real-arithmetic
// model of the bounded STDP update (within 2 LSB); checks the bounds hold
// and that en = 0 leaves the weight alone.
module tb_weight_change_unit;
  int checks = 0, failures = 0;
  function automatic real absr(real x); return x < 0.0 ? -x : x; endfunction
  logic en;
  logic signed [23:0] w_in, w_out;
  logic signed [17:0] dw_pot, dw_dep;
  weight_change_unit dut (.en, .w_in, .dw_pot, .dw_dep, .w_out);
  initial begin
    for (int n = 0; n < 5000; n++) begin
      real w, wp, wd, w1, w2;
      w_in   = 24'($urandom_range(0, 8192 + 4915) - 4915);
      dw_pot = (n % 3 == 0) ? 18'sd0 : 18'($urandom_range(0, 6000));
      dw_dep = (n % 3 == 1) ? 18'sd0 : -18'($urandom_range(0, 2000));
      en     = (n % 7 != 0);
      #1;
      w  = real'(w_in); wp = real'(dw_pot) / 65536.0; wd = real'(dw_dep) / 65536.0;
      w1 = w + wp * (8192.0 - w);
      w2 = w1 + wd * (w1 + 4915.0);
      if (!en) w2 = w;
      checks++;
      if (absr(real'(w_out) - w2) > 2.0 || w_out > 8192 || w_out < -4915) begin
        failures++;
        if (failures < 10) $display("FAIL w=%0d pot=%0d dep=%0d en=%b -> %0d expected %f", w_in, dw_pot, dw_dep, en, w_out, w2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
