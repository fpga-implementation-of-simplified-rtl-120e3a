// tb_potential_adder: random sequences of decay, add, fire and inhibit steps
// against a behavioural model of the leaky integrate-and-fire rule; counts
// that leak, refractory blocking, the P_MIN reset and threshold crossings all
// occurred.
module tb_potential_adder;
  int checks = 0, failures = 0;
  int n_leak = 0, n_block = 0, n_pmin = 0, n_above = 0;
  logic clk = 0, init = 0, decay = 0, add_en = 0, fire = 0, inhibit = 0, above, blocked;
  logic signed [23:0] w = 0, vth = 24'sd20000, p;
  int mp, mrefr;
  bit mblk;
  potential_adder dut (.*);
  always #5 clk = ~clk;
  initial begin
    init <= 1; @(posedge clk); init <= 0;
    mp = 0; mrefr = 0; mblk = 0;
    for (int n = 0; n < 20000; n++) begin
      int op;
      op = $urandom_range(0, 99);
      decay <= 0; add_en <= 0; fire <= 0; inhibit <= 0;
      w <= 24'($urandom_range(0, 6000) - 2000);
      @(negedge clk);
      if (op < 10) begin
        decay <= 1;
        mblk = (mrefr != 0);
        if (mrefr != 0) begin mrefr--; mp = 0; end
        else if (mp <= -16384) begin mp = 0; n_pmin++; end
        else if (mp > 0) begin mp = (mp - 1024 < 0) ? 0 : mp - 1024; n_leak++; end
      end else if (op < 12 && !mblk && mp >= int'(vth)) begin
        fire <= 1; mp = 0; mrefr = 15; mblk = 1; n_above++;
      end else if (op < 16) begin
        inhibit <= 1; mp = mp - (int'(vth) >>> 1);
      end else begin
        add_en <= 1;
        @(posedge clk);
        if (!mblk) mp = mp + int'(w); else n_block++;
        @(negedge clk);
        add_en <= 0;
        checks++;
        if (int'(p) != mp || blocked != mblk || above != (!mblk && mp >= int'(vth))) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d p=%0d expected %0d blk=%b/%b", n, p, mp, blocked, mblk);
        end
        continue;
      end
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (int'(p) != mp || blocked != mblk) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d op=%0d p=%0d expected %0d blk=%b/%b", n, op, p, mp, blocked, mblk);
      end
    end
    checks += 4;
    if (n_leak == 0 || n_block == 0 || n_pmin == 0 || n_above == 0) begin
      failures++;
      $display("FAIL mechanisms leak=%0d block=%0d pmin=%0d fire=%0d", n_leak, n_block, n_pmin, n_above);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
