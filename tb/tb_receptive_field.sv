// tb_receptive_field: loads a random 28x28 image and checks the blurred value
// of every pixel against a direct 3x3 binomial convolution with zero padding.
module tb_receptive_field;
  int checks = 0, failures = 0;
  logic clk = 0, pix_we = 0;
  logic [9:0] pix_addr = 0, rd_idx = 0;
  logic [7:0] pix_data = 0, rf;
  int img [28][28];
  receptive_field dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int r = 0; r < 28; r++)
      for (int c = 0; c < 28; c++) begin
        img[r][c] = (($urandom_range(0, 3) == 0) ? 0 : $urandom_range(0, 255));
        pix_we <= 1; pix_addr <= 10'(r * 28 + c); pix_data <= 8'(img[r][c]);
        @(posedge clk);
      end
    pix_we <= 0;
    @(posedge clk);
    for (int r = 0; r < 28; r++)
      for (int c = 0; c < 28; c++) begin
        int s;
        s = 0;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++)
            if (r+dr >= 0 && r+dr < 28 && c+dc >= 0 && c+dc < 28)
              s += img[r+dr][c+dc] * (dr == 0 ? 2 : 1) * (dc == 0 ? 2 : 1);
        rd_idx = 10'(r * 28 + c);
        #1;
        checks++;
        if (int'(rf) != s / 16) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d) rf=%0d expected %0d", r, c, rf, s / 16);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
