// tb_sign_column: every combination of the two row signs and the pass; K1 must
// pass only when sign(row1) XOR sign(row2) equals the pass sign.
module tb_sign_column;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_row = 0, wr_sign = 0, pass_neg = 0, k1_in = 0;
  logic k1_out, prod_neg;
  int checks = 0, failures = 0;

  sign_column dut (.clk, .rst_n, .wr_en, .wr_row, .wr_sign, .pass_neg, .k1_in, .k1_out, .prod_neg);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 64; n++) begin
      bit s1, s2, p, k;
      s1 = 1'($urandom); s2 = 1'($urandom); p = 1'($urandom); k = 1'($urandom);
      @(negedge clk); wr_en = 1; wr_row = 0; wr_sign = s1;
      @(negedge clk); wr_row = 1; wr_sign = s2;
      @(negedge clk); wr_en = 0; pass_neg = p; k1_in = k;
      #1; checks++;
      if (prod_neg != (s1 ^ s2) || k1_out != (k && ((s1 ^ s2) == p))) begin
        failures++;
        $display("s1 %b s2 %b p %b k %b -> %b %b", s1, s2, p, k, prod_neg, k1_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
