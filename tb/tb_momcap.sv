// tb_momcap: random charge steps; the stored level must be the running sum
// clamped at 20*128, the step count must stop at 20 and raise 'full', and
// discharge must empty the capacitor. Also checks that k1 low adds nothing.
module tb_momcap;
  logic clk = 0, rst_n = 0, k1 = 0, dis = 0, full;
  logic [7:0]  ones = 0;
  logic [11:0] level;
  logic [4:0]  n_acc;
  int checks = 0, failures = 0;
  int exp_l, exp_n;

  momcap dut (.clk, .rst_n, .k1, .ones, .discharge(dis), .level, .n_acc, .full);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    checks++;
    if (int'(level) != exp_l || int'(n_acc) != exp_n || full != (exp_n >= 20)) begin
      failures++;
      $display("level %0d/%0d n %0d/%0d full %b", level, exp_l, n_acc, exp_n, full);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      exp_l = 0; exp_n = 0;
      for (int n = 0; n < 26; n++) begin
        @(negedge clk);
        k1 = (round == 0) || ($urandom_range(0, 3) != 0);
        ones = (round == 0) ? 8'd128 : 8'($urandom_range(round < 3 ? 128 : 40, 0));
        @(posedge clk); #1;
        if (k1) begin
          exp_l = exp_l + ones; if (exp_l > 2560) exp_l = 2560;
          if (exp_n < 20) exp_n++;
        end
        check();
      end
      @(negedge clk); k1 = 0; dis = 1;
      @(posedge clk); #1; dis = 0;
      exp_l = 0; exp_n = 0;
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
