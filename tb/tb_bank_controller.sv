// tb_bank_controller: drives command sequences and checks the control lines
// and their timing: CMD_MUL = 2 cycles (MUL then K1); an automatic flush
// (CONV, DISCH, TILES shift cycles) after every MAX_ACC-th multiply, during
// which further commands stall; CMD_NEG flushes and switches the pass;
// CMD_FINISH flushes and reduces the NSC chain in SUBARRAYS-1 cycles with
// descending red_idx, then pulses done. Uses TILES=4, SUBARRAYS=6.
module tb_bank_controller;
  import artemis_pkg::*;
  localparam int T = 4, S = 6;
  logic clk = 0, rst_n = 0;
  bank_cmd_e cmd = CMD_NOP;
  logic cmd_valid = 0, cmd_ready;
  logic mul, k1, b1, iso, l1, dis, shift, pass_neg, acc_clr, sub_valid, red_en, done;
  logic [2:0] red_idx;
  logic [15:0] n_auto, n_stall;
  int checks = 0, failures = 0;
  int c_mul, c_k1, c_conv, c_dis, c_shift, c_red, c_done, c_clr;
  int last_red;

  bank_controller #(.TILES(T), .SUBARRAYS(S)) dut (.clk, .rst_n, .cmd, .cmd_valid, .cmd_ready,
    .mul, .k1, .b1, .iso, .l1, .discharge(dis), .shift, .pass_neg, .acc_clr, .sub_valid,
    .red_en, .red_idx, .done, .n_auto_flush(n_auto), .n_stall);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    c_mul += mul; c_k1 += k1; c_conv += (b1 && iso && l1); c_dis += dis; c_shift += shift;
    c_done += done; c_clr += acc_clr;
    if (red_en) begin
      if (c_red > 0 && int'(red_idx) != last_red - 1) begin failures++; $display("red_idx order"); end
      last_red = red_idx; c_red++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_counts();
    c_mul = 0; c_k1 = 0; c_conv = 0; c_dis = 0; c_shift = 0; c_red = 0; c_done = 0; c_clr = 0;
  endtask

  // issue a command, return the number of cycles until the controller is idle again
  task automatic run(input bank_cmd_e c, output int cycles);
    @(negedge clk); cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0; cmd = CMD_NOP;
    cycles = 0;
    while (!cmd_ready) begin @(negedge clk); cycles++; end
  endtask

  task automatic expect_eq(input string what, input int got, input int want);
    checks++;
    if (got != want) begin failures++; $display("%s: %0d, expected %0d", what, got, want); end
  endtask

  initial begin
    int cyc;
    clear_counts();
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(CMD_START, cyc);
    expect_eq("start clears", c_clr, 1);
    clear_counts();
    for (int i = 0; i < 19; i++) begin
      run(CMD_MUL, cyc);
      expect_eq("MUL cycles", cyc, 2);
    end
    expect_eq("mul pulses", c_mul, 19);
    expect_eq("k1 pulses", c_k1, 19);
    expect_eq("no conversion yet", c_conv, 0);
    run(CMD_MUL, cyc);   // 20th: capacity reached
    expect_eq("20th MUL + flush cycles", cyc, 2 + 2 + T);
    expect_eq("auto flush", int'(n_auto), 1);
    expect_eq("conversions", c_conv, 1);
    expect_eq("shift cycles", c_shift, T);
    // back-to-back commands while flushing stall
    for (int i = 0; i < 19; i++) run(CMD_MUL, cyc);
    @(negedge clk); cmd = CMD_MUL; cmd_valid = 1;
    @(negedge clk); cmd = CMD_MUL; cmd_valid = 1;   // arrives during the flush
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
    checks++; if (n_stall == 0) begin failures++; $display("no stall seen"); end
    expect_eq("auto flush 2", int'(n_auto), 2);
    clear_counts();
    run(CMD_NEG, cyc);
    expect_eq("NEG flush cycles", cyc, 2 + T);
    expect_eq("pass_neg", int'(pass_neg), 1);
    run(CMD_MUL, cyc);
    clear_counts();
    run(CMD_FINISH, cyc);
    expect_eq("FINISH cycles", cyc, 2 + T + (S - 1) + 1);
    expect_eq("reduce cycles", c_red, S - 1);
    expect_eq("last red_idx", last_red, 0);
    expect_eq("done pulses", c_done, 1);
    // finish with nothing stored: no flush
    clear_counts();
    run(CMD_START, cyc);
    expect_eq("pass reset", int'(pass_neg), 0);
    run(CMD_FINISH, cyc);
    expect_eq("FINISH without charge", cyc, (S - 1) + 1);
    expect_eq("no conversion", c_conv, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
