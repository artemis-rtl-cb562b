// tb_bank: a bank with SUBARRAYS=4, TILES=4 (two partner pairs). Random
// signed operands are loaded through the NSC B_to_TCU path into every tile
// of the operating subarrays, multiplied and accumulated over more than 20
// steps (so the MOMCAPs fill and the controller flushes by itself), first in
// the positive pass, then in the negative pass, with the partner swap
// (odd_on) exercised in a second run. A reference model written here tracks
// every MOMCAP, conversion, NSC accumulation (saturating) and the NSC chain
// reduction; the bank result must match it. Also checks the multiply rate
// (2 cycles per step, 2*TILES MACs per operating subarray) and that the
// result can be fed to the softmax comparator.
module tb_bank;
  import artemis_pkg::*;
  import tb_ref_pkg::*;
  localparam int S = 4, T = 4;
  logic clk = 0, rst_n = 0, odd_on = 0;
  bank_cmd_e cmd = CMD_NOP;
  logic cmd_valid = 0, cmd_ready, ld_valid = 0, ld_ready, done;
  logic [1:0] ld_sub = 0, ld_tile = 0;
  logic ld_row = 0, ld_half = 0, ld_sign = 0, ld_first = 0;
  logic [7:0] ld_mag = 0;
  logic signed [7:0] result, sm_out, sm_ymax;
  logic sm_out_valid;
  sm_op_e sm_op = SM_IDLE;
  logic sm_valid = 0, sm_use = 0;
  logic [15:0] n_auto, n_stall;
  int checks = 0, failures = 0;
  int cap [S][T];
  int acc [S];
  int n_steps_since;
  int macs = 0, mul_cycles = 0, n_flush_model = 0, n_neg_products = 0, n_pos_products = 0;

  bank #(.TILES(T), .SUBARRAYS(S)) dut (.clk, .rst_n, .odd_on, .cmd, .cmd_valid, .cmd_ready,
    .ld_valid, .ld_ready, .ld_sub, .ld_tile, .ld_row, .ld_half, .ld_sign, .ld_mag, .ld_first,
    .result, .done, .sm_op, .sm_valid, .sm_y(8'sd0), .sm_use_result(sm_use),
    .lut_we(1'b0), .lut_sel(1'b0), .lut_addr(8'd0), .lut_data(8'd0),
    .sm_out, .sm_out_valid, .sm_ymax, .n_auto_flush(n_auto), .n_stall);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int s, input int t, input bit row, input bit half, input bit sg, input int m, input bit first);
    @(negedge clk);
    ld_valid = 1; ld_sub = 2'(s); ld_tile = 2'(t); ld_row = row; ld_half = half;
    ld_sign = sg; ld_mag = 8'(m); ld_first = first;
    @(negedge clk); ld_valid = 0;
  endtask

  task automatic command(input bank_cmd_e c, output int busy);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0; cmd = CMD_NOP;
    busy = 0;
    while (!cmd_ready) begin @(negedge clk); busy++; end
  endtask

  function automatic void model_flush(input bit neg);
    for (int s = 0; s < S; s++) begin
      for (int t = 0; t < T; t++) begin
        acc[s] = sat8(neg ? acc[s] - conv(cap[s][t]) : acc[s] + conv(cap[s][t]));
        cap[s][t] = 0;
      end
    end
    n_steps_since = 0;
  endfunction

  task automatic run_pass(input bit neg, input int steps);
    int busy;
    for (int n = 0; n < steps; n++) begin
      for (int s = 0; s < S; s++) begin
        bit on, s1, s2;
        on = ((s % 2) == 1) == odd_on;
        if (!on) continue;
        s1 = 1'($urandom); s2 = 1'($urandom);
        for (int t = 0; t < T; t++) begin
          int a0, a1, b0, b1;
          a0 = $urandom_range(0, 70); a1 = $urandom_range(0, 70);
          b0 = $urandom_range(0, 70); b1 = $urandom_range(0, 70);
          load(s, t, 0, 0, s1, a0, 1); load(s, t, 0, 1, s1, a1, 1);
          load(s, t, 1, 0, s2, b0, 0); load(s, t, 1, 1, s2, b1, 0);
          if ((s1 ^ s2) == neg) begin
            cap[s][t]   = cap[s][t] + prod(a0, b0);
            cap[s ^ 1][t] = cap[s ^ 1][t] + prod(a1, b1);
            if (neg) n_neg_products += 2; else n_pos_products += 2;
          end
        end
      end
      command(CMD_MUL, busy);
      macs += 2 * T;   // per operating subarray
      n_steps_since++;
      if (n_steps_since == MAX_ACC) begin
        model_flush(neg);
        n_flush_model++;
        checks++;
        if (busy != 2 + 2 + T) begin failures++; $display("flushing MUL took %0d cycles", busy); end
      end else begin
        mul_cycles += busy;
        checks++;
        if (busy != 2) begin failures++; $display("MUL took %0d cycles", busy); end
      end
    end
  endtask

  initial begin
    int busy;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      odd_on = 1'(run);
      for (int s = 0; s < S; s++) begin acc[s] = 0; for (int t = 0; t < T; t++) cap[s][t] = 0; end
      n_steps_since = 0;
      command(CMD_START, busy);
      run_pass(0, 23);
      command(CMD_NEG, busy);
      if (n_steps_since != 0) model_flush(0);
      run_pass(1, 9);
      @(negedge clk); cmd = CMD_FINISH; cmd_valid = 1;
      @(negedge clk); cmd_valid = 0; cmd = CMD_NOP;
      while (!done) @(negedge clk);
      if (n_steps_since != 0) model_flush(1);
      for (int k = S - 2; k >= 0; k--) acc[k] = sat8(acc[k] + acc[k + 1]);
      checks++;
      if (int'(result) != acc[0]) begin failures++; $display("run %0d: result %0d, model %0d", run, result, acc[0]); end
      else $display("run %0d: bank result %0d matches", run, result);
      // feed the result to the softmax comparator (step 1)
      @(negedge clk); sm_op = SM_CLEAR; sm_valid = 1;
      @(negedge clk); sm_op = SM_MAX; sm_use = 1;
      @(negedge clk); sm_valid = 0; sm_use = 0; sm_op = SM_IDLE;
      checks++;
      if (sm_ymax != result) begin failures++; $display("ymax %0d", sm_ymax); end
    end
    checks++;
    if (int'(n_auto) != n_flush_model || n_flush_model == 0) begin failures++; $display("auto flushes %0d, model %0d", n_auto, n_flush_model); end
    checks++;
    if (n_neg_products == 0 || n_pos_products == 0) begin failures++; $display("a sign pass never accumulated"); end
    $display("rate: %0d MACs per operating subarray in %0d multiply-step cycles", macs, macs / T);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
