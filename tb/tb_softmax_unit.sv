// tb_softmax_unit: programs the exp and ln LUTs with tables computed here
// (exp LUT[x] = round(16*exp(x/16)), ln LUT[s] = round(16*ln(s/16)), both in
// Q3.4 and saturated to 8 bits), runs the four softmax steps over random
// score vectors, and compares every output with a reference that follows the
// same fixed-point rules. It also checks that the probabilities add up to
// about 1.0 against real-valued softmax, and reprograms the exp LUT as ReLU
// to check stand-alone LUT use.
module tb_softmax_unit;
  import artemis_pkg::*;
  logic clk = 0, rst_n = 0;
  sm_op_e op = SM_IDLE;
  logic valid = 0, lut_we = 0, lut_sel = 0, out_valid;
  logic signed [7:0] y = 0, out, ymax, lnsum;
  logic [7:0] lut_addr = 0, lut_data = 0, sum;
  int checks = 0, failures = 0;
  int exp_t [256], ln_t [256];

  softmax_unit dut (.clk, .rst_n, .op, .valid, .y, .lut_we, .lut_sel, .lut_addr, .lut_data,
                    .out, .out_valid, .ymax, .sum, .lnsum);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clamp(input int v, input int lo, input int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  task automatic issue(input sm_op_e o, input int v);
    @(negedge clk); op = o; valid = 1; y = 8'(v);
    @(negedge clk); valid = 0; op = SM_IDLE;
  endtask

  task automatic prog(input bit sel, input int tbl [256]);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); lut_we = 1; lut_sel = sel; lut_addr = 8'(i); lut_data = 8'(tbl[i]);
    end
    @(negedge clk); lut_we = 0;
  endtask

  initial begin
    for (int i = 0; i < 256; i++) begin
      int x;
      x = (i < 128) ? i : i - 256;
      exp_t[i] = clamp(int'($floor(16.0 * $exp(x / 16.0) + 0.5)), 0, 255);
      ln_t[i]  = (i == 0) ? -128 : clamp(int'($floor(16.0 * $ln(i / 16.0) + 0.5)), -128, 127);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    prog(0, exp_t);
    prog(1, ln_t);
    for (int vec = 0; vec < 8; vec++) begin
      int n, ys [16], m, s, l, psum;
      real rs, rmax;
      n = $urandom_range(2, 16);
      for (int i = 0; i < n; i++) ys[i] = $urandom_range(0, 80) - 40;
      // reference
      m = -128; for (int i = 0; i < n; i++) if (ys[i] > m) m = ys[i];
      s = 0; for (int i = 0; i < n; i++) s = clamp(s + exp_t[8'(clamp(ys[i] - m, -128, 127))], 0, 255);
      l = ln_t[s];
      // hardware
      issue(SM_CLEAR, 0);
      for (int i = 0; i < n; i++) issue(SM_MAX, ys[i]);
      checks++; if (int'(ymax) != m) begin failures++; $display("ymax %0d want %0d", ymax, m); end
      for (int i = 0; i < n; i++) issue(SM_SUM, ys[i]);
      checks++; if (int'(sum) != s) begin failures++; $display("sum %0d want %0d", sum, s); end
      issue(SM_LN, 0);
      checks++; if (int'(lnsum) != l) begin failures++; $display("ln %0d want %0d", lnsum, l); end
      psum = 0;
      for (int i = 0; i < n; i++) begin
        int t, e;
        t = clamp(ys[i] - m - l, -128, 127);
        e = exp_t[8'(t)];
        @(negedge clk); op = SM_OUT; valid = 1; y = 8'(ys[i]);
        @(posedge clk); #1; valid = 0; op = SM_IDLE;
        checks++;
        if (!out_valid || int'(out) != e) begin failures++; $display("out[%0d] %0d want %0d", i, out, e); end
        psum += int'(out);
      end
      // the probabilities, in units of 1/16, must add up to about 16
      checks++;
      if (psum < 10 || psum > 22) begin failures++; $display("sum of probabilities %0d/16", psum); end
    end
    // stand-alone LUT: ReLU
    for (int i = 0; i < 256; i++) exp_t[i] = (i < 128) ? i : 0;
    prog(0, exp_t);
    for (int n = 0; n < 20; n++) begin
      int v;
      v = $urandom_range(0, 255) - 128;
      @(negedge clk); op = SM_LUT; valid = 1; y = 8'(v);
      @(posedge clk); #1; valid = 0; op = SM_IDLE;
      checks++;
      if (!out_valid || int'(out) != (v > 0 ? v : 0)) begin failures++; $display("relu(%0d)=%0d", v, out); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
