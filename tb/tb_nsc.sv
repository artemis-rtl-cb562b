// tb_nsc: the NSC adder/subtractor with random partial sums (added in the
// positive pass, subtracted in the negative pass, saturating at the signed
// 8-bit limits), accumulation of the next NSC's value, clear, and the
// B_to_TCU path (first operand BP-encoded, second TCU, product checked).
module tb_nsc;
  import artemis_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic acc_clr = 0, sub_valid = 0, sub_neg = 0, next_valid = 0;
  logic [7:0] sub_in = 0;
  logic signed [7:0] next_in = 0, acc, sm_out, sm_ymax;
  logic sm_out_valid, bt_sign = 0, bt_first = 0, bt_sign_out;
  logic [7:0] bt_mag = 0;
  logic [127:0] bt_stream, s1;
  int checks = 0, failures = 0, model = 0, n_sat = 0;

  nsc dut (.clk, .rst_n, .acc_clr, .sub_valid, .sub_in, .sub_neg, .next_valid, .next_in, .acc,
    .sm_op(SM_IDLE), .sm_valid(1'b0), .sm_y(8'sd0), .lut_we(1'b0), .lut_sel(1'b0),
    .lut_addr(8'd0), .lut_data(8'd0), .sm_out, .sm_out_valid, .sm_ymax,
    .bt_sign, .bt_mag, .bt_first, .bt_stream, .bt_sign_out);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int kind, v;
      kind = $urandom_range(0, 9);
      @(negedge clk);
      acc_clr = 0; sub_valid = 0; next_valid = 0;
      if (kind == 0) begin
        acc_clr = 1; model = 0;
      end else if (kind < 7) begin
        v = $urandom_range(0, 40);
        sub_valid = 1; sub_in = 8'(v); sub_neg = (kind > 4);
        model = sub_neg ? model - v : model + v;
      end else begin
        v = $urandom_range(0, 255) - 128;
        next_valid = 1; next_in = 8'(v);
        model = model + v;
      end
      if (model != sat8(model)) n_sat++;
      model = sat8(model);
      @(posedge clk); #1;
      checks++;
      if (int'(acc) != model) begin failures++; $display("acc %0d want %0d", acc, model); end
    end
    @(negedge clk); acc_clr = 0; sub_valid = 0; next_valid = 0;
    checks++; if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    for (int n = 0; n < 50; n++) begin
      int a, b;
      a = $urandom_range(0, 128); b = $urandom_range(0, 128);
      bt_sign = 1'($urandom); bt_mag = 8'(a); bt_first = 1; #1; s1 = bt_stream;
      checks++; if (bt_sign_out != bt_sign) failures++;
      bt_mag = 8'(b); bt_first = 0; #1;
      checks++;
      if ($countones(s1 & bt_stream) != prod(a, b)) begin failures++; $display("bt a %0d b %0d", a, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
