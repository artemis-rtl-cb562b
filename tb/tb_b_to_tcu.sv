// tb_b_to_tcu: the NSC B_to_TCU block. Second operands must come out as TCU
// streams, first operands BP-encoded; a first and a second operand ANDed
// must give floor(a*b/128) ones; the sign passes through.
module tb_b_to_tcu;
  import tb_ref_pkg::*;
  logic         sgn, first, so;
  logic [7:0]   mag;
  logic [127:0] st, s1, s2;
  int checks = 0, failures = 0;

  b_to_tcu dut (.sign_in(sgn), .mag(mag), .first_op(first), .stream(st), .sign_out(so));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      int a, b;
      a = $urandom_range(0, 128);
      b = $urandom_range(0, 128);
      sgn = 1'($urandom); mag = 8'(a); first = 1'b1; #1; s1 = st;
      checks++; if (so != sgn) failures++;
      mag = 8'(b); first = 1'b0; #1; s2 = st;
      checks++;
      for (int i = 0; i < 128; i++) if (s2[i] != (i < b)) begin failures++; break; end
      checks++;
      if ($countones(s1 & s2) != prod(a, b)) begin
        failures++;
        $display("a=%0d b=%0d got %0d want %0d", a, b, $countones(s1 & s2), prod(a, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
