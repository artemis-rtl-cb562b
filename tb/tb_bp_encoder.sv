// tb_bp_encoder: for every first-operand magnitude a (0..128) and every
// second-operand magnitude b, the encoded stream ANDed with a TCU stream of
// b ones (built here) must hold floor(a*b/128) ones; the stream itself must
// hold a ones.
module tb_bp_encoder;
  import tb_ref_pkg::*;
  logic [7:0]   mag;
  logic [127:0] s, t;
  int checks = 0, failures = 0;

  bp_encoder dut (.mag(mag), .stream(s));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a <= 128; a++) begin
      mag = 8'(a);
      #1;
      checks++;
      if ($countones(s) != a) begin
        failures++;
        $display("a=%0d ones=%0d", a, $countones(s));
      end
      for (int b = 0; b <= 128; b++) begin
        for (int i = 0; i < 128; i++) t[i] = (i < b);
        checks++;
        if ($countones(s & t) != prod(a, b)) begin
          failures++;
          if (failures < 5) $display("a=%0d b=%0d got %0d want %0d", a, b, $countones(s & t), prod(a, b));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
