// tb_b_to_tcu_decoder: checks the TCU decoder for every magnitude 0..128 and
// a few saturating ones: bit i must be set exactly when i < min(mag, 128).
module tb_b_to_tcu_decoder;
  logic [7:0]   mag;
  logic [127:0] tcu;
  int checks = 0, failures = 0;

  b_to_tcu_decoder dut (.mag(mag), .tcu(tcu));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 256; m++) begin
      mag = 8'(m);
      #1;
      for (int i = 0; i < 128; i++) begin
        checks++;
        if (tcu[i] != (i < m)) begin
          failures++;
          if (failures < 5) $display("mag=%0d bit %0d = %b", m, i, tcu[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
