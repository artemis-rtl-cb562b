// tb_a_to_u: for every MOMCAP level 0..2560 the comparators must produce a
// clean thermometer code with floor(level*128/2560) ones, and nothing while
// B1 is open.
module tb_a_to_u;
  import tb_ref_pkg::*;
  logic         b1;
  logic [11:0]  level;
  logic [127:0] t;
  int checks = 0, failures = 0;

  a_to_u dut (.b1, .level, .tcu(t));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l <= 2560; l++) begin
      level = 12'(l); b1 = 1; #1;
      checks++;
      if ($countones(t) != conv(l) || (t & (t + 1)) != 0) begin
        failures++;
        if (failures < 5) $display("level %0d ones %0d want %0d", l, $countones(t), conv(l));
      end
      if (l % 97 == 0) begin
        b1 = 0; #1; checks++;
        if (t != 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
