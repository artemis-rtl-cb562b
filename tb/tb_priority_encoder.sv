// tb_priority_encoder: thermometer codes of every length and random vectors;
// the output must be 1 + the index of the highest set bit (0 if none).
module tb_priority_encoder;
  logic [127:0] v;
  logic [7:0]   bin;
  int checks = 0, failures = 0;

  priority_encoder dut (.tcu(v), .bin(bin));

  function automatic int ref_pe(input logic [127:0] x);
    for (int i = 127; i >= 0; i--) if (x[i]) return i + 1;
    return 0;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k <= 128; k++) begin
      for (int i = 0; i < 128; i++) v[i] = (i < k);
      #1; checks++;
      if (int'(bin) != k) begin failures++; $display("thermo %0d -> %0d", k, bin); end
    end
    for (int n = 0; n < 500; n++) begin
      v = {$urandom, $urandom, $urandom, $urandom};
      v = v >> $urandom_range(0, 127);
      #1; checks++;
      if (int'(bin) != ref_pe(v)) begin failures++; $display("rand %h -> %0d", v, bin); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
