// tb_dram_tile: two tiles wired as partners (tile A operating, tile B in the
// idle subarray). Random operand pairs are written as BP/TCU streams built
// here, multiplied and charged for up to 20 steps; then both tiles convert.
// A's latch must hold conv(sum of half-0 products) and B's latch
// conv(sum of A's half-1 products). Finally the latch chain is shifted: B's
// value must move into A (B.latch_out -> A.latch_in).
module tb_dram_tile;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_row = 0, wr_half = 0, mul = 0, k1 = 0;
  logic b1 = 0, iso = 0, l1 = 0, dis = 0, shift = 0;
  logic [127:0] wr_data = '0;
  logic [7:0] a_nb_o, b_nb_o, a_lat, b_lat;
  logic a_k1_o, b_k1_o;
  int checks = 0, failures = 0;

  dram_tile u_a (.clk, .rst_n, .wr_en, .wr_row, .wr_half, .wr_data, .mul, .k1, .on(1'b1),
    .nb_ones_out(a_nb_o), .nb_k1_out(a_k1_o), .nb_ones_in(b_nb_o), .nb_k1_in(b_k1_o),
    .b1, .iso, .l1, .discharge(dis), .shift, .latch_in(b_lat), .latch_out(a_lat), .cap_level());
  dram_tile u_b (.clk, .rst_n, .wr_en(1'b0), .wr_row(1'b0), .wr_half(1'b0), .wr_data('0),
    .mul(1'b0), .k1(1'b0), .on(1'b0),
    .nb_ones_out(b_nb_o), .nb_k1_out(b_k1_o), .nb_ones_in(a_nb_o), .nb_k1_in(a_k1_o),
    .b1, .iso, .l1, .discharge(dis), .shift, .latch_in(8'd0), .latch_out(b_lat), .cap_level());

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [127:0] tcu(input int m);
    logic [127:0] v;
    for (int i = 0; i < 128; i++) v[i] = (i < m);
    return v;
  endfunction
  function automatic logic [127:0] bp(input int m);
    logic [127:0] v;
    for (int i = 0; i < 128; i++) v[i] = (((i + 1) * m) / 128) != ((i * m) / 128);
    return v;
  endfunction

  task automatic write(input bit row, input bit half, input logic [127:0] d);
    @(negedge clk); wr_en = 1; wr_row = row; wr_half = half; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic pulse(ref logic s);
    @(negedge clk); s = 1;
    @(negedge clk); s = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      int sum0, sum1, steps;
      sum0 = 0; sum1 = 0;
      steps = (round == 0) ? 20 : $urandom_range(1, 20);
      for (int n = 0; n < steps; n++) begin
        int a0, b0, a1, b1v;
        a0 = $urandom_range(0, 128); b0 = $urandom_range(0, 128);
        a1 = $urandom_range(0, 128); b1v = $urandom_range(0, 128);
        write(0, 0, bp(a0)); write(0, 1, bp(a1));
        write(1, 0, tcu(b0)); write(1, 1, tcu(b1v));
        pulse(mul);
        checks++;
        if (int'(a_nb_o) != prod(a1, b1v)) begin failures++; $display("half1 ones %0d want %0d", a_nb_o, prod(a1, b1v)); end
        pulse(k1);
        sum0 += prod(a0, b0); sum1 += prod(a1, b1v);
      end
      @(negedge clk); b1 = 1; iso = 1; l1 = 1;
      @(negedge clk); b1 = 0; iso = 0; l1 = 0;
      pulse(dis);
      checks++;
      if (int'(a_lat) != conv(sum0)) begin failures++; $display("A latch %0d want %0d (sum %0d)", a_lat, conv(sum0), sum0); end
      checks++;
      if (int'(b_lat) != conv(sum1)) begin failures++; $display("B latch %0d want %0d (sum %0d)", b_lat, conv(sum1), sum1); end
      pulse(shift);
      checks++;
      if (int'(a_lat) != conv(sum1) || b_lat != 0) begin failures++; $display("shift: A %0d B %0d", a_lat, b_lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
