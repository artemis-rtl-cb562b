// tb_ring_network: 8 banks. A ring injection at bank k must be delivered to
// banks k+1, k+2, ... one cycle apart, each exactly once, and never back to
// k; a broadcast must reach every other bank on the next cycle; an injection
// is held off (inj_ready low) while a word is about to arrive at the
// injecting bank's successor. Delivered data must equal the injected word.
module tb_ring_network;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, inj_valid = 0, bcast = 0, inj_ready;
  logic [2:0] inj_bank = 0;
  logic [255:0] inj_data = 0;
  logic [N-1:0] rx_valid;
  logic [255:0] rx_data [N];
  int checks = 0, failures = 0, n_block = 0;

  ring_network #(.N_BANKS(N)) dut (.clk, .rst_n, .inj_valid, .inj_ready, .inj_bank, .bcast,
    .inj_data, .rx_valid, .rx_data);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 16; n++) begin
      int k;
      logic [255:0] w;
      k = $urandom_range(0, N - 1);
      w = {8{$urandom}};
      @(negedge clk); inj_valid = 1; inj_bank = 3'(k); bcast = (n % 4 == 3); inj_data = w;
      checks++; if (!inj_ready) begin failures++; $display("ring not ready when empty"); end
      @(negedge clk); inj_valid = 0;
      if (bcast) begin
        checks++;
        for (int i = 0; i < N; i++)
          if (rx_valid[i] != (i != k) || (i != k && rx_data[i] != w)) begin failures++; $display("bcast bank %0d", i); break; end
        @(negedge clk);
        checks++; if (rx_valid != 0) failures++;
      end else begin
        for (int h = 1; h < N; h++) begin
          int b;
          b = (k + h) % N;
          checks++;
          if (rx_valid != (N)'(1) << b || rx_data[b] != w) begin
            failures++; $display("hop %0d: rx_valid %b expected bank %0d", h, rx_valid, b);
          end
          if (h == 2) begin
            // a word is about to arrive at bank b+1: injecting at bank b must wait
            inj_bank = 3'(b); bcast = 0;
            #1; checks++;
            if (inj_ready) begin failures++; $display("collision not blocked"); end
            else n_block++;
          end
          @(negedge clk);
        end
        checks++; if (rx_valid != 0) begin failures++; $display("word did not retire"); end
      end
    end
    checks++; if (n_block == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
