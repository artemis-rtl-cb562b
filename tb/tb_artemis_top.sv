// tb_artemis_top: end-to-end run of a reduced stack (2 channels x 2 banks,
// 2 subarrays of 4 tiles per bank). Every bank computes a signed dot product
// of random operands. The first operand pairs come from the host; the
// second operand of tile 0, half 0 is broadcast by bank 0 over the
// ring-and-broadcast network and taken by banks 1..3 straight from the link
// into their computational rows. The run goes through 20 multiply steps
// (the MOMCAPs fill and every bank flushes by itself), a repeated multiply
// issued during that flush (it stalls; AND is idempotent, so it adds the
// same products again), more positive steps, the negative pass and the
// final NSC chain reduction. Each bank result is compared with a reference
// model; then each bank runs the four softmax steps on its result plus three
// host scores and the output is compared with a fixed-point reference.
// Mechanisms counted, each of which must occur at least once: automatic
// flush at MOMCAP capacity, command stall behind a flush, a product charged
// in the negative pass, an operand loaded straight from a broadcast ring word,
// and ring hop delivery. The LUTs of every NSC are programmed first through
// the shared broadcast port.
module tb_artemis_top;
  import artemis_pkg::*;
  import tb_ref_pkg::*;
  localparam int NCH = 2, BPC = 2, NB = NCH * BPC, S = 2, T = 4;
  logic clk = 0, rst_n = 0;
  bank_cmd_e cmd [NB];
  logic [NB-1:0] cmd_valid = '0, cmd_ready, ld_valid = '0, ld_ready;
  logic [0:0] ld_sub [NB];
  logic [1:0] ld_tile [NB];
  logic [NB-1:0] ld_row = '0, ld_half = '0, ld_sign = '0, ld_first = '0, ld_from_ring = '0;
  logic [7:0] ld_mag [NB];
  logic [4:0] ld_byte [NB];
  logic signed [7:0] result [NB], sm_y [NB], sm_out [NB], sm_ymax [NB];
  logic [NB-1:0] done, sm_valid = '0, sm_use = '0, sm_out_valid;
  sm_op_e sm_op [NB];
  logic lut_we = 0, lut_sel = 0;
  logic [7:0] lut_addr = 0, lut_data = 0;
  logic ring_valid = 0, ring_ready, ring_bcast = 0;
  logic [1:0] ring_bank = 0;
  logic [255:0] ring_data = '0;
  logic [NB-1:0] ring_rx_valid;
  logic [255:0] ring_rx_data [NB];
  logic [15:0] n_auto [NB], n_stall [NB];

  int checks = 0, failures = 0;
  int cap [NB][S][T], acc [NB][S];
  int a_op [NB][T][2], b_op [NB][T][2];
  bit s1_op [NB], s2_op [NB];
  int exp_t [256], ln_t [256];
  int ev_flush = 0, ev_stall = 0, ev_neg = 0, ev_ring_load = 0, ev_ring_hop = 0;

  artemis_top #(.N_CH(NCH), .BANKS_PER_CH(BPC), .SUBARRAYS(S), .TILES(T)) dut (
    .clk, .rst_n, .odd_on(1'b0),
    .cmd, .cmd_valid, .cmd_ready, .ld_valid, .ld_ready, .ld_sub, .ld_tile, .ld_row, .ld_half,
    .ld_sign, .ld_mag, .ld_first, .ld_from_ring, .ld_byte,
    .result, .done, .sm_op, .sm_valid, .sm_y, .sm_use_result(sm_use),
    .sm_out, .sm_out_valid, .sm_ymax,
    .lut_we, .lut_sel, .lut_addr, .lut_data,
    .ring_valid, .ring_ready, .ring_bank, .ring_bcast, .ring_data, .ring_rx_valid, .ring_rx_data,
    .n_auto_flush(n_auto), .n_stall);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clamp(input int v, input int lo, input int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  task automatic wait_idle();
    while (cmd_ready != '1) @(negedge clk);
  endtask

  task automatic load(input int b, input int t, input bit row, input bit half, input bit sg, input int m, input bit first);
    @(negedge clk);
    ld_valid[b] = 1; ld_sub[b] = 1'b0; ld_tile[b] = 2'(t); ld_row[b] = row; ld_half[b] = half;
    ld_sign[b] = sg; ld_mag[b] = 8'(m); ld_first[b] = first;
    @(negedge clk); ld_valid[b] = 0;
  endtask

  // new random operands for subarray 0 of every bank; tile 0 half 0 second
  // operand of banks 1..3 arrives by broadcast from bank 0
  task automatic new_operands();
    logic [255:0] w;
    w = '0;
    wait_idle();
    for (int b = 0; b < NB; b++) begin
      s1_op[b] = 1'($urandom); s2_op[b] = (b == 0) ? 1'($urandom) : s2_op[0];
      for (int t = 0; t < T; t++)
        for (int h = 0; h < 2; h++) begin
          a_op[b][t][h] = $urandom_range(0, 90);
          b_op[b][t][h] = $urandom_range(0, 90);
        end
    end
    for (int b = 1; b < NB; b++) b_op[b][0][0] = b_op[0][0][0] + b;   // byte b of the word
    for (int b = 1; b < NB; b++) w[8*b +: 8] = 8'(b_op[b][0][0]);
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < T; t++) begin
        load(b, t, 0, 0, s1_op[b], a_op[b][t][0], 1);
        load(b, t, 0, 1, s1_op[b], a_op[b][t][1], 1);
        if (b == 0 || t != 0) load(b, t, 1, 0, s2_op[b], b_op[b][t][0], 0);
        load(b, t, 1, 1, s2_op[b], b_op[b][t][1], 0);
      end
    // broadcast from bank 0; banks 1..3 take their byte in the delivery cycle
    @(negedge clk); ring_valid = 1; ring_bank = 0; ring_bcast = 1; ring_data = w;
    @(negedge clk); ring_valid = 0;
    for (int b = 1; b < NB; b++) begin
      if (ring_rx_valid[b]) ev_ring_load++;
      ld_valid[b] = 1; ld_from_ring[b] = 1; ld_byte[b] = 5'(b); ld_sub[b] = 1'b0; ld_tile[b] = 2'd0;
      ld_row[b] = 1; ld_half[b] = 0; ld_sign[b] = s2_op[b]; ld_first[b] = 0;
    end
    @(negedge clk);
    for (int b = 1; b < NB; b++) begin ld_valid[b] = 0; ld_from_ring[b] = 0; end
  endtask

  function automatic void model_mul(input bit neg);
    for (int b = 0; b < NB; b++)
      if ((s1_op[b] ^ s2_op[b]) == neg)
        for (int t = 0; t < T; t++) begin
          cap[b][0][t] += prod(a_op[b][t][0], b_op[b][t][0]);
          cap[b][1][t] += prod(a_op[b][t][1], b_op[b][t][1]);
          if (neg) ev_neg++;
        end
  endfunction

  function automatic void model_flush(input bit neg);
    for (int b = 0; b < NB; b++)
      for (int s = 0; s < S; s++)
        for (int t = 0; t < T; t++) begin
          acc[b][s] = sat8(neg ? acc[b][s] - conv(cap[b][s][t]) : acc[b][s] + conv(cap[b][s][t]));
          cap[b][s][t] = 0;
        end
  endfunction

  // present a command to all banks, each held until accepted
  task automatic all_cmd(input bank_cmd_e c);
    logic [NB-1:0] pend;
    pend = '1;
    @(negedge clk);
    for (int b = 0; b < NB; b++) begin cmd[b] = c; cmd_valid[b] = 1; end
    while (pend != 0) begin
      for (int b = 0; b < NB; b++) if (cmd_ready[b]) pend[b] = 0;
      @(negedge clk);
      for (int b = 0; b < NB; b++) if (!pend[b]) begin cmd_valid[b] = 0; cmd[b] = CMD_NOP; end
    end
  endtask


  initial begin
    for (int b = 0; b < NB; b++) begin
      cmd[b] = CMD_NOP; sm_op[b] = SM_IDLE; sm_y[b] = 0; ld_sub[b] = 0; ld_tile[b] = 0;
      ld_mag[b] = 0; ld_byte[b] = 0;
      for (int s = 0; s < S; s++) begin acc[b][s] = 0; for (int t = 0; t < T; t++) cap[b][s][t] = 0; end
    end
    for (int i = 0; i < 256; i++) begin
      int x;
      x = (i < 128) ? i : i - 256;
      exp_t[i] = clamp(int'($floor(16.0 * $exp(x / 16.0) + 0.5)), 0, 255);
      ln_t[i]  = (i == 0) ? -128 : clamp(int'($floor(16.0 * $ln(i / 16.0) + 0.5)), -128, 127);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // LUTs of every NSC
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); lut_we = 1; lut_sel = (i >= 256); lut_addr = 8'(i % 256);
      lut_data = 8'((i < 256) ? exp_t[i % 256] : ln_t[i % 256]);
    end
    @(negedge clk); lut_we = 0;
    // a ring (not broadcast) word from bank 2 visits banks 3, 0, 1
    @(negedge clk); ring_valid = 1; ring_bank = 2; ring_bcast = 0; ring_data = {8{32'hA5A5_0F0F}};
    @(negedge clk); ring_valid = 0;
    for (int h = 1; h < NB; h++) begin
      checks++;
      if (ring_rx_valid[(2 + h) % NB] && ring_rx_data[(2 + h) % NB] == {8{32'hA5A5_0F0F}}) ev_ring_hop++;
      else begin failures++; $display("ring hop %0d missing", h); end
      @(negedge clk);
    end

    all_cmd(CMD_START);
    for (int n = 0; n < 20; n++) begin
      new_operands();
      all_cmd(CMD_MUL);
      model_mul(0);
    end
    // the 20th step triggers the automatic flush; a repeated MUL stalls behind it
    all_cmd(CMD_MUL);
    model_flush(0);
    model_mul(0);
    wait_idle();
    for (int b = 0; b < NB; b++) begin
      if (n_auto[b] != 0) ev_flush++;
      if (n_stall[b] != 0) ev_stall++;
    end
    for (int n = 0; n < 3; n++) begin
      new_operands();
      all_cmd(CMD_MUL);
      model_mul(0);
    end
    all_cmd(CMD_NEG);
    wait_idle();
    model_flush(0);
    for (int n = 0; n < 6; n++) begin
      new_operands();
      all_cmd(CMD_MUL);
      model_mul(1);
    end
    all_cmd(CMD_FINISH);
    while (done == '0) @(negedge clk);
    model_flush(1);
    for (int b = 0; b < NB; b++) begin
      acc[b][0] = sat8(acc[b][0] + acc[b][1]);
      checks++;
      if (int'(result[b]) != acc[b][0]) begin failures++; $display("bank %0d: result %0d, model %0d", b, result[b], acc[b][0]); end
      else $display("bank %0d: dot product %0d matches the model", b, result[b]);
    end
    wait_idle();

    // softmax over {result, y1, y2, y3} in every bank
    begin
      int ys [NB][4], m, s, l, e;
      for (int b = 0; b < NB; b++) begin
        ys[b][0] = result[b];
        for (int i = 1; i < 4; i++) ys[b][i] = clamp(int'(result[b]) + $urandom_range(0, 40) - 20, -128, 127);
      end
      for (int phase = 0; phase < 4; phase++) begin
        sm_op_e op;
        op = (phase == 0) ? SM_CLEAR : (phase == 1) ? SM_MAX : (phase == 2) ? SM_SUM : SM_LN;
        for (int i = 0; i < ((phase == 1 || phase == 2) ? 4 : 1); i++) begin
          @(negedge clk);
          for (int b = 0; b < NB; b++) begin
            sm_op[b] = op; sm_valid[b] = 1; sm_use[b] = (i == 0); sm_y[b] = 8'(ys[b][i]);
          end
        end
      end
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin sm_op[b] = SM_OUT; sm_valid[b] = 1; sm_use[b] = 1; end
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) begin
        m = -128; for (int i = 0; i < 4; i++) if (ys[b][i] > m) m = ys[b][i];
        s = 0; for (int i = 0; i < 4; i++) s = clamp(s + exp_t[8'(clamp(ys[b][i] - m, -128, 127))], 0, 255);
        l = ln_t[s];
        e = exp_t[8'(clamp(ys[b][0] - m - l, -128, 127))];
        checks++;
        if (!sm_out_valid[b] || int'(sm_out[b]) != e) begin failures++; $display("bank %0d softmax %0d want %0d", b, sm_out[b], e); end
      end
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin sm_valid[b] = 0; sm_use[b] = 0; sm_op[b] = SM_IDLE; end
    end

    $display("events: auto_flush=%0d stall=%0d neg_products=%0d ring_loads=%0d ring_hops=%0d",
             ev_flush, ev_stall, ev_neg, ev_ring_load, ev_ring_hop);
    checks += 5;
    if (ev_flush == 0)     begin failures++; $display("no automatic flush"); end
    if (ev_stall == 0)     begin failures++; $display("no stall"); end
    if (ev_neg == 0)       begin failures++; $display("no negative product"); end
    if (ev_ring_load == 0) begin failures++; $display("no load from the ring"); end
    if (ev_ring_hop == 0)  begin failures++; $display("no ring hop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
