// bank_controller: sequencer of one ARTEMIS bank.
//
// It accepts one command at a time (cmd_valid & cmd_ready) and drives the
// control lines that all tiles, sign columns and NSCs of the bank share:
//   CMD_START   clear the NSC accumulators, discharge the MOMCAPs, select
//               the positive pass                                   1 cycle
//   CMD_MUL     MUL: diode AND of the computational rows + sense;
//               CHG: K1 pulse adds both products of every tile to the
//               MOMCAPs                                             2 cycles
//   CMD_NEG     flush (below), then select the negative pass
//   CMD_FINISH  flush, then reduce the NSC chain; 'done' pulses when
//               NSC 1 holds the bank result
// Flush = convert and transfer: CONV (B1 + ISO + L1: the MOMCAP voltage is
// compared, priority-encoded and latched as a binary partial sum), DISCH
// (MOMCAP discharge), then TILES cycles
// of SHIFT in which the latch chain moves one tile towards the NSC and the
// NSC adds (or, in the negative pass, subtracts) the value arriving from the
// tile next to it. A flush is skipped when no charge is stored.
// Since a MOMCAP holds only MAX_ACC accumulations, the controller flushes by
// itself after the MAX_ACC-th CMD_MUL since the last flush; cmd_ready stays
// low meanwhile, which stalls the next command.
// REDUCE takes SUBARRAYS-1 cycles: in cycle k, NSC (SUBARRAYS-2-k) adds the
// accumulator of the NSC after it, so the sum travels down the chain to NSC 1.
// The published design names the bank controller and describes the steps;
// the command set, the state machine and the handshake are this RTL's.
module bank_controller
#(
  parameter int unsigned TILES     = artemis_pkg::TILES,
  parameter int unsigned SUBARRAYS = artemis_pkg::SUBARRAYS,
  parameter int unsigned MAX_ACC   = artemis_pkg::MAX_ACC,
  parameter int unsigned SA_W      = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  artemis_pkg::bank_cmd_e       cmd,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  // tile controls
  output logic            mul,
  output logic            k1,
  output logic            b1,
  output logic            iso,
  output logic            l1,
  output logic            discharge,
  output logic            shift,
  output logic            pass_neg,
  // NSC controls
  output logic            acc_clr,
  output logic            sub_valid,
  output logic            red_en,
  output logic [SA_W-1:0] red_idx,    // NSC that adds its successor
  output logic            done,
  // event counters (observation)
  output logic [15:0]     n_auto_flush,
  output logic [15:0]     n_stall
);
  typedef enum logic [3:0] {
    S_IDLE, S_MUL, S_CHG, S_CONV, S_DISCH, S_SHIFT, S_REDUCE, S_DONE
  } state_e;
  typedef enum logic [1:0] { AFT_IDLE, AFT_NEG, AFT_REDUCE } after_e;

  localparam int unsigned CW = $clog2(MAX_ACC + 1);
  localparam int unsigned TW = $clog2(TILES + 1);

  state_e          state;
  after_e          after;
  logic [CW-1:0]   n_chg;
  logic [TW-1:0]   tcnt;
  logic [SA_W-1:0] rcnt;

  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    mul       = (state == S_MUL);
    k1        = (state == S_CHG);
    b1        = (state == S_CONV);
    iso       = (state == S_CONV);
    l1        = (state == S_CONV);
    discharge = (state == S_DISCH) || (cmd_ready && cmd_valid && cmd == artemis_pkg::CMD_START);
    shift     = (state == S_SHIFT);
    sub_valid = (state == S_SHIFT);
    acc_clr   = cmd_ready && cmd_valid && cmd == artemis_pkg::CMD_START;
    red_en    = (state == S_REDUCE);
    red_idx   = rcnt;
    done      = (state == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      after        <= AFT_IDLE;
      n_chg        <= '0;
      tcnt         <= '0;
      rcnt         <= '0;
      pass_neg     <= 1'b0;
      n_auto_flush <= '0;
      n_stall      <= '0;
    end else begin
      if (cmd_valid && !cmd_ready) n_stall <= n_stall + 1'b1;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          unique case (cmd)
            artemis_pkg::CMD_START: begin
              pass_neg <= 1'b0;
              n_chg    <= '0;
            end
            artemis_pkg::CMD_MUL: state <= S_MUL;
            artemis_pkg::CMD_NEG: begin
              after <= AFT_NEG;
              state <= (n_chg != '0) ? S_CONV : S_IDLE;
              if (n_chg == '0) pass_neg <= 1'b1;
            end
            artemis_pkg::CMD_FINISH: begin
              after <= AFT_REDUCE;
              state <= (n_chg != '0) ? S_CONV : S_REDUCE;
              rcnt  <= SA_W'(SUBARRAYS - 2);
              if (SUBARRAYS < 2) state <= (n_chg != '0) ? S_CONV : S_DONE;
            end
            default: ;
          endcase
        end
        S_MUL: state <= S_CHG;
        S_CHG: begin
          if (n_chg + 1'b1 == CW'(MAX_ACC)) begin
            state        <= S_CONV;      // MOMCAP capacity reached
            after        <= AFT_IDLE;
            n_auto_flush <= n_auto_flush + 1'b1;
          end else begin
            state <= S_IDLE;
          end
          n_chg <= n_chg + 1'b1;
        end
        S_CONV: state <= S_DISCH;
        S_DISCH: begin
          state <= S_SHIFT;
          tcnt  <= '0;
          n_chg <= '0;
        end
        S_SHIFT: begin
          tcnt <= tcnt + 1'b1;
          if (tcnt == TW'(TILES - 1)) begin
            unique case (after)
              AFT_NEG: begin
                pass_neg <= 1'b1;
                state    <= S_IDLE;
              end
              AFT_REDUCE: begin
                rcnt  <= SA_W'(SUBARRAYS - 2);
                state <= (SUBARRAYS < 2) ? S_DONE : S_REDUCE;
              end
              default: state <= S_IDLE;
            endcase
          end
        end
        S_REDUCE: begin
          if (rcnt == '0) state <= S_DONE;
          else            rcnt  <= rcnt - 1'b1;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // a command must be held until it is accepted
  logic cmd_wait_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmd_wait_q <= 1'b0;
    else begin
      cmd_wait_q <= cmd_valid && !cmd_ready;
      if (cmd_wait_q)
        assert (cmd_valid) else $error("bank_controller: cmd_valid dropped before cmd_ready");
    end
  end
endmodule
