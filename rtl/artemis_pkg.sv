// artemis_pkg: sizes, number formats and command codes shared by the
// ARTEMIS in-DRAM transformer accelerator RTL.
//
// The HBM organisation (8 channels x 4 banks, 128 subarrays of 32 tiles,
// 256-bit rows) and the 128-bit stochastic stream length with one sign bit
// are the published configuration. The 20-accumulation MOMCAP capacity and
// the 8-bit NSC datapath are published numbers too. The command encoding and
// the Q3.4 fixed-point format of the softmax unit are choices of this RTL.
package artemis_pkg;

  // Stochastic representation: 8-bit sign-magnitude operand -> 128-bit stream
  localparam int unsigned SC_LEN   = 128;
  localparam int unsigned MAG_W    = 8;    // magnitude 0..SC_LEN
  localparam int unsigned ROW_BITS = 256;  // bits per tile row (two streams)

  // MOMCAP capacity in accumulations of one 128-bit stream
  localparam int unsigned MAX_ACC  = 20;
  localparam int unsigned CHG_W    = $clog2(MAX_ACC * SC_LEN + 1);

  // NSC datapath
  localparam int unsigned DATA_W   = 8;

  // HBM organisation
  localparam int unsigned N_CH         = 8;
  localparam int unsigned BANKS_PER_CH = 4;
  localparam int unsigned SUBARRAYS    = 128;
  localparam int unsigned TILES        = 32;
  localparam int unsigned LINK_W       = 256;

  // Bank commands
  typedef enum logic [2:0] {
    CMD_NOP    = 3'd0,
    CMD_START  = 3'd1,  // clear NSC accumulators and MOMCAPs, positive pass
    CMD_MUL    = 3'd2,  // one stochastic multiply + analog accumulate step
    CMD_NEG    = 3'd3,  // flush MOMCAPs, switch to the negative pass
    CMD_FINISH = 3'd4   // flush MOMCAPs, reduce the NSC chain, raise done
  } bank_cmd_e;

  // Softmax unit operations (circled step numbers of the NSC figure)
  typedef enum logic [2:0] {
    SM_IDLE  = 3'd0,
    SM_CLEAR = 3'd1,  // reset ymax and the exponent sum
    SM_MAX   = 3'd2,  // (1) ymax = max(ymax, y)
    SM_SUM   = 3'd3,  // (2) sum += exp(y - ymax)
    SM_LN    = 3'd4,  // (2) lnsum = ln(sum)
    SM_OUT   = 3'd5,  // (3)(4) out = exp(y - ymax - lnsum)
    SM_LUT   = 3'd6   // stand-alone LUT use: out = exp_lut[y] (ReLU/GELU after reprogramming)
  } sm_op_e;


endpackage
