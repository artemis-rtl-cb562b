// softmax_unit: the log-sum-exp softmax datapath of a near-subarray compute
// unit, also usable as a stand-alone reprogrammable LUT for ReLU or GELU.
//
// softmax(y_i) = exp(y_i - ymax - ln(sum_j exp(y_j - ymax))) is split into
// four steps, issued one element per cycle with 'valid':
//   SM_MAX  (1)    comparator + register: ymax = max(ymax, y); it can run
//                  while the preceding QK^T matrix product is being produced
//   SM_SUM  (2)    sum += exp_lut[y - ymax]
//   SM_LN   (2)    lnsum = ln_lut[sum]
//   SM_OUT  (3)(4) out = exp_lut[y - ymax - lnsum]
//   SM_LUT         out = exp_lut[y]   (the exp LUT reprogrammed with another
//                  function)
//   SM_CLEAR       ymax = -128, sum = 0, lnsum = 0
// Every value is 8 bits. Scores, ln and probabilities use signed Q3.4
// (FRAC = 4); the exponent sum is unsigned Q4.4 and saturates at 255. The
// LUTs are 256 x 8 RAMs indexed by the two's-complement byte of their input
// (the ln LUT by the unsigned sum) and are written through the lut_* port.
// Results appear one cycle after the element (out/out_valid).
// The four steps, the comparator, the two LUTs and the 8-bit width follow the
// published NSC. The fixed-point format, saturation, and the use of three
// separate adders in place of one time-shared adder/subtractor are this
// RTL's choices.
module softmax_unit
#(
  parameter int unsigned DATA_W = artemis_pkg::DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  artemis_pkg::sm_op_e                   op,
  input  logic                     valid,
  input  logic signed [DATA_W-1:0] y,
  // LUT programming
  input  logic                     lut_we,
  input  logic                     lut_sel,    // 0: exp LUT, 1: ln LUT
  input  logic [DATA_W-1:0]        lut_addr,
  input  logic [DATA_W-1:0]        lut_data,
  // results
  output logic signed [DATA_W-1:0] out,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] ymax,
  output logic [DATA_W-1:0]        sum,
  output logic signed [DATA_W-1:0] lnsum
);
  localparam int DEPTH = 2 ** DATA_W;
  localparam logic signed [DATA_W-1:0] SMIN = {1'b1, {(DATA_W-1){1'b0}}};
  localparam logic signed [DATA_W-1:0] SMAX = {1'b0, {(DATA_W-1){1'b1}}};

  logic [DATA_W-1:0] exp_lut [DEPTH];
  logic [DATA_W-1:0] ln_lut  [DEPTH];

  // signed saturation of a (DATA_W+2)-bit value to DATA_W bits
  function automatic logic signed [DATA_W-1:0] sat(input logic signed [DATA_W+1:0] v);
    if (v > (DATA_W+2)'(SMAX))      return SMAX;
    else if (v < (DATA_W+2)'(SMIN)) return SMIN;
    else                            return v[DATA_W-1:0];
  endfunction

  logic signed [DATA_W-1:0] d, t;
  logic [DATA_W:0]          sum_next;

  always_comb begin
    d        = sat((DATA_W+2)'(y) - (DATA_W+2)'(ymax));                       // (2): y - ymax
    t        = sat((DATA_W+2)'(y) - (DATA_W+2)'(ymax) - (DATA_W+2)'(lnsum)); // (3)
    sum_next = {1'b0, sum} + {1'b0, exp_lut[d]};
  end

  always_ff @(posedge clk) begin
    if (lut_we) begin
      if (lut_sel) ln_lut[lut_addr]  <= lut_data;
      else         exp_lut[lut_addr] <= lut_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ymax      <= SMIN;
      sum       <= '0;
      lnsum     <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (valid) begin
        unique case (op)
          artemis_pkg::SM_CLEAR: begin
            ymax  <= SMIN;
            sum   <= '0;
            lnsum <= '0;
          end
          artemis_pkg::SM_MAX:  if (y > ymax) ymax <= y;                              // (1)
          artemis_pkg::SM_SUM:  sum <= sum_next[DATA_W] ? '1 : sum_next[DATA_W-1:0];    // (2)
          artemis_pkg::SM_LN:   lnsum <= ln_lut[sum];                                 // (2)
          artemis_pkg::SM_OUT: begin                                                  // (3)(4)
            out       <= exp_lut[t];
            out_valid <= 1'b1;
          end
          artemis_pkg::SM_LUT: begin
            out       <= exp_lut[y];
            out_valid <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
