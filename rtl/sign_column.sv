// sign_column: the sign-bit column and sign controller of one subarray.
//
// Operands are stored as 128-bit magnitude streams; their signs live in one
// extra bit-line column per subarray, one bit per row, so all operands in a
// computational row share a sign. The controller forms the sign of the
// products (XOR of the two rows' sign bits) and lets the tiles' K1 charge
// pulse through only when that sign matches the current pass: the bank first
// accumulates all positive products, then all negative ones, which the NSC
// subtracts. The XOR rule and the K1 gating are this RTL's reading of the
// published positive-then-negative scheme; the controller's logic is not
// published. Sign bits are written with the row data on the clock edge.
module sign_column (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_en,
  input  logic wr_row,     // 0: row #1, 1: row #2
  input  logic wr_sign,
  input  logic pass_neg,   // 0: positive pass, 1: negative pass
  input  logic k1_in,
  output logic k1_out,
  output logic prod_neg
);
  logic s1, s2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= 1'b0;
      s2 <= 1'b0;
    end else if (wr_en) begin
      if (!wr_row) s1 <= wr_sign;
      else         s2 <= wr_sign;
    end
  end
  assign prod_neg = s1 ^ s2;
  assign k1_out   = k1_in && (prod_neg == pass_neg);
endmodule
