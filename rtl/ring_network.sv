// ring_network: inter-bank ring-and-broadcast network.
//
// Each bank owns one LINK_W-bit link register. A word injected at bank
// inj_bank with bcast = 0 travels the ring: it is delivered to inj_bank+1 on
// the next cycle, then to each following bank one cycle apart, and retires
// after N_BANKS-1 hops, having visited every other bank (how a bank's K_i or
// V_i slice reaches all other banks). With bcast = 1 the word is delivered
// to every bank except inj_bank on the next cycle. rx_valid[i]/rx_data[i]
// show the word currently held at bank i. A ring injection is accepted
// (inj_ready) only when no word is about to arrive at the injecting bank's
// successor; a broadcast only when the ring is empty.
// The ring-and-broadcast idea and the 256-bit link width are published; the
// one-register-per-bank timing, the hop limit and the handshake are this
// RTL's choices.
module ring_network #(
  parameter int unsigned N_BANKS = artemis_pkg::N_CH * artemis_pkg::BANKS_PER_CH,
  parameter int unsigned LINK_W  = artemis_pkg::LINK_W,
  parameter int unsigned B_W     = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     inj_valid,
  output logic                     inj_ready,
  input  logic [B_W-1:0]           inj_bank,
  input  logic                     bcast,
  input  logic [LINK_W-1:0]        inj_data,
  output logic [N_BANKS-1:0]       rx_valid,
  output logic [LINK_W-1:0]        rx_data [N_BANKS]
);
  localparam int unsigned H_W = $clog2(N_BANKS + 1);

  logic [LINK_W-1:0]  data [N_BANKS];
  logic [H_W-1:0]     hops [N_BANKS];   // hops still to go after this bank
  logic [N_BANKS-1:0] vld, arrive;
  logic               inj_ok;

  assign inj_ok = inj_valid && inj_ready;

  for (genvar i = 0; i < N_BANKS; i++) begin : g_node
    localparam int unsigned P = (i + N_BANKS - 1) % N_BANKS;   // predecessor
    logic take_bc, take_ring;

    assign arrive[i]  = vld[P] && (hops[P] != '0);
    assign take_bc    = inj_ok && bcast && (inj_bank != B_W'(i));
    assign take_ring  = inj_ok && !bcast && (inj_bank == B_W'(P)) && (N_BANKS > 1);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[i]  <= 1'b0;
        data[i] <= '0;
        hops[i] <= '0;
      end else if (take_bc) begin
        vld[i]  <= 1'b1;
        data[i] <= inj_data;
        hops[i] <= '0;
      end else if (take_ring) begin
        vld[i]  <= 1'b1;
        data[i] <= inj_data;
        hops[i] <= H_W'(N_BANKS - 2);
      end else begin
        vld[i] <= arrive[i];
        if (arrive[i]) begin
          data[i] <= data[P];
          hops[i] <= hops[P] - 1'b1;
        end
      end
    end
  end

  assign inj_ready = bcast ? (vld == '0)
                           : !arrive[(32'(inj_bank) + 1) % N_BANKS];

  assign rx_valid = vld;
  assign rx_data  = data;
endmodule
