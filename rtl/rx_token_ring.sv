// Receiver token-ring: LEDR de-serializer of one address-event word.
//
// N receiver token-cells, one per bit, MSB first, alternately odd and even,
// all watching the same four digitized link rails. The first cell is enabled
// by ~RX.a, every later cell by its predecessor's out_v. Each cell takes the
// first value that shows its phase relation while it is enabled, so the bits
// are taken one by one without any clock recovery: a new bit is recognised by
// the change of P == D into P != D or back. When the last cell (bit 0) has
// its bit, RX.r rises and the Output Buffer takes the dual-rail word
// rx_t/rx_f; its RX.a resets every cell, RX.r falls, RX.a falls and the first
// cell is enabled again.
//
// The ring must keep up with the transmitter: here a cell takes its bit one
// clock after the bit appears and enables its successor in the same clock,
// so any transmit bit cycle of two clocks or more is received. The ring is
// ready again about six clocks after RX.r. Structure and signals follow the
// paper; RX.r taken from the last cell's out_v follows its text ("as soon as
// the last token-cell gets its bit").
module rx_token_ring
  import lvds_link_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  dr_bit_t      d_rail,  // digitized LVDS_D: {D.t, D.f}
  input  dr_bit_t      p_rail,  // digitized LVDS_P: {P.t, P.f}
  input  logic         rx_a,
  output logic         rx_r,
  output logic [N-1:0] rx_f,
  output logic [N-1:0] rx_t,
  output logic [N-1:0] got     // out_v of every cell (observation)
);

  logic [N:1] en_chain;   // en_chain[i+1] enables cell i

  assign en_chain[N] = !rx_a;

  for (genvar i = 0; i < N; i++) begin : g_cell
    if (i > 0) begin : g_en
      assign en_chain[i] = got[i];
    end
    rx_token_cell #(.KIND(cell_kind(i, N))) u_cell (
      .clk   (clk),
      .rst_n (rst_n),
      .enable(en_chain[i+1]),
      .out_a (rx_a),
      .d_f   (d_rail.f),
      .d_t   (d_rail.t),
      .p_f   (p_rail.f),
      .p_t   (p_rail.t),
      .out_f (rx_f[i]),
      .out_t (rx_t[i]),
      .out_v (got[i])
    );
  end

  assign rx_r = got[0];

  initial begin
    assert (N % 2 == 0) else $error("rx_token_ring: N must be even");
  end

endmodule
