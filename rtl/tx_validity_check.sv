// Word validity check ("VC") of the transmitter token-ring.
//
// The transmit word arrives as a four-phase dual-rail code: every bit has a
// .t and a .f rail, all rails low is the empty (null) word. TX.r rises once
// every bit carries a value and falls once every bit has returned to null;
// in between it keeps its value, the hysteresis of a C-element completion
// tree. TX.r requests the transmission and wakes the LVDS drivers. The paper
// names the block and what it signals; the completion tree with hysteresis
// is this design's choice. TX.r is registered: one clock after the word
// becomes complete or null.
module tx_validity_check #(
  parameter int unsigned N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] tx_f,
  input  logic [N-1:0] tx_t,
  output logic         tx_r
);

  logic [N-1:0] bit_v;
  logic all_valid, all_null;

  assign bit_v     = tx_f | tx_t;
  assign all_valid = &bit_v;
  assign all_null  = ~|bit_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         tx_r <= 1'b0;
    else if (all_valid) tx_r <= 1'b1;
    else if (all_null)  tx_r <= 1'b0;
  end

  a_no_both_rails: assert property (@(posedge clk) disable iff (!rst_n) (tx_f & tx_t) == '0);

endmodule
