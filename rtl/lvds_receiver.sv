// Behavioural model of the instant on/off NMOS-input LVDS receiver.
//
// The real receiver is analog: an NMOS-input amplifier ("Amp"), a latch with
// dynamic bias ("Latch") and an output buffer ("Buffer") giving OutP/OutN.
// Because its inputs are NMOS, the amplifier is off while the pair's common
// mode is at ground (both wires low): it then draws only leakage and the
// latch holds the last bit of the previous event, so the receiver never wakes
// up with a random value. When the common mode returns to Vref the amplifier
// follows the pair again. RstB (active low) sets the power-up value; the
// paper asks for P = D there, and this model resets to 0 on every receiver so
// that both Data and Parity start at 0. OutP follows LVDS.t and OutN is its
// complement; they feed the .t and .f rails of the receive ring.
//
// Model: the amplifier is ideal and instant; the latch is a register updated
// every clock from the output, so a held value is the one seen in the last
// clock before the pair went to sleep. clk is only the model's time base.
module lvds_receiver
  import lvds_link_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,  // RstB
  input  lvds_pair_t pad,    // {LVDS.t, LVDS.f}
  output dr_bit_t    out,    // {OutP, OutN} as {.t, .f}
  output logic       awake   // amplifier on: common mode at Vref (observation)
);

  logic held;
  logic value;

  assign awake = pad.t ^ pad.f;
  assign value = awake ? pad.t : held;
  assign out.t = value;
  assign out.f = ~value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) held <= 1'b0;
    else        held <= value;
  end

endmodule
