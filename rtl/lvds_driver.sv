// Behavioural model of the instant on/off current-mode LVDS driver.
//
// The real driver is analog: a current-steering bridge (tail current set by
// VB2, 50 ohm termination) and a common-mode feedback amplifier (tail VB1,
// switched by WKUP) that holds the pair's common mode at Vref, about 1 V.
// This model keeps only the digital behaviour. Its pre-driver is the printed
// gate pair D = NAND(~Din, WKUP), DN = NAND(Din, WKUP). With WKUP low both
// are 1: the bridge's NMOS devices pull LVDS.t and LVDS.f to ground, the
// common mode is 0 V and the far receiver is switched off. With WKUP high
// the pair carries Din differentially: LVDS.t = Din, LVDS.f = ~Din (seen as
// logic levels around the common mode). The model has no delay; the paper
// measures under 0.5 ns for the common mode to recover, which the transmit
// ring covers with its wake-up delay t_wk. Bias and reference inputs are not
// modelled.
module lvds_driver
  import lvds_link_pkg::*;
(
  input  logic       din,    // Din, from the shared Data or Parity wire
  input  logic       wkup,   // WKUP, TX.r of the transmitter
  output lvds_pair_t pad,    // {LVDS.t, LVDS.f}
  output logic       cm_on   // common mode at Vref (observation)
);

  logic d, dn;

  // pre-driver gates
  assign dn = ~(din & wkup);
  assign d  = ~(~din & wkup);

  // bridge: a gate level of 1 turns the branch's NMOS on (node to ground),
  // a level of 0 turns its PMOS on (node to the common-mode supply)
  assign pad.f = ~d;
  assign pad.t = ~dn;
  assign cm_on = wkup;

endmodule
