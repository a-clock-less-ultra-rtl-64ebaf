// Clock-less bit-serial LEDR / LVDS address-event link: transmitter and
// receiver joined by two LVDS pairs.
//
// Transmit side: Input Buffer -> TX token-ring (validity check, odd/even
// token-cells, shared Data/Parity wires, Enc.a) -> two LVDS drivers woken by
// TX.r. TX.a, the acknowledge to the Input Buffer, is the C-element of Enc.a
// and the Control Queue acknowledge, so a word is retired only while a stored
// acknowledge from the receiver is available.
// Receive side: two LVDS receivers -> RX token-ring -> Output Buffer, whose
// output acknowledge out_a also returns to the transmitter's Control Queue.
//
// Clocks: the transmitter (Input Buffer, TX token-ring, Control Queue) runs
// on tx_clk and the receiver (LVDS receivers, RX token-ring, Output Buffer)
// on rx_clk; the two need not be related, as for two chips. Nothing but the
// two LVDS pairs and out_a crosses between them. The receive ring samples
// the pairs directly: LEDR changes exactly one of the two wires per bit, so a
// sample taken at any moment is either the old bit or the new one. The only
// timing rule of this clocked model is that the receiver samples faster than
// bits arrive: a bit, TD+1 tx_clk periods long, must last at least two
// rx_clk periods. out_a enters the Control Queue through a synchronizer.
//
// The LVDS pairs are brought out as observation ports (lvds_d, lvds_p);
// between events both wires of each pair are low (common mode at ground).
// The control queue holds as many acknowledges as the Output Buffer has
// entries, as the paper describes. Block structure and signal names follow
// the paper's architecture figure; the clocked modelling of the asynchronous
// circuit, the buffer depths and the delay values in clocks are this
// design's choices. All handshakes are four-phase.
module lvds_link_top
  import lvds_link_pkg::*;
#(
  parameter int unsigned N         = EVENT_W,  // event width, even
  parameter int unsigned IN_DEPTH  = 4,        // Input Buffer words
  parameter int unsigned OUT_DEPTH = 4,        // Output Buffer words = Control Queue acknowledges
  parameter int unsigned TWK       = 4,        // wake-up delay t_wk, clocks
  parameter int unsigned TD        = 2         // bit-cycle delay t_d, clocks
) (
  input  logic         tx_clk,
  input  logic         rx_clk,
  input  logic         rst_n,       // asynchronous, both sides
  // AER input (bundled data, four-phase, tx_clk)
  input  logic         in_r,
  input  logic [N-1:0] in_data,
  output logic         in_a,
  // AER output (bundled data, four-phase, rx_clk)
  output logic         out_r,
  output logic [N-1:0] out_data,
  input  logic         out_a,
  // observation
  output lvds_pair_t   lvds_d,
  output lvds_pair_t   lvds_p,
  output logic         tx_wkup,      // TX.r, drivers awake
  output logic         rx_awake,     // both receivers awake
  output logic         cq_empty,     // no stored acknowledge
  output logic         tx_active,    // a TX token-cell drives the wires
  output logic         in_full,
  output logic         out_full,
  output logic         rx_busy       // some RX token-cell holds a bit
);

  logic [N-1:0] tx_f, tx_t, rx_f, rx_t, rx_got;
  logic         tx_a, tx_r, enc_a, cq_a;
  logic         data_w, parity_w;
  logic         rx_r, rx_a;
  logic         d_cm, p_cm, d_awake, p_awake;
  dr_bit_t      d_rail, p_rail;

  input_buffer #(.N(N), .DEPTH(IN_DEPTH)) u_input_buffer (
    .clk    (tx_clk),
    .rst_n  (rst_n),
    .in_r   (in_r),
    .in_data(in_data),
    .in_a   (in_a),
    .tx_f   (tx_f),
    .tx_t   (tx_t),
    .tx_a   (tx_a),
    .full   (in_full)
  );

  tx_token_ring #(.N(N), .TWK(TWK), .TD(TD)) u_tx_ring (
    .clk   (tx_clk),
    .rst_n (rst_n),
    .tx_f  (tx_f),
    .tx_t  (tx_t),
    .tx_r  (tx_r),
    .enc_a (enc_a),
    .data  (data_w),
    .parity(parity_w),
    .active(tx_active)
  );

  control_queue #(.DEPTH(OUT_DEPTH)) u_control_queue (
    .clk  (tx_clk),
    .rst_n(rst_n),
    .req  (enc_a),
    .ack  (cq_a),
    .out_a(out_a),
    .empty(cq_empty)
  );

  c_element #(.N_IN(2)) u_c_tx_a (
    .clk  (tx_clk),
    .rst_n(rst_n),
    .in   ({enc_a, cq_a}),
    .out  (tx_a)
  );

  lvds_driver u_drv_d (.din(data_w),   .wkup(tx_r), .pad(lvds_d), .cm_on(d_cm));
  lvds_driver u_drv_p (.din(parity_w), .wkup(tx_r), .pad(lvds_p), .cm_on(p_cm));

  lvds_receiver u_rcv_d (.clk(rx_clk), .rst_n(rst_n), .pad(lvds_d), .out(d_rail), .awake(d_awake));
  lvds_receiver u_rcv_p (.clk(rx_clk), .rst_n(rst_n), .pad(lvds_p), .out(p_rail), .awake(p_awake));

  rx_token_ring #(.N(N)) u_rx_ring (
    .clk   (rx_clk),
    .rst_n (rst_n),
    .d_rail(d_rail),
    .p_rail(p_rail),
    .rx_a  (rx_a),
    .rx_r  (rx_r),
    .rx_f  (rx_f),
    .rx_t  (rx_t),
    .got   (rx_got)
  );

  output_buffer #(.N(N), .DEPTH(OUT_DEPTH)) u_output_buffer (
    .clk     (rx_clk),
    .rst_n   (rst_n),
    .rx_r    (rx_r),
    .rx_f    (rx_f),
    .rx_t    (rx_t),
    .rx_a    (rx_a),
    .out_r   (out_r),
    .out_data(out_data),
    .out_a   (out_a),
    .full    (out_full)
  );

  assign tx_wkup  = tx_r;
  assign rx_awake = d_awake && p_awake;
  assign rx_busy  = |rx_got;

  // The drivers wake together, so both pairs sleep and wake together.
  a_pairs_together: assert property (@(posedge tx_clk) disable iff (!rst_n) d_cm == p_cm);

endmodule
