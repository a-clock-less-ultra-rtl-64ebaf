// Transmitter token-ring: LEDR serializer of one address-event word.
//
// N token-cells, one per bit, are chained MSB first. Cell n-1 is enabled by
// TX.r (the word validity check) through the wake-up delay TWK; every later
// cell is enabled by its predecessor's out_v through the bit-cycle delay TD
// and disables its predecessor as soon as it has taken its own bit, so
// exactly one cell drives the shared Data/Parity wires at a time. Cells
// alternate odd (Parity = ~Data) and even (Parity = Data), starting odd.
//
// The shared wires keep their last value when no cell drives them (a keeper
// on the wire); after power-up they hold Data = Parity = 0. So while the
// drivers wake up, and between events, the wires show the previous event's
// LSB with P = D, which the receiver ignores.
//
// When the last cell (bit 0) has taken its bit and TX.r is still high, a
// C-element and an Edge_Delay of TD clocks raise Enc.a. Enc.a stops the last
// cell driving, resets every cell and (joined with the Control Queue outside)
// acknowledges the Input Buffer. Once the word has returned to null, TX.r and
// then Enc.a fall and the ring is free for the next word.
//
// Timing with the defaults: first bit on the wires TWK+2 clocks after the
// word is complete, then one bit every TD+1 clocks; Enc.a rises TD+1 clocks
// after the last bit. Structure, signal names and the order of events follow
// the paper; the cycle counts are those of this clocked model.
module tx_token_ring
  import lvds_link_pkg::*;
#(
  parameter int unsigned N   = 32,  // event width in bits (even)
  parameter int unsigned TWK = 4,   // wake-up delay before the first bit, clocks
  parameter int unsigned TD  = 2    // bit-cycle delay between cells, clocks
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] tx_f,    // dual-rail word from the Input Buffer
  input  logic [N-1:0] tx_t,
  output logic         tx_r,    // word valid: request, also WKUP of the drivers
  output logic         enc_a,   // whole word sent
  output logic         data,    // shared Data wire
  output logic         parity,  // shared Parity wire
  output logic         active   // some cell drives the wires (observation)
);

  logic [N-1:0] out_v, drive, d_bit, p_bit;
  logic [N:1]   en_chain;   // en_chain[i+1] enables cell i
  logic [N-1:0] dis_chain;  // dis_chain[i] disables cell i
  logic         done_c;
  logic         keep_d, keep_p;

  tx_validity_check #(.N(N)) u_vc (
    .clk  (clk),
    .rst_n(rst_n),
    .tx_f (tx_f),
    .tx_t (tx_t),
    .tx_r (tx_r)
  );

  assign en_chain[N] = tx_r;

  for (genvar i = 0; i < N; i++) begin : g_cell
    if (i > 0) begin : g_en
      assign en_chain[i] = out_v[i];
    end
    assign dis_chain[i] = (i == 0) ? enc_a : out_v[(i == 0) ? 0 : i - 1];

    tx_token_cell #(
      .KIND(cell_kind(i, N)),
      .TD  ((i == N - 1) ? TWK : TD)
    ) u_cell (
      .clk      (clk),
      .rst_n    (rst_n),
      .enable   (en_chain[i+1]),
      .disable_i(dis_chain[i]),
      .out_a    (enc_a),
      .in_f     (tx_f[i]),
      .in_t     (tx_t[i]),
      .out_v    (out_v[i]),
      .drive    (drive[i]),
      .data     (d_bit[i]),
      .parity   (p_bit[i])
    );
  end

  // Last cell done and TX.r still high -> Edge_Delay -> Enc.a
  c_element #(.N_IN(2)) u_c_done (
    .clk  (clk),
    .rst_n(rst_n),
    .in   ({out_v[0], tx_r}),
    .out  (done_c)
  );

  edge_delay #(.DELAY(TD)) u_edge_delay (
    .clk  (clk),
    .rst_n(rst_n),
    .in   (done_c),
    .out  (enc_a)
  );

  // Shared wires with keeper
  assign active = |drive;
  assign data   = active ? |(drive & d_bit) : keep_d;
  assign parity = active ? |(drive & p_bit) : keep_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      keep_d <= 1'b0;
      keep_p <= 1'b0;
    end else begin
      keep_d <= data;
      keep_p <= parity;
    end
  end

  // Mutual exclusion of the token-cells.
  a_one_driver: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(drive));

  initial begin
    assert (N % 2 == 0) else $error("tx_token_ring: N must be even so the idle link rests with P == D");
  end

endmodule
