// Receiver token-cell: one bit of the LEDR de-serializer.
//
// Every cell watches the four digitized rails of the link (D.f, D.t, P.f,
// P.t). An odd cell accepts only P != D (bit 0 when D.f & P.t, bit 1 when
// D.t & P.f); an even cell accepts only P == D (bit 0 when D.f & P.f, bit 1
// when D.t & P.t). These AND gates are the cell's Validity Check as printed.
// When the cell is enabled by its predecessor, still open (en high) and not
// being reset (out_a low), a valid value on the rails sets out_t or out_f in
// the Bit Buffer; out_v then enables the next cell. The Handshaking block
// raises in_a once en and out_v are high, which drops en and latches the bit;
// out_a (RX.a from the Output Buffer) clears the bit once en is low, and en
// reopens when in_a and out_v have both fallen.
//
// Because the next cell waits for the opposite phase relation, it cannot take
// the bit its predecessor just took, and the first (odd) cell ignores the
// previous event's LSB (P == D) repeated while the link wakes up. The set and
// reset conditions follow the paper's transistor stacks; the one-register-per-
// stage stepping is this model's choice. out_t/out_f are set one clock after a
// valid enabled value appears.
module rx_token_cell
  import lvds_link_pkg::*;
#(
  parameter cell_kind_e KIND = CELL_ODD
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enable,   // predecessor's out_v, ~RX.a for the first cell
  input  logic out_a,    // RX.a, reset of the ring
  input  logic d_f,
  input  logic d_t,
  input  logic p_f,
  input  logic p_t,
  output logic out_f,
  output logic out_t,
  output logic out_v
);

  logic in0_v, in1_v;
  logic en, in_a;

  // Validity check for odd / even cells
  assign in0_v = (KIND == CELL_ODD) ? (d_f && p_t) : (d_f && p_f);
  assign in1_v = (KIND == CELL_ODD) ? (d_t && p_f) : (d_t && p_t);
  assign out_v = out_t | out_f;

  // Bit Buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_t <= 1'b0;
      out_f <= 1'b0;
    end else begin
      if (en && !out_a && in1_v && enable) out_t <= 1'b1;
      else if (out_a && !en)               out_t <= 1'b0;
      if (en && !out_a && in0_v && enable) out_f <= 1'b1;
      else if (out_a && !en)               out_f <= 1'b0;
    end
  end

  // Handshaking
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_a <= 1'b0;
      en   <= 1'b1;
    end else begin
      if (en && out_v)          in_a <= 1'b1;
      else if (!out_v && !en)   in_a <= 1'b0;
      if (in_a)                 en <= 1'b0;
      else if (!out_v)          en <= 1'b1;
    end
  end

  a_dual_rail: assert property (@(posedge clk) disable iff (!rst_n) !(out_t && out_f));

endmodule
