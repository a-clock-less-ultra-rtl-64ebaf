// Transmitter token-cell: one bit of the LEDR serializer.
//
// The cell holds one dual-rail bit of the event word. When its enable input
// has been high for the delay TD (the tunable bit-cycle delay t_d; t_wk for
// the first cell) and its internal en is still high, it copies the input
// bit into its Bit Buffer (out_t/out_f), so out_v rises. out_v enables the
// next cell and disables the previous one. While the cell holds the token
// (out_v high, not yet disabled by its successor, not reset by out_a) it
// drives the shared wires: Data = bit, Parity = ~bit for an odd cell and
// Parity = bit for an even cell.
//
// The Handshaking block follows the printed transistor stacks of the cell:
//   in_a  rises when in_v, en and out_v are all high, falls when in_v and en
//         are both low;
//   en    falls when in_a is high, rises when in_a and out_v are both low.
// The Bit Buffer sets out_t (out_f) when enable_d, en, in_t (in_f) are high
// and out_a is low, and clears it when out_a is high and en is low. So once a
// bit is taken en drops and latches it until the ring reset out_a (Enc.a).
// in_a is internal: the ring acknowledges the word as a whole.
//
// Timing: the bit buffer is set TD+1 clocks after enable rises; the drive
// output is combinational from the cell's registers and the disable/out_a
// inputs. Every gate stage of the asynchronous cell is one register here;
// that clocked stepping is this model's choice, the set/reset conditions are
// the paper's.
module tx_token_cell
  import lvds_link_pkg::*;
#(
  parameter cell_kind_e  KIND = CELL_ODD,
  parameter int unsigned TD   = 2        // enable -> enable.d delay, clocks
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enable,     // predecessor's out_v (TX.r for the first cell)
  input  logic disable_i,  // successor's out_v (Enc.a for the last cell)
  input  logic out_a,      // ring reset, Enc.a
  input  logic in_f,       // dual-rail input bit
  input  logic in_t,
  output logic out_v,      // bit taken
  output logic drive,      // this cell owns the shared wires
  output logic data,       // value for the Data wire when drive is high
  output logic parity      // value for the Parity wire when drive is high
);

  logic enable_d;
  logic out_t, out_f, en, in_a;
  logic in_v;

  edge_delay #(.DELAY(TD)) u_td (
    .clk (clk),
    .rst_n (rst_n),
    .in  (enable),
    .out (enable_d)
  );

  // Validity Check
  assign in_v  = in_f | in_t;
  assign out_v = out_f | out_t;

  // Bit Buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_t <= 1'b0;
      out_f <= 1'b0;
    end else begin
      if (en && !out_a && in_t && enable_d) out_t <= 1'b1;
      else if (out_a && !en)                out_t <= 1'b0;
      if (en && !out_a && in_f && enable_d) out_f <= 1'b1;
      else if (out_a && !en)                out_f <= 1'b0;
    end
  end

  // Handshaking
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_a <= 1'b0;
      en   <= 1'b1;
    end else begin
      if (in_v && en && out_v)  in_a <= 1'b1;
      else if (!in_v && !en)    in_a <= 1'b0;
      if (in_a)                 en <= 1'b0;
      else if (!out_v)          en <= 1'b1;
    end
  end

  // Data and Odd/Even Parity Buffers
  assign drive  = out_v && !disable_i && !out_a;
  assign data   = out_t;
  assign parity = (KIND == CELL_ODD) ? out_f : out_t;

  // A dual-rail bit never has both rails high.
  a_dual_rail: assert property (@(posedge clk) disable iff (!rst_n) !(out_t && out_f));

endmodule
