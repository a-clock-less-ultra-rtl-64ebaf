// Control Queue: pre-stored acknowledges (credits) of the transmitter.
//
// The queue starts full, with DEPTH acknowledges, DEPTH being the depth of
// the receiver's Output Buffer. Each word the ring finishes (req = Enc.a)
// takes one stored acknowledge through a four-phase handshake on req/ack; the
// ack joins Enc.a in a C-element to form TX.a. Each acknowledge that comes
// back from the receiver (a rising edge of out.a) is stored again. While the
// queue is empty, ack is withheld and the transmitter stalls; the link thus
// never sends more words than the far side can hold: a word is already on
// the wire when its acknowledge is taken, so at most DEPTH + 1 words are in
// flight, DEPTH in the Output Buffer and one waiting in the RX token-ring.
// The paper says what the queue stores and how deep it is; the counter that
// holds the acknowledges is this design's choice. ack rises one clock after
// req if an acknowledge is stored and falls one clock after req falls.
// out_a comes from the other chip's clock domain (or from a clock-less
// circuit): it passes a two-flop synchronizer, so a returned acknowledge is
// counted three clocks after out_a rises. out_a is a four-phase level that
// stays high until the word has left, so it cannot be missed.
module control_queue #(
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic req,     // Enc.a
  output logic ack,     // to the TX.a C-element
  input  logic out_a,   // acknowledge returned by the receiver
  output logic empty    // no stored acknowledge (transmitter will stall)
);

  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [CW-1:0] count;
  logic [1:0]    out_a_sync;
  logic          out_a_q;
  logic          take, give;

  assign empty = (count == '0);
  assign take  = req && !ack && !empty;
  assign give  = out_a_sync[1] && !out_a_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count      <= CW'(DEPTH);
      ack        <= 1'b0;
      out_a_sync <= '0;
      out_a_q    <= 1'b0;
    end else begin
      out_a_sync <= {out_a_sync[0], out_a};
      out_a_q    <= out_a_sync[1];
      if (take)      ack <= 1'b1;
      else if (!req) ack <= 1'b0;
      count <= count - CW'(take) + CW'(give);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(give && !take && count == CW'(DEPTH)));

endmodule
