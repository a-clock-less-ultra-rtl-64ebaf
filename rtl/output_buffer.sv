// Output Buffer of the receiver.
//
// When the RX token-ring raises RX.r (all bits received), the buffer stores
// the dual-rail word RX.t as a plain word in a FIFO of DEPTH entries and
// raises RX.a, which resets the ring; RX.a falls after RX.r falls. Stored
// words leave on a four-phase bundled-data handshake: out_r with out_data
// held stable until out_a, then out_r falls and the word is popped once out_a
// is seen. The same out_a travels back to the transmitter's Control Queue,
// one acknowledge per word. The paper names the buffer and its role; the FIFO
// and the bundled-data output are this design's choices. While the FIFO is
// full a completed word simply waits in the RX token-ring (RX.a is withheld);
// the Control Queue keeps the transmitter from sending a further word then.
//
// Timing: RX.a rises one clock after RX.r; out_r rises one clock after a word
// is stored (with out_a low) and falls one clock after out_a rises.
module output_buffer #(
  parameter int unsigned N     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  // token-ring side (dual rail)
  input  logic         rx_r,
  input  logic [N-1:0] rx_f,
  input  logic [N-1:0] rx_t,
  output logic         rx_a,
  // event sink side (bundled data, four-phase)
  output logic         out_r,
  output logic [N-1:0] out_data,
  input  logic         out_a,
  output logic         full
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [N-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic          push, pop, empty;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign push  = rx_r && !rx_a && !full;
  assign pop   = out_r && out_a;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= rx_t;
  end

  assign out_data = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
      rx_a   <= 1'b0;
      out_r  <= 1'b0;
    end else begin
      if (push)       rx_a <= 1'b1;
      else if (!rx_r) rx_a <= 1'b0;
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      if (pop)                          out_r <= 1'b0;
      else if (!empty && !out_a && !out_r) out_r <= 1'b1;
    end
  end

  a_word_complete: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> ((rx_t ^ rx_f) == '1));

endmodule
