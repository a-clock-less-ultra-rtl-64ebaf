// Input Buffer of the transmitter.
//
// Takes address events from the sending core on a four-phase bundled-data
// handshake (in_r, in_data, in_a) into a FIFO of DEPTH words, and hands them
// one at a time to the TX token-ring as a four-phase dual-rail word: it
// drives tx_t = word, tx_f = ~word, waits for TX.a, returns every rail to
// zero (null) and waits for TX.a to fall before the next word. The buffer
// decouples the event source from the serial link (the paper: input and
// output buffers pipeline the transmission and add depth). The FIFO, its
// depth and the bundled-data input protocol are this design's choices.
//
// Timing: in_a rises one clock after in_r if the FIFO has room and falls one
// clock after in_r falls; a stored word appears on tx_t/tx_f one clock after
// TX.a is seen low with the word bus null.
module input_buffer #(
  parameter int unsigned N     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  // event source side (bundled data, four-phase)
  input  logic         in_r,
  input  logic [N-1:0] in_data,
  output logic         in_a,
  // token-ring side (dual rail, four-phase)
  output logic [N-1:0] tx_f,
  output logic [N-1:0] tx_t,
  input  logic         tx_a,
  output logic         full
);

  typedef enum logic [1:0] {
    S_NULL,   // word bus null, waiting for a word and TX.a low
    S_VALID,  // word on the bus, waiting for TX.a
    S_RTZ     // bus returned to null, waiting for TX.a low
  } state_e;

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [N-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic          push, pop, empty;
  state_e        state;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign push  = in_r && !in_a && !full;
  assign pop   = (state == S_VALID) && tx_a;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
      in_a   <= 1'b0;
      state  <= S_NULL;
      tx_t   <= '0;
      tx_f   <= '0;
    end else begin
      if (push)       in_a <= 1'b1;
      else if (!in_r) in_a <= 1'b0;
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);

      unique case (state)
        S_NULL: if (!empty && !tx_a) begin
          tx_t  <= mem[rd_ptr];
          tx_f  <= ~mem[rd_ptr];
          state <= S_VALID;
        end
        S_VALID: if (tx_a) begin
          tx_t  <= '0;
          tx_f  <= '0;
          state <= S_RTZ;
        end
        S_RTZ: if (!tx_a) state <= S_NULL;
        default: state <= S_NULL;
      endcase
    end
  end

  a_null_or_valid: assert property (@(posedge clk) disable iff (!rst_n)
    ((tx_t | tx_f) == '0) || ((tx_t ^ tx_f) == '1));

endmodule
