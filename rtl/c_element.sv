// Muller C-element, clocked model.
//
// The output rises when every input is high, falls when every input is low,
// and otherwise keeps its value. The paper's circuit uses C-elements to join
// the ring's completion with TX.r and the ring's Enc.a with the Control Queue
// acknowledge; here the element is one flip-flop, so the output follows the
// inputs one clock after they agree. Reset clears the output.
module c_element #(
  parameter int unsigned N_IN = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] in,
  output logic            out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       out <= 1'b0;
    else if (&in)     out <= 1'b1;
    else if (!(|in))  out <= 1'b0;
  end

endmodule
