// Rising-edge delay element (the tunable t_wk / t_d delay cells and the
// Edge_Delay block of the transmitter).
//
// The output rises DELAY clocks after the input rises, provided the input
// stays high that long; it falls one clock after the input falls. In the
// clock-less circuit these are tunable analog delay lines; here a clock cycle
// is the unit of delay, and DELAY is the tuning knob. Only the rising edge is
// delayed because the delayed edge is what sets the bit cycle; a falling
// edge only resets the stage (a choice of this model).
module edge_delay #(
  parameter int unsigned DELAY = 2  // clocks, at least 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in,
  output logic out
);

  localparam int unsigned CW = $clog2(DELAY + 1) + 1;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      out <= 1'b0;
    end else if (!in) begin
      cnt <= '0;
      out <= 1'b0;
    end else begin
      if (cnt < CW'(DELAY)) cnt <= cnt + 1'b1;
      out <= (cnt + 1'b1 >= CW'(DELAY));  // DELAY-th clock with in high
    end
  end

  initial begin
    assert (DELAY >= 1) else $error("edge_delay: DELAY must be at least 1");
  end

endmodule
