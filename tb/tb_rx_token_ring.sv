// Testbench of the receive token-ring at its default size (32 bits). The
// testbench encodes random words itself in LEDR (MSB first, first bit
// P != D, then alternating), with a random bit cycle of 2 to 5 clocks, and
// before each word repeats the previous LSB with P == D for a random time,
// as the waking transmitter does. Playing the Output Buffer, it waits for
// RX.r, checks the dual-rail word (t rails = word, f rails = ~word), checks
// that RX.r rose one clock after the last bit, acknowledges with RX.a and
// checks that the ring resets.
module tb_rx_token_ring;
  import lvds_link_pkg::*;
  localparam int unsigned N = 32;
  logic clk = 1'b0, rst_n;
  dr_bit_t d_rail, p_rail;
  logic rx_a, rx_r;
  logic [N-1:0] rx_f, rx_t, got;
  int checks = 0, failures = 0;

  rx_token_ring #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic put(input logic d, input logic p);
    d_rail.t = d; d_rail.f = ~d; p_rail.t = p; p_rail.f = ~p;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] w;
    logic prev_lsb;
    int per, t;
    rx_a = 0; put(0, 0); rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    prev_lsb = 0;
    for (int rep = 0; rep < 40; rep++) begin
      w = N'({$urandom(), $urandom()});
      per = $urandom_range(2, 5);
      // wake-up: previous LSB repeated with P == D
      @(negedge clk);
      put(prev_lsb, prev_lsb);
      repeat ($urandom_range(1, 10)) @(posedge clk);
      #1 check(got == '0, "ring took the repeated LSB");
      for (int i = N - 1; i >= 0; i--) begin
        @(negedge clk);
        put(w[i], ((N - 1 - i) % 2 == 0) ? ~w[i] : w[i]);
        if (i > 0) repeat (per) @(posedge clk);
      end
      @(posedge clk); #1;
      check(rx_r, "RX.r not one clock after the last bit");
      check(rx_t == w && rx_f == ~w, $sformatf("word %h received as %h", w, rx_t));
      // Output Buffer handshake
      repeat ($urandom_range(0, 4)) @(posedge clk);
      @(negedge clk);
      rx_a = 1'b1;
      t = 0;
      while (rx_r && t < 20) begin @(posedge clk); #1 t++; end
      check(!rx_r && got == '0, "ring not reset by RX.a");
      @(negedge clk);
      rx_a = 1'b0;
      prev_lsb = w[0];
      repeat (3) @(posedge clk);
      #1 check(got == '0, "ring took a bit while the link rests");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
