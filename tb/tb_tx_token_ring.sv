// Testbench of the transmit token-ring at its default size (32 bits,
// t_wk = 4, t_d = 2 clocks). The testbench plays the Input Buffer and the
// Control Queue: it offers a random dual-rail word, watches the shared
// Data/Parity wires, answers Enc.a by returning the word to null, and checks:
//   - the wires first show the previous word's LSB with P == D (wake-up);
//   - the first bit appears TWK+2 clocks after the word, then a new bit every
//     TD+1 clocks, MSB first, with P != D for odd and P == D for even bits;
//   - every bit value matches the word, exactly N bits are sent;
//   - Enc.a rises TD+1 clocks after the last bit, and the wires then keep the
//     LSB with P == D.
module tb_tx_token_ring;
  localparam int unsigned N = 32, TWK = 4, TD = 2;
  logic clk = 1'b0, rst_n;
  logic [N-1:0] tx_f, tx_t;
  logic tx_r, enc_a, data, parity, active;
  int checks = 0, failures = 0;

  tx_token_ring #(.N(N), .TWK(TWK), .TD(TD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
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
    logic pd, pp;
    int t, t_last, nbits;
    tx_f = '0; tx_t = '0; rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    prev_lsb = 1'b0;
    for (int rep = 0; rep < 20; rep++) begin
      w = N'({$urandom(), $urandom()});
      @(negedge clk);
      tx_t = w; tx_f = ~w;
      // wake-up: the wires still hold the previous LSB, P == D
      #1 check(data == prev_lsb && parity == prev_lsb, "wires do not hold the previous LSB with P == D");
      pd = data; pp = parity;
      t = 0; nbits = 0; t_last = 0;
      while (!enc_a && t < 400) begin
        @(posedge clk); #1 t++;
        if (data != pd || parity != pp) begin
          if (nbits == 0)
            check(t == TWK + 2, $sformatf("first bit after %0d clocks, expected %0d", t, TWK + 2));
          else
            check(t - t_last == TD + 1, $sformatf("bit %0d after %0d clocks, expected %0d", nbits, t - t_last, TD + 1));
          check(data == w[N-1-nbits], $sformatf("bit %0d value %0b expected %0b", nbits, data, w[N-1-nbits]));
          check((parity == data) == (nbits % 2 == 1), $sformatf("bit %0d breaks the LEDR phase", nbits));
          nbits++;
          t_last = t;
          pd = data; pp = parity;
        end else if (nbits > 0 && nbits < N) begin
          // an unchanged wire may only mean the next bit is not due yet
          check(t - t_last <= TD + 1, "bit cycle stretched");
        end
      end
      check(nbits == N, $sformatf("%0d bits sent, expected %0d", nbits, N));
      check(t - t_last == TD + 1, $sformatf("Enc.a %0d clocks after the last bit, expected %0d", t - t_last, TD + 1));
      check(data == w[0] && parity == w[0], "last bit not kept with P == D");
      prev_lsb = w[0];
      // Input Buffer: acknowledge seen, return to zero
      repeat ($urandom_range(1, 4)) @(posedge clk);
      @(negedge clk);
      tx_t = '0; tx_f = '0;
      t = 0;
      while (enc_a && t < 20) begin @(posedge clk); #1 t++; end
      check(!enc_a, "Enc.a did not fall after the word returned to null");
      check(!tx_r && !active, "ring not idle");
      check(data == w[0] && parity == w[0], "keeper lost the LSB");
      repeat ($urandom_range(0, 6)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
