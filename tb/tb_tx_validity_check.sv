// Testbench of the transmit word validity check.
// Random dual-rail words are filled in and emptied bit by bit in random
// order; TX.r must rise one clock after the last bit becomes valid, stay high
// while bits return to null, and fall one clock after the last bit is null.
// The expected value comes from a model that counts valid bits.
module tb_tx_validity_check;
  localparam int unsigned N = 32;
  logic clk = 1'b0, rst_n;
  logic [N-1:0] tx_f, tx_t;
  logic tx_r;
  int checks = 0, failures = 0;

  tx_validity_check #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] w;
    int order[N];
    bit exp_r;
    tx_f = '0; tx_t = '0; rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(tx_r == 0, "TX.r high after reset");
    exp_r = 0;
    for (int rep = 0; rep < 20; rep++) begin
      w = N'({$urandom(), $urandom()});
      foreach (order[i]) order[i] = i;
      order.shuffle();
      // fill
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        tx_t[order[k]] = w[order[k]];
        tx_f[order[k]] = ~w[order[k]];
        @(posedge clk); #1;
        exp_r = (k == N - 1) ? 1'b1 : exp_r;
        check(tx_r == exp_r, $sformatf("fill step %0d: TX.r=%0b expected %0b", k, tx_r, exp_r));
      end
      order.shuffle();
      // empty
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        tx_t[order[k]] = 1'b0;
        tx_f[order[k]] = 1'b0;
        @(posedge clk); #1;
        exp_r = (k == N - 1) ? 1'b0 : exp_r;
        check(tx_r == exp_r, $sformatf("empty step %0d: TX.r=%0b expected %0b", k, tx_r, exp_r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
