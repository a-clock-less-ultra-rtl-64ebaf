// Testbench of the transmit token-cell, one odd and one even cell side by
// side. For random bits it checks that a cell takes its bit exactly TD+1
// clocks after enable rises (not earlier), drives Data = bit and the LEDR
// parity (odd: ~bit, even: bit) while it holds the token, stops driving when
// its successor disables it, ignores the input while enable is low, keeps the
// bit until out_a resets it, and is ready again after the word returns to
// null.
module tb_tx_token_cell;
  import lvds_link_pkg::*;
  localparam int unsigned TD = 2;
  logic clk = 1'b0, rst_n;
  logic enable, disable_i, out_a, in_f, in_t;
  logic [1:0] out_v, drive, data, parity;
  int checks = 0, failures = 0;

  tx_token_cell #(.KIND(CELL_ODD), .TD(TD)) u_odd (
    .clk, .rst_n, .enable, .disable_i, .out_a, .in_f, .in_t,
    .out_v(out_v[1]), .drive(drive[1]), .data(data[1]), .parity(parity[1]));
  tx_token_cell #(.KIND(CELL_EVEN), .TD(TD)) u_even (
    .clk, .rst_n, .enable, .disable_i, .out_a, .in_f, .in_t,
    .out_v(out_v[0]), .drive(drive[0]), .data(data[0]), .parity(parity[0]));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic b;
    int   t;
    {enable, disable_i, out_a, in_f, in_t} = '0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int rep = 0; rep < 50; rep++) begin
      b = 1'($urandom());
      // input word valid, enable still low: nothing may be taken
      in_t <= b; in_f <= ~b;
      repeat ($urandom_range(1, 5)) @(posedge clk);
      #1 check(out_v == 2'b00, "cell took a bit without enable");
      @(negedge clk);
      enable = 1'b1;
      t = 0;
      while (out_v == 2'b00 && t < 20) begin @(posedge clk); #1 t++; end
      check(t == TD + 1, $sformatf("bit taken %0d clocks after enable, expected %0d", t, TD + 1));
      check(out_v == 2'b11, "both cells should hold the bit");
      check(drive == 2'b11, "cells must drive while they hold the token");
      check(data == {b, b}, "Data rail differs from the bit");
      check(parity[1] == ~b && parity[0] == b, "parity rail breaks LEDR");
      // change the input: a latched cell must not follow
      repeat (3) @(posedge clk);
      @(negedge clk);
      disable_i = 1'b1;
      #1 check(drive == 2'b00, "cell still drives after disable");
      check(data == {b, b}, "bit lost after disable");
      // ring reset by out_a while the input is still valid
      out_a = 1'b1;
      repeat (3) @(posedge clk);
      #1 check(out_v == 2'b00, "out_a did not reset the cell");
      in_t <= 1'b0; in_f <= 1'b0;
      repeat (3) @(posedge clk);
      @(negedge clk);
      {enable, disable_i, out_a} = '0;
      repeat (3) @(posedge clk);
      #1 check(out_v == 2'b00 && drive == 2'b00, "cell not idle after return to zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
