// Testbench of the receive token-cell, one odd and one even cell side by
// side. Random link values (D, P) are applied; an enabled, empty cell must
// take the value one clock later if and only if the phase relation is its
// own (odd: P != D, even: P == D), and then keep it whatever the link does,
// until out_a resets it. A disabled cell takes nothing.
module tb_rx_token_cell;
  import lvds_link_pkg::*;
  logic clk = 1'b0, rst_n;
  logic enable, out_a, d_f, d_t, p_f, p_t;
  logic [1:0] out_f, out_t, out_v;
  int checks = 0, failures = 0;

  rx_token_cell #(.KIND(CELL_ODD)) u_odd (
    .clk, .rst_n, .enable, .out_a, .d_f, .d_t, .p_f, .p_t,
    .out_f(out_f[1]), .out_t(out_t[1]), .out_v(out_v[1]));
  rx_token_cell #(.KIND(CELL_EVEN)) u_even (
    .clk, .rst_n, .enable, .out_a, .d_f, .d_t, .p_f, .p_t,
    .out_f(out_f[0]), .out_t(out_t[0]), .out_v(out_v[0]));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic put(input logic d, input logic p);
    d_t = d; d_f = ~d; p_t = p; p_f = ~p;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic d, p;
    logic [1:0] held_v, held_t;
    enable = 0; out_a = 0; put(0, 0);
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int rep = 0; rep < 200; rep++) begin
      held_v = '0; held_t = '0;
      for (int k = 0; k < 6; k++) begin
        d = 1'($urandom()); p = 1'($urandom());
        @(negedge clk);
        if (k == 0) enable = 1'($urandom_range(0, 3) != 0);
        put(d, p);
        @(posedge clk); #1;
        // model: the first value with the cell's own relation is taken
        if (enable && !held_v[1] && (p != d)) begin held_v[1] = 1; held_t[1] = d; end
        if (enable && !held_v[0] && (p == d)) begin held_v[0] = 1; held_t[0] = d; end
        check(out_v == held_v, $sformatf("out_v %b expected %b (d=%0b p=%0b en=%0b)", out_v, held_v, d, p, enable));
        check((out_t & held_v) == (held_t & held_v), "wrong bit value taken");
        check((out_f & held_v) == (~held_t & held_v), "false rail wrong");
        repeat (2) @(posedge clk);
      end
      // reset by out_a
      @(negedge clk);
      out_a = 1'b1;
      enable = 1'b0;
      repeat (3) @(posedge clk);
      #1 check(out_v == 2'b00, "out_a did not clear the cells");
      @(negedge clk);
      out_a = 1'b0;
      repeat (3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
