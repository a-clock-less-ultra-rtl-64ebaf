// Testbench of the LVDS receiver model. After RstB the output is 0. While
// the pair carries a differential value the output follows LVDS.t; when both
// wires drop to ground the last value is held, however long the sleep lasts.
module tb_lvds_receiver;
  import lvds_link_pkg::*;
  logic clk = 1'b0, rst_n, awake;
  lvds_pair_t pad;
  dr_bit_t out;
  int checks = 0, failures = 0;

  lvds_receiver dut (.clk, .rst_n, .pad, .out, .awake);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic last, v;
    pad = '0; rst_n = 0;
    repeat (2) @(posedge clk);
    #1 check(out.t == 0 && out.f == 1 && !awake, "power-up value not 0");
    rst_n = 1;
    last = 0;
    for (int rep = 0; rep < 300; rep++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        pad = '0;
        #1 check(!awake && out.t == last && out.f == ~last,
                 $sformatf("sleep: output %0b, expected held %0b", out.t, last));
      end else begin
        v = 1'($urandom());
        pad.t = v; pad.f = ~v;
        #1 check(awake && out.t == v && out.f == ~v, $sformatf("awake: output %0b expected %0b", out.t, v));
        last = v;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
