// Testbench of the Output Buffer. A process playing the RX token-ring offers
// random dual-rail words on RX.r and waits for RX.a (and its fall); a slow
// sink takes words from the four-phase bundled-data output. It checks the
// order and value of every word, that RX.a is withheld while the FIFO is
// full and given as soon as a word leaves, and that out_data stays stable
// while out_r is high.
module tb_output_buffer;
  localparam int unsigned N = 32, DEPTH = 4;
  logic clk = 1'b0, rst_n;
  logic rx_r, rx_a, out_r, out_a, full;
  logic [N-1:0] rx_f, rx_t, out_data;
  int checks = 0, failures = 0;
  logic [N-1:0] sent[$];
  int sink_delay = 0, n_got = 0, n_full_wait = 0;

  output_buffer #(.N(N), .DEPTH(DEPTH)) dut (.*);
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

  // sink
  initial begin
    logic [N-1:0] seen;
    out_a = 0;
    forever begin
      @(posedge clk); #1;
      if (out_r) begin
        seen = out_data;
        repeat (sink_delay) begin
          @(posedge clk);
          #1 check(out_data == seen && out_r, "output changed while out_r high");
        end
        check(sent.size() > 0, "word without a sender");
        if (sent.size() > 0) begin
          check(out_data == sent[0], $sformatf("word %h expected %h", out_data, sent[0]));
          void'(sent.pop_front());
        end
        n_got++;
        out_a = 1'b1;
        do begin @(posedge clk); #1; end while (out_r);
        out_a = 1'b0;
      end
    end
  end

  task automatic offer(input logic [N-1:0] w);
    bit room;
    #1 rx_t = w; rx_f = ~w; rx_r = 1'b1;
    sent.push_back(w);
    if (full) n_full_wait++;
    room = !full;
    // RX.a must follow within one clock of the buffer having room
    forever begin
      @(posedge clk); #1;
      if (rx_a) break;
      check(!room, "RX.a withheld although the buffer has room");
      room = !full;
    end
    rx_r = 1'b0; rx_f = '0; rx_t = '0;
    do begin @(posedge clk); #1; end while (rx_a);
  endtask

  initial begin
    rx_r = 0; rx_f = '0; rx_t = '0; rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int k = 0; k < 10; k++) offer(N'({$urandom(), $urandom()}));
    sink_delay = 50;
    for (int k = 0; k < 15; k++) offer(N'({$urandom(), $urandom()}));
    for (int k = 0; k < 40; k++) begin
      sink_delay = $urandom_range(0, 30);
      repeat ($urandom_range(0, 20)) @(posedge clk);
      offer(N'({$urandom(), $urandom()}));
    end
    wait (sent.size() == 0);
    repeat (10) @(posedge clk);
    check(n_got == 65, $sformatf("%0d words delivered, expected 65", n_got));
    check(n_full_wait > 0, "buffer never full when a word arrived");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
