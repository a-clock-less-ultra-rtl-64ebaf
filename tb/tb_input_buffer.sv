// Testbench of the Input Buffer. A source process pushes random words on
// the four-phase bundled-data input; a process playing the TX token-ring
// waits for a complete dual-rail word, checks it (t rails = word, f rails =
// ~word) against the order sent, raises TX.a, checks the return to null and
// lowers TX.a. The ring side is slowed down so the FIFO fills: then in_a
// must be withheld until a word leaves, and full must be reported.
module tb_input_buffer;
  localparam int unsigned N = 32, DEPTH = 4;
  logic clk = 1'b0, rst_n;
  logic in_r, in_a, tx_a, full;
  logic [N-1:0] in_data, tx_f, tx_t;
  int checks = 0, failures = 0;
  logic [N-1:0] sent[$];
  int n_full = 0, n_got = 0;
  int ring_delay = 0;

  input_buffer #(.N(N), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // TX token-ring side
  initial begin
    tx_a = 0;
    forever begin
      @(posedge clk); #1;
      if ((tx_t | tx_f) != '0) begin
        check((tx_t ^ tx_f) == '1, "dual-rail word incomplete or invalid");
        check(sent.size() > 0, "word without a sender");
        if (sent.size() > 0) begin
          check(tx_t == sent[0], $sformatf("word %h expected %h", tx_t, sent[0]));
          void'(sent.pop_front());
        end
        n_got++;
        repeat (ring_delay) @(posedge clk);
        #1 tx_a = 1'b1;
        do begin @(posedge clk); #1; end while ((tx_t | tx_f) != '0);
        tx_a = 1'b0;
      end
    end
  end

  always @(posedge clk) if (full) n_full++;

  task automatic send(input logic [N-1:0] w);
    #1 in_data = w; in_r = 1'b1;
    sent.push_back(w);
    do begin @(posedge clk); #1; end while (!in_a);
    in_r = 1'b0;
    do begin @(posedge clk); #1; end while (in_a);
  endtask

  initial begin
    in_r = 0; in_data = '0; rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int k = 0; k < 20; k++) send(N'({$urandom(), $urandom()}));
    ring_delay = 60;
    for (int k = 0; k < 20; k++) send(N'({$urandom(), $urandom()}));
    wait (sent.size() == 0);
    ring_delay = 0;
    for (int k = 0; k < 30; k++) begin
      repeat ($urandom_range(0, 10)) @(posedge clk);
      ring_delay = $urandom_range(0, 20);
      send(N'({$urandom(), $urandom()}));
    end
    wait (sent.size() == 0);
    repeat (10) @(posedge clk);
    check(n_got == 70, $sformatf("%0d words delivered, expected 70", n_got));
    check(n_full > 0, "buffer never reported full");
    check(!full && (tx_t | tx_f) == '0, "buffer not empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
