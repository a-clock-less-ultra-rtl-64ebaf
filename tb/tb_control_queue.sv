// Testbench of the Control Queue. With DEPTH stored acknowledges the queue
// must grant exactly DEPTH requests, then withhold ack (empty) until an
// acknowledge returns from the receiver, and grant again one request per
// returned acknowledge. Two random phases, one from the empty queue and one
// from reset, compare with a credit counter kept by the testbench. ack must
// follow req by one clock when granted; a returned acknowledge is counted
// after the two-flop synchronizer.
module tb_control_queue;
  localparam int unsigned DEPTH = 4;
  logic clk = 1'b0, rst_n, req, ack, out_a, empty;
  int checks = 0, failures = 0;
  int credits;

  control_queue #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one four-phase request; returns whether it was granted within max clocks
  task automatic request(input int max_wait, output bit granted);
    int w = 0;
    req <= 1'b1;
    @(posedge clk);
    while (!ack && w < max_wait) begin @(posedge clk); w++; end
    #1 granted = ack;
    if (granted) check(w == 1, $sformatf("ack after %0d clocks, expected 1", w));
    if (granted) begin
      req <= 1'b0;
      @(posedge clk);
      @(posedge clk); #1 check(!ack, "ack did not fall after req");
    end
  endtask

  task automatic give_back();
    // out_a passes a two-flop synchronizer before it is counted
    out_a <= 1'b1; repeat (2) @(posedge clk);
    out_a <= 1'b0; repeat (2) @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit g;
    req = 0; out_a = 0; rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(!empty, "empty after reset");
    for (int k = 0; k < DEPTH; k++) begin
      request(5, g);
      check(g, $sformatf("request %0d not granted", k));
    end
    #1 check(empty, "not empty after DEPTH grants");
    request(20, g);
    check(!g, "granted while empty");
    give_back();   // req is still high: the returned acknowledge is taken
    @(posedge clk); #1 check(ack, "pending request not granted after acknowledge returned");
    req <= 1'b0;
    repeat (3) @(posedge clk);
    #1 check(empty && !ack, "queue should be empty again");
    // random phases against a model: first from the empty queue, then from
    // a fresh reset with all DEPTH acknowledges stored
    credits = 0;
    for (int k = 0; k < 800; k++) begin
      if (k == 400) begin
        rst_n <= 1'b0;
        repeat (2) @(posedge clk);
        rst_n <= 1'b1;
        @(posedge clk);
        credits = DEPTH;
      end
      if ($urandom_range(0, 1) == 1 && credits < DEPTH) begin
        give_back();
        credits++;
      end else begin
        request(4, g);
        check(g == (credits > 0), $sformatf("grant %0b with %0d credits", g, credits));
        if (g) credits--;
        else begin req <= 1'b0; repeat (2) @(posedge clk); end
      end
      #1 check(empty == (credits == 0), "empty flag disagrees with model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
