// Two-chip loop, the measurement set-up of the link: chip 1 sends 32-bit
// events to chip 2 over one pair of LVDS lanes (Data, Parity), chip 2
// routes every received event back to its own transmitter, and chip 2 sends
// it to chip 1 over a second pair of lanes. Each lvds_link_top instance is
// one direction: a transmitter on one chip and the receiver on the other.
// The router of chip 2 forwards every event unchanged, so its four-phase
// handshake is plain wiring here. The chips have unrelated clocks: 10 ns on
// chip 1 and 8.4 ns on chip 2, so each link's receiver runs on the other
// chip's clock.
//
// A stream of random events is sent at the highest rate the source allows;
// the testbench checks that every event returns to chip 1 unchanged and in
// order, that link 1 runs at the steady event period of a single link
// (13 + TWK + (N-1)*(TD+1) + TD clocks of chip 1), that the faster link 2
// keeps pace with it, and that both links sleep when the loop is empty.
module tb_two_chip_loop;
  import lvds_link_pkg::*;
  localparam int unsigned N = EVENT_W, TWK = 4, TD = 2;
  localparam int unsigned PERIOD = 13 + TWK + (N - 1) * (TD + 1) + TD;
  localparam int unsigned NEV = 40;

  localparam real T1 = 10.0, T2 = 8.4;   // clock periods of chip 1 and chip 2, ns

  logic clk1 = 1'b0, clk2 = 1'b0, rst_n;
  // link 1: chip 1 -> chip 2, link 2: chip 2 -> chip 1
  logic         in1_r, in1_a, out1_r, out1_a, out2_r, out2_a;
  logic [N-1:0] in1_data, out1_data, out2_data;
  lvds_pair_t   d1, p1, d2, p2;
  logic         wk1, wk2, aw1, aw2;
  logic         unused_obs;
  logic [9:0]   obs;
  int checks = 0, failures = 0;

  lvds_link_top link1 (
    .tx_clk(clk1), .rx_clk(clk2), .rst_n, .in_r(in1_r), .in_data(in1_data), .in_a(in1_a),
    .out_r(out1_r), .out_data(out1_data), .out_a(out1_a),
    .lvds_d(d1), .lvds_p(p1), .tx_wkup(wk1), .rx_awake(aw1),
    .cq_empty(obs[0]), .tx_active(obs[1]), .in_full(obs[2]), .out_full(obs[3]), .rx_busy(obs[4]));

  // router of chip 2: received events go straight to its transmitter
  lvds_link_top link2 (
    .tx_clk(clk2), .rx_clk(clk1), .rst_n, .in_r(out1_r), .in_data(out1_data), .in_a(out1_a),
    .out_r(out2_r), .out_data(out2_data), .out_a(out2_a),
    .lvds_d(d2), .lvds_p(p2), .tx_wkup(wk2), .rx_awake(aw2),
    .cq_empty(obs[5]), .tx_active(obs[6]), .in_full(obs[7]), .out_full(obs[8]), .rx_busy(obs[9]));

  assign unused_obs = ^obs;

  always #(T1 / 2) clk1 = ~clk1;
  always #(T2 / 2) clk2 = ~clk2;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [N-1:0] expected[$];
  int n_back = 0;
  realtime wake1[$], wake2[$];
  logic wk1_q, wk2_q;
  realtime d;

  // each link's wake-up is seen on its transmitter's clock
  always @(posedge clk1) begin
    wk1_q <= wk1;
    if (rst_n && wk1 && !wk1_q) wake1.push_back($realtime);
  end
  always @(posedge clk2) begin
    wk2_q <= wk2;
    if (rst_n && wk2 && !wk2_q) wake2.push_back($realtime);
  end

  // chip 1 receiver sink: always ready
  initial begin
    out2_a = 1'b0;
    forever begin
      @(posedge clk1); #1;
      if (out2_r) begin
        check(expected.size() > 0 && out2_data == expected[0],
              $sformatf("event %0d came back as %h", n_back, out2_data));
        if (expected.size() > 0) void'(expected.pop_front());
        n_back++;
        out2_a = 1'b1;
        do begin @(posedge clk1); #1; end while (out2_r);
        out2_a = 1'b0;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk1);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in1_r = 0; in1_data = '0; rst_n = 0;
    repeat (3) @(posedge clk1);
    rst_n <= 1;
    repeat (3) @(posedge clk1);
    for (int k = 0; k < NEV; k++) begin
      #1 in1_data = N'({$urandom(), $urandom()});
      in1_r = 1'b1;
      expected.push_back(in1_data);
      do begin @(posedge clk1); #1; end while (!in1_a);
      in1_r = 1'b0;
      do begin @(posedge clk1); #1; end while (in1_a);
    end
    wait (expected.size() == 0);
    repeat (50) @(posedge clk1);
    check(n_back == NEV, $sformatf("%0d of %0d events came back", n_back, NEV));
    check(wake1.size() == NEV && wake2.size() == NEV, "one wake-up per event on each link");
    for (int k = 5; k < NEV; k++) begin
      d = wake1[k] - wake1[k-1];
      check(d > PERIOD * T1 - 0.5 && d < PERIOD * T1 + 0.5,
            $sformatf("link 1 period %0.1f ns, expected %0.1f", d, PERIOD * T1));
      // link 2 is fed by link 1's receiver through a clock crossing
      d = wake2[k] - wake2[k-1];
      check(d > PERIOD * T1 - 2 * T2 - 0.5 && d < PERIOD * T1 + 2 * T2 + 0.5,
            $sformatf("link 2 period %0.1f ns, expected %0.1f", d, PERIOD * T1));
    end
    d = (wake2[NEV-1] - wake2[5]) / (NEV - 6);
    check(d > PERIOD * T1 - 0.5 && d < PERIOD * T1 + 0.5,
          $sformatf("link 2 mean period %0.1f ns, expected %0.1f", d, PERIOD * T1));
    check(!wk1 && !wk2 && !aw1 && !aw2, "links not asleep after the loop emptied");
    check(d1 == 2'b00 && p1 == 2'b00 && d2 == 2'b00 && p2 == 2'b00, "LVDS lanes not at ground");
    $display("loop latency first event: %0.1f ns", wake2[0] - wake1[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
