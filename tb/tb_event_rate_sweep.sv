// Event-rate sweep of the LEDR / LVDS link at its default size: the activity
// behind the link's power-against-event-rate curve.
//
// The link is switched on only while a word is on the wires, so its power
// follows the event rate. This testbench sends 32-bit events from a source
// whose rate is tunable (random gaps around a chosen mean, like the spiking
// array that feeds the link on the test chip) at five rates, from back-to-back
// down to one event per ~16000 clocks, to an always-ready sink on an
// unrelated receiver clock. At every rate it checks that:
//   * every event arrives once, in order and unchanged;
//   * the drivers (and with them the receivers, which wake on the common
//     mode) are on for exactly 6 + TWK + (N-1)*(TD+1) + TD = 105 clocks per
//     event, so the on-time is proportional to the number of events;
//   * outside those windows both pairs sit at ground;
//   * the time from switch-on to the receiver's acknowledge (out.a) is the
//     same for every event, within the clock-crossing jitter.
// It prints the on-time fraction per rate, which grows linearly with it.
module tb_event_rate_sweep;
  import lvds_link_pkg::*;

  localparam int unsigned N      = EVENT_W;
  localparam int unsigned TWK    = 4;
  localparam int unsigned TD     = 2;
  localparam int unsigned ON     = 6 + TWK + (N - 1) * (TD + 1) + TD;
  localparam int unsigned PERIOD = 13 + TWK + (N - 1) * (TD + 1) + TD;
  localparam int unsigned NRATE  = 5;
  localparam int unsigned NEV    = 20;        // events per rate
  localparam real         TTX = 10.0, TRX = 7.4;   // clock periods, ns

  // mean gap between events, in transmitter clocks (0 = back-to-back)
  localparam int unsigned MEAN_GAP [NRATE] = '{0, 200, 1000, 4000, 16000};

  logic         tx_clk = 1'b0, rx_clk = 1'b0, rst_n;
  logic         in_r, in_a, out_r, out_a;
  logic [N-1:0] in_data, out_data;
  lvds_pair_t   lvds_d, lvds_p;
  logic         tx_wkup, rx_awake, cq_empty, tx_active, in_full, out_full, rx_busy;
  logic         unused_status;

  int checks = 0, failures = 0;

  lvds_link_top dut (
    .tx_clk, .rx_clk, .rst_n, .in_r, .in_data, .in_a, .out_r, .out_data, .out_a,
    .lvds_d, .lvds_p, .tx_wkup, .rx_awake, .cq_empty, .tx_active,
    .in_full, .out_full, .rx_busy
  );
  assign unused_status = cq_empty ^ tx_active ^ in_full ^ out_full ^ rx_busy;

  always #(TTX / 2) tx_clk = ~tx_clk;
  always #(TRX / 2) rx_clk = ~rx_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $realtime, what);
    end
  endtask

  logic [N-1:0] expected[$];
  int           n_recv = 0;

  // ---------------- sink: always ready ----------------
  initial begin
    out_a = 1'b0;
    forever begin
      @(posedge rx_clk);
      if (out_r) begin
        check(expected.size() > 0 && out_data == expected[0],
              $sformatf("word %0d: got %h", n_recv, out_data));
        if (expected.size() > 0) void'(expected.pop_front());
        n_recv++;
        out_a <= 1'b1;
        do @(posedge rx_clk); while (out_r);
        out_a <= 1'b0;
      end
    end
  end

  // ---------------- activity monitors ----------------
  longint  on_clocks = 0, all_clocks = 0, window = 0;
  int      n_wake = 0;
  logic    tx_wkup_q = 1'b0, out_a_q = 1'b0;
  realtime wake_t[$];
  realtime lat_min = 1.0e9, lat_max = 0.0;

  always @(posedge tx_clk) begin
    tx_wkup_q <= tx_wkup;
    if (rst_n) begin
      all_clocks++;
      if (tx_wkup) begin
        on_clocks++;
        window++;
        check(rx_awake, "receivers asleep while the drivers are on");
      end else begin
        check(lvds_d == 2'b00 && lvds_p == 2'b00 && !rx_awake,
              "link not at ground between events");
      end
      if (tx_wkup && !tx_wkup_q) begin
        n_wake++;
        wake_t.push_back($realtime);
      end
      if (!tx_wkup && tx_wkup_q) begin
        check(window == longint'(ON), $sformatf("drivers on for %0d clocks, expected %0d", window, ON));
        window = 0;
      end
    end
  end

  // switch-on to acknowledge, one per event in order
  always @(posedge rx_clk) begin
    realtime l;
    out_a_q <= out_a;
    if (out_a && !out_a_q) begin
      check(wake_t.size() > 0, "acknowledge without a wake-up");
      if (wake_t.size() > 0) begin
        l = $realtime - wake_t.pop_front();
        if (l < lat_min) lat_min = l;
        if (l > lat_max) lat_max = l;
      end
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (2000000) @(posedge tx_clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  initial begin
    longint on0, all0;
    int     wake0;
    real    duty [NRATE];
    real    rate [NRATE];
    in_r = 1'b0;
    in_data = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge tx_clk);
    rst_n <= 1'b1;
    repeat (3) @(posedge tx_clk);

    for (int r = 0; r < NRATE; r++) begin
      on0 = on_clocks; all0 = all_clocks; wake0 = n_wake;
      for (int k = 0; k < NEV; k++) begin
        if (MEAN_GAP[r] > 0) repeat ($urandom_range(MEAN_GAP[r] / 2, 3 * MEAN_GAP[r] / 2)) @(posedge tx_clk);
        in_data <= N'({$urandom(), $urandom()});
        in_r    <= 1'b1;
        @(posedge tx_clk);
        expected.push_back(in_data);
        while (!in_a) @(posedge tx_clk);
        in_r <= 1'b0;
        do @(posedge tx_clk); while (in_a);
      end
      wait (expected.size() == 0 && !tx_wkup);
      repeat (10) @(posedge tx_clk);
      check(n_wake - wake0 == NEV, $sformatf("rate %0d: %0d wake-ups for %0d events", r, n_wake - wake0, NEV));
      check(on_clocks - on0 == longint'(NEV * ON),
            $sformatf("rate %0d: on for %0d clocks, expected %0d", r, on_clocks - on0, NEV * ON));
      rate[r] = real'(NEV) / real'(all_clocks - all0);
      duty[r] = real'(on_clocks - on0) / real'(all_clocks - all0);
      $display("mean gap %6d clocks: %0.6f events/clock, on-time %7.3f %%, on-time per event %0.1f clocks",
               MEAN_GAP[r], rate[r], 100.0 * duty[r], duty[r] / rate[r]);
    end

    // on-time is proportional to event rate: the same clocks per event at every rate
    for (int r = 0; r < NRATE; r++)
      check(duty[r] / rate[r] > real'(ON) - 0.01 && duty[r] / rate[r] < real'(ON) + 0.01,
            $sformatf("rate %0d: on-time per event %0.2f, expected %0d", r, duty[r] / rate[r], ON));
    // back-to-back events run at the peak period
    check(rate[0] <= 1.0 / real'(PERIOD) + 1.0e-6, "back-to-back rate above the peak");
    check(n_recv == NRATE * NEV, $sformatf("received %0d of %0d words", n_recv, NRATE * NEV));
    $display("switch-on to out.a: %0.1f .. %0.1f ns", lat_min, lat_max);
    check(lat_max - lat_min <= 2.0 * TRX + TTX + 0.1, "switch-on to acknowledge latency varies");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
