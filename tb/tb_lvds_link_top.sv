// End-to-end testbench of the LEDR / LVDS link at its default size
// (32-bit events, 4-word buffers, t_wk = 4 clocks, t_d = 2 clocks).
//
// The transmitter and receiver run on unrelated clocks (10 ns and 7.4 ns),
// as on two chips. A source process sends events through the four-phase input handshake, a
// sink process takes them from the output handshake after a programmable
// delay, and a scoreboard checks that every word arrives once, in order and
// unchanged. Phases:
//   1. back-to-back events with a fast sink: checks the event period against
//      the cycle count worked out from the ring's structure,
//      13 + TWK + (N-1)*(TD+1) + TD transmitter clocks;
//   2. a stalled sink: the Control Queue must run empty and stop the
//      transmitter after OUT_DEPTH + 1 words, no word may be lost;
//   3. random events, random gaps and random sink delays.
// It also checks that both LVDS pairs are at ground whenever the drivers
// sleep, and that at every wake-up the pairs show the previous word's LSB
// with P == D. Each mechanism (wake-up, self-sleep, receiver sleep, pre-
// stored acknowledge, queue stall, full input and output buffers) must occur.
module tb_lvds_link_top;
  import lvds_link_pkg::*;

  localparam int unsigned N         = EVENT_W;
  localparam int unsigned OUT_DEPTH = 4;
  localparam int unsigned TWK       = 4;
  localparam int unsigned TD        = 2;
  localparam int unsigned PERIOD    = 13 + TWK + (N - 1) * (TD + 1) + TD;

  logic         tx_clk = 1'b0;
  logic         rx_clk = 1'b0;
  logic         rst_n;
  logic         in_r, in_a, out_r, out_a;
  logic [N-1:0] in_data, out_data;
  lvds_pair_t   lvds_d, lvds_p;
  logic         tx_wkup, rx_awake, cq_empty, tx_active, in_full, out_full, rx_busy;

  int checks = 0, failures = 0;

  lvds_link_top dut (
    .tx_clk, .rx_clk, .rst_n, .in_r, .in_data, .in_a, .out_r, .out_data, .out_a,
    .lvds_d, .lvds_p, .tx_wkup, .rx_awake, .cq_empty, .tx_active,
    .in_full, .out_full, .rx_busy
  );

  // unrelated clocks for the two chips: 10 ns transmitter, 7.4 ns receiver
  always #5   tx_clk = ~tx_clk;
  always #3.7 rx_clk = ~rx_clk;

  logic [N-1:0] expected[$];
  logic [N-1:0] last_lsb_word;
  int           sink_delay = 0;
  bit           sink_hold  = 0;
  int           n_sent = 0, n_recv = 0;
  longint       cycle = 0;

  // mechanism counters
  int n_wake = 0, n_sleep = 0, n_rx_sleep = 0, n_prestored = 0;
  int n_stall = 0, n_in_full = 0, n_out_full = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ---------------- source ----------------
  task automatic send(input logic [N-1:0] w);
    in_data <= w;
    in_r    <= 1'b1;
    expected.push_back(w);
    n_sent++;
    do @(posedge tx_clk); while (!in_a);
    in_r <= 1'b0;
    do @(posedge tx_clk); while (in_a);
  endtask

  // ---------------- sink ----------------
  initial begin
    out_a = 1'b0;
    forever begin
      @(posedge rx_clk);
      if (out_r && !sink_hold) begin
        repeat (sink_delay) @(posedge rx_clk);
        while (sink_hold) @(posedge rx_clk);
        check(expected.size() > 0, "word received that was never sent");
        if (expected.size() > 0) begin
          check(out_data == expected[0],
                $sformatf("word %0d: got %h expected %h", n_recv, out_data, expected[0]));
          void'(expected.pop_front());
        end
        n_recv++;
        out_a <= 1'b1;
        do @(posedge rx_clk); while (out_r);
        out_a <= 1'b0;
      end
    end
  end

  // ---------------- monitors ----------------
  logic tx_wkup_q, rx_awake_q, out_a_q, cq_empty_q, in_full_q, out_full_q;
  int   started = 0, acked = 0;
  longint wake_cycles[$];

  always @(posedge tx_clk) begin
    cycle++;
    tx_wkup_q  <= tx_wkup;
    rx_awake_q <= rx_awake;
    out_a_q    <= out_a;
    cq_empty_q <= cq_empty;
    in_full_q  <= in_full;
    out_full_q <= out_full;
    if (rst_n) begin
      if (!tx_wkup) begin
        check(lvds_d == 2'b00 && lvds_p == 2'b00, "LVDS pairs not at ground while asleep");
      end
      if (tx_wkup && !tx_wkup_q) begin
        n_wake++;
        wake_cycles.push_back(cycle);
        // wake-up shows the previous word's LSB with P == D
        check(lvds_d.t == last_lsb_word[0] && lvds_p.t == last_lsb_word[0] &&
              lvds_d.f == ~lvds_d.t && lvds_p.f == ~lvds_p.t,
              "wake-up does not repeat the previous LSB with P == D");
        if (started > acked) n_prestored++;
        started++;
      end
      if (!tx_wkup && tx_wkup_q) n_sleep++;
      if (!rx_awake && rx_awake_q) n_rx_sleep++;
      if (out_a && !out_a_q) acked++;
      if (cq_empty && !cq_empty_q) n_stall++;
      if (in_full && !in_full_q) n_in_full++;
      if (out_full && !out_full_q) n_out_full++;
    end
  end

  // the LSB last put on the link: the word currently being sent
  always @(posedge tx_clk) if (dut.u_tx_ring.tx_r && !tx_wkup_q) last_lsb_word <= dut.u_tx_ring.tx_t;

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge tx_clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  initial begin
    longint t0;
    int     n_before;
    last_lsb_word = '0;
    in_r = 1'b0;
    in_data = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge tx_clk);
    rst_n <= 1'b1;
    repeat (3) @(posedge tx_clk);

    // ---- phase 1: throughput with a fast sink ----
    sink_delay = 0;
    for (int k = 0; k < 12; k++) send(N'({$urandom(), $urandom()}) ^ N'(k));
    wait (expected.size() == 0);
    repeat (20) @(posedge tx_clk);
    check(wake_cycles.size() == 12, $sformatf("phase 1: %0d wake-ups for 12 events", wake_cycles.size()));
    for (int k = 4; k < wake_cycles.size(); k++)
      check(wake_cycles[k] - wake_cycles[k-1] == longint'(PERIOD),
            $sformatf("event period %0d clocks, expected %0d",
                      wake_cycles[k] - wake_cycles[k-1], PERIOD));

    // ---- phase 2: stalled sink fills the output buffer, queue runs empty ----
    sink_hold = 1;
    n_before = n_wake;
    fork
      for (int k = 0; k < OUT_DEPTH + 6; k++) send(N'($urandom()));
    join_none
    repeat (40 * PERIOD) @(posedge tx_clk);
    // OUT_DEPTH acknowledges plus the word that waits for one in the RX ring
    check(n_wake - n_before == OUT_DEPTH + 1,
          $sformatf("stalled sink: %0d words sent, expected %0d", n_wake - n_before, OUT_DEPTH + 1));
    check(cq_empty, "control queue not empty while the sink stalls");
    sink_hold = 0;
    wait (expected.size() == 0 && !in_r);
    repeat (20) @(posedge tx_clk);

    // ---- phase 3: random traffic ----
    for (int k = 0; k < 60; k++) begin
      sink_delay = $urandom_range(0, 300);
      repeat ($urandom_range(0, 150)) @(posedge tx_clk);
      send(N'({$urandom(), $urandom()}));
    end
    t0 = cycle;
    wait (expected.size() == 0);
    repeat (50) @(posedge tx_clk);

    check(n_recv == n_sent, $sformatf("received %0d of %0d words", n_recv, n_sent));
    check(n_wake == n_sent, "one wake-up per word");
    check(!tx_wkup && !rx_awake, "link not asleep at the end");

    $display("mechanisms: wake=%0d sleep=%0d rx_sleep=%0d prestored_ack=%0d queue_stall=%0d in_full=%0d out_full=%0d",
             n_wake, n_sleep, n_rx_sleep, n_prestored, n_stall, n_in_full, n_out_full);
    check(n_wake > 0,      "wake-up never happened");
    check(n_sleep > 0,     "self-sleep never happened");
    check(n_rx_sleep > 0,  "receiver sleep never happened");
    check(n_prestored > 0, "pre-stored acknowledge never used");
    check(n_stall > 0,     "control-queue stall never happened");
    check(n_in_full > 0,   "input buffer never full");
    check(n_out_full > 0,  "output buffer never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
