`timescale 1ns/1ps
// tb_timing_system_top - end-to-end test of one backend and three frontends
// (the test setup of one master and three timing nodes), connected through
// behavioural cables of 3 m, 50 m and 80 m (5 ns/m), clock and data recovery
// and input capture (tb_link_channel).
//
// Sequence and checks:
//  1. reset (the frontends leave reset at random times, so their local
//     clocks start with different offsets); all downlink receivers must
//     find their channels;
//  2. link synchronization: the eye scan must see errors on every link, step
//     the frontends' fine delays, and end with every link ok, its tap at the
//     chosen centre and an eye of plausible width;
//  3. PTP: every frontend must complete exchanges and apply nonzero
//     corrections; afterwards each local time must agree with the global
//     time within 2 counts (8 ns) when both are read at the same instant;
//  4. pulses armed for the same time on all boards must come out within
//     8 ns of the backend's pulse (real time);
//  5. frontend 1's uplink is unplugged for a while: the backend receiver
//     must lose alignment, the backend and frontend PTP watchdogs must fire,
//     and after reconnection the link must realign and PTP resume.
// Mechanism counters (alignment, realignment, scan errors, tap steps,
// exchanges, corrections, timeouts on both sides, pulses, encoder stalls
// where a client waited for the link) are printed; any that stays at zero is
// a failure. Timing constants are shortened where the real values would
// only lengthen the run (SYNC_PERIOD, DWELL).
module tb_timing_system_top;
  localparam int N = 3, W = 48;
  localparam real NS_PER_M = 5.0;
  localparam real LEN_M [N] = '{3.0, 50.0, 80.0};

  logic              bec_clk = 0, bec_rst_n = 0;
  logic              bec_tx_line;
  logic [N-1:0]      bec_rx_sample;
  logic              calib_start = 0, ptp_enable = 0, bec_pulse_arm = 0;
  logic [W-1:0]      pulse_time = '0;
  logic              bec_pulse_out;
  logic [W-1:0]      global_time;
  logic              calib_busy, calib_done;
  logic [N-1:0]      link_ok, bec_rx_aligned;
  logic [7:0]        best_tap [N], eye_width [N];
  logic [15:0]       bec_err_count [N];
  logic [31:0]       bec_ptp_exchanges, bec_ptp_timeouts;
  logic [N-1:0]      gcu_clk, gcu_rst_n = '0, gcu_cdr_data, gcu_tx_line;
  logic [N-1:0]      gcu_ptp_enable = '0, gcu_pulse_arm = '0, gcu_pulse_out, gcu_aligned;
  logic [N-1:0]      cut = '0;
  logic [W-1:0]      local_time [N];
  logic [15:0]       gcu_err_count [N];
  logic [7:0]        gcu_tap_count [N];
  logic signed [W-1:0] gcu_last_offset [N];
  logic [31:0]       gcu_ptp_exchanges [N], gcu_ptp_corrections [N], gcu_ptp_timeouts [N];
  int checks = 0, failures = 0;

  timing_system_top #(
    .N_GCU(N), .TIME_W(W), .SYNC_PERIOD(1024), .DWELL(512)
  ) dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_ch
    tb_link_channel #(.DOWN_NS(LEN_M[i] * NS_PER_M), .UP_NS(LEN_M[i] * NS_PER_M)) u_ch (
      .bec_clk, .bec_tx_line, .gcu_clk(gcu_clk[i]), .gcu_cdr_data(gcu_cdr_data[i]),
      .gcu_tx_line(gcu_tx_line[i]), .cut(cut[i]), .bec_rx_sample(bec_rx_sample[i])
    );
  end

  always #2 bec_clk = ~bec_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------ mechanism counters
  int n_gcu_align = 0, n_bec_align = 0, n_realign = 0, n_scan_err = 0, n_tap_steps = 0;
  int n_stall = 0, n_bec_pulse = 0, n_gcu_pulse = 0;
  logic [N-1:0] gal_d = '0, bal_d = '0, gp_d = '0;
  logic         bp_d = 0;
  logic [7:0]   tap_d [N];
  realtime      bec_pulse_t, gcu_pulse_t [N];
  always @(posedge bec_clk) begin
    for (int i = 0; i < N; i++) begin
      if (gcu_aligned[i] && !gal_d[i]) n_gcu_align++;
      if (bec_rx_aligned[i] && !bal_d[i]) n_bec_align++;
      if (!bec_rx_aligned[i] && bal_d[i]) n_realign++;
      if (calib_busy && bec_err_count[i] != 0) n_scan_err++;
      if (gcu_rst_n[i] && gcu_tap_count[i] != tap_d[i]) n_tap_steps++;
      tap_d[i] = gcu_tap_count[i];
    end
    gal_d = gcu_aligned;
    bal_d = bec_rx_aligned;
    // a client of the backend transmitter waiting for the link (frame or
    // idle command in progress)
    if (bec_rst_n && |(dut.u_bec.req & ~dut.u_bec.grant)) n_stall++;
  end
  always @(posedge bec_pulse_out) begin n_bec_pulse++; bec_pulse_t = $realtime; end
  for (genvar i = 0; i < N; i++) begin : g_pmon
    always @(posedge gcu_pulse_out[i]) begin n_gcu_pulse++; gcu_pulse_t[i] = $realtime; end
  end

  initial begin
    #30000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint tdiff(input logic [W-1:0] a, input logic [W-1:0] b);
    return longint'(signed'(a - b));
  endfunction

  initial begin
    longint t0, d;
    int x0 [N];
    int bto0, gto0, ex0;
    for (int i = 0; i < N; i++) tap_d[i] = 0;
    repeat (5) @(posedge bec_clk);
    bec_rst_n = 1;
    for (int i = 0; i < N; i++) begin
      repeat ($urandom_range(100, 3000)) @(posedge bec_clk);
      gcu_rst_n[i] = 1;
    end

    // 1. channel identification on all links
    t0 = global_time;
    // (an uplink may still be unreadable here: its phase at the backend is
    // arbitrary until the link synchronization has run)
    wait (&gcu_aligned || global_time - t0 > 60000);
    check(&gcu_aligned, "all frontends aligned on the downlink");
    repeat (5000) @(posedge bec_clk);
    $display("frontends aligned by global time %0d; uplinks aligned before calibration: %b",
             global_time, bec_rx_aligned);

    // 2. link synchronization
    @(negedge bec_clk) calib_start = 1;
    @(negedge bec_clk) calib_start = 0;
    t0 = global_time;
    wait (calib_done || global_time - t0 > 1000000);
    check(calib_done, "calibration finished");
    for (int i = 0; i < N; i++) begin
      $display("link %0d: tap %0d eye %0d taps (%0.2f ns) ok %0d", i, best_tap[i], eye_width[i],
               eye_width[i] * 0.078, link_ok[i]);
      check(link_ok[i], $sformatf("link %0d ok", i));
      check(gcu_tap_count[i] == best_tap[i], $sformatf("link %0d tap set", i));
      check(eye_width[i] >= 20 && eye_width[i] <= 51, $sformatf("link %0d eye width %0d", i, eye_width[i]));
    end
    repeat (3000) @(posedge bec_clk);
    check(&bec_rx_aligned, "uplinks aligned after calibration");

    // 3. PTP
    ptp_enable = 1;
    gcu_ptp_enable = '1;
    t0 = global_time;
    wait ((gcu_ptp_exchanges[0] >= 3 && gcu_ptp_exchanges[1] >= 3 && gcu_ptp_exchanges[2] >= 3)
          || global_time - t0 > 200000);
    for (int i = 0; i < N; i++) begin
      check(gcu_ptp_exchanges[i] >= 3, $sformatf("frontend %0d exchanges %0d", i, gcu_ptp_exchanges[i]));
      check(gcu_ptp_corrections[i] >= 1, $sformatf("frontend %0d corrections %0d", i, gcu_ptp_corrections[i]));
    end
    repeat (200) @(posedge bec_clk);
    @(negedge bec_clk);
    for (int i = 0; i < N; i++) begin
      d = tdiff(local_time[i], global_time);
      $display("frontend %0d: local - global = %0d counts, last offset %0d", i, d, gcu_last_offset[i]);
      check(d >= -2 && d <= 2, $sformatf("frontend %0d synchronized (%0d counts)", i, d));
    end

    // 4. pulses at the same time on all boards
    @(negedge bec_clk);
    pulse_time = global_time + 2000;
    bec_pulse_arm = 1; gcu_pulse_arm = '1;
    @(negedge bec_clk);
    bec_pulse_arm = 0;
    repeat (200) @(negedge bec_clk);   // frontends arm on their own clocks
    gcu_pulse_arm = '0;
    repeat (2500) @(negedge bec_clk);
    check(n_bec_pulse == 1 && n_gcu_pulse == N, "one pulse per board");
    for (int i = 0; i < N; i++) begin
      $display("frontend %0d pulse - backend pulse = %0.3f ns", i, gcu_pulse_t[i] - bec_pulse_t);
      check(gcu_pulse_t[i] - bec_pulse_t <= 8.0 && bec_pulse_t - gcu_pulse_t[i] <= 8.0,
            $sformatf("frontend %0d pulse within 8 ns", i));
    end

    // 5. unplug frontend 1's uplink
    bto0 = bec_ptp_timeouts; gto0 = gcu_ptp_timeouts[1]; ex0 = gcu_ptp_exchanges[1];
    cut[1] = 1;
    repeat (60000) @(posedge bec_clk);
    check(!bec_rx_aligned[1], "backend lost the unplugged uplink");
    check(bec_ptp_timeouts > bto0, "backend PTP watchdog fired");
    check(gcu_ptp_timeouts[1] > gto0, "frontend PTP watchdog fired");
    check(gcu_ptp_exchanges[1] == ex0, "no exchanges while unplugged");
    cut[1] = 0;
    t0 = global_time;
    wait (bec_rx_aligned[1] || global_time - t0 > 20000);
    check(bec_rx_aligned[1], "uplink realigned after reconnection");
    t0 = global_time;
    wait (gcu_ptp_exchanges[1] > ex0 || global_time - t0 > 100000);
    check(gcu_ptp_exchanges[1] > ex0, "PTP resumed after reconnection");

    // mechanism summary
    $display("mechanisms: gcu_align=%0d bec_align=%0d realign=%0d scan_err=%0d tap_steps=%0d stall=%0d",
             n_gcu_align, n_bec_align, n_realign, n_scan_err, n_tap_steps, n_stall);
    $display("            bec_exchanges=%0d bec_timeouts=%0d gcu_timeouts=%0d pulses=%0d/%0d",
             bec_ptp_exchanges, bec_ptp_timeouts, gcu_ptp_timeouts[1], n_bec_pulse, n_gcu_pulse);
    check(n_gcu_align > 0, "mechanism: downlink alignment");
    check(n_bec_align > 0, "mechanism: uplink alignment");
    check(n_realign > 0, "mechanism: realignment");
    check(n_scan_err > 0, "mechanism: errors seen by the eye scan");
    check(n_tap_steps > 0, "mechanism: fine-delay tap steps");
    check(n_stall > 0, "mechanism: encoder stall");
    check(bec_ptp_exchanges > 0, "mechanism: PTP exchanges");
    check(bec_ptp_timeouts > 0, "mechanism: backend PTP timeout");
    check(gcu_ptp_timeouts[1] > 0, "mechanism: frontend PTP timeout");
    check(n_bec_pulse > 0 && n_gcu_pulse > 0, "mechanism: pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
