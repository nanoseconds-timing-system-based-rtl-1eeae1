`timescale 1ns/1ps
// tb_timing_system_full - the whole system at its default size: one backend
// and 48 frontends, every timing constant at its default value.
//
// The frontends sit at cable lengths spread from 3 m to 80 m (5 ns/m) and
// leave reset at random times. The test takes the system through one
// complete start-up: all downlinks find their channels, the link
// synchronization scans and places all 48 uplinks (every link must end ok
// with an eye of plausible width), then PTP runs until the first eight
// frontends have completed an exchange; those must then agree with the
// global time within 2 counts (8 ns).
module tb_timing_system_full;
  localparam int N = 48, W = 48;

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
  logic [W-1:0]      local_time [N];
  logic [15:0]       gcu_err_count [N];
  logic [7:0]        gcu_tap_count [N];
  logic signed [W-1:0] gcu_last_offset [N];
  logic [31:0]       gcu_ptp_exchanges [N], gcu_ptp_corrections [N], gcu_ptp_timeouts [N];
  int checks = 0, failures = 0;

  timing_system_top dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_ch
    tb_link_channel #(.DOWN_NS(15.0 + 8.0 * i), .UP_NS(15.0 + 8.0 * i)) u_ch (
      .bec_clk, .bec_tx_line, .gcu_clk(gcu_clk[i]), .gcu_cdr_data(gcu_cdr_data[i]),
      .gcu_tx_line(gcu_tx_line[i]), .cut(1'b0), .bec_rx_sample(bec_rx_sample[i])
    );
  end

  always #2 bec_clk = ~bec_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, d;
    bit all8;
    repeat (5) @(posedge bec_clk);
    bec_rst_n = 1;
    for (int i = 0; i < N; i++) begin
      repeat ($urandom_range(10, 200)) @(posedge bec_clk);
      gcu_rst_n[i] = 1;
    end
    t0 = global_time;
    wait (&gcu_aligned || global_time - t0 > 60000);
    check(&gcu_aligned, "all 48 frontends aligned on the downlink");
    repeat (5000) @(posedge bec_clk);

    @(negedge bec_clk) calib_start = 1;
    @(negedge bec_clk) calib_start = 0;
    t0 = global_time;
    wait (calib_done || global_time - t0 > 2000000);
    check(calib_done, "calibration finished");
    $display("calibration done at global time %0d", global_time);
    for (int i = 0; i < N; i++) begin
      check(link_ok[i], $sformatf("link %0d ok (tap %0d eye %0d)", i, best_tap[i], eye_width[i]));
      check(eye_width[i] >= 20 && eye_width[i] <= 51, $sformatf("link %0d eye width %0d", i, eye_width[i]));
    end

    ptp_enable = 1;
    gcu_ptp_enable = '1;
    t0 = global_time;
    do begin
      @(posedge bec_clk);
      all8 = 1;
      for (int i = 0; i < 8; i++) if (gcu_ptp_exchanges[i] == 0) all8 = 0;
    end while (!all8 && global_time - t0 < 400000);
    check(all8, "first eight frontends completed an exchange");
    @(negedge bec_clk);
    for (int i = 0; i < 8; i++) begin
      d = longint'(signed'(local_time[i] - global_time));
      check(d >= -2 && d <= 2, $sformatf("frontend %0d synchronized (%0d counts)", i, d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
