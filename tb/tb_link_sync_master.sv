`timescale 1ns/1ps
// tb_link_sync_master - checks the backend eye-scan calibration FSM.
//
// Four uplinks are modelled at frame level. Each link has a random phase;
// its backend error counter counts while the link's current tap puts the
// sampling edge in a transition zone: taps with ((tap + phase) mod 51) < 8
// are bad (51 taps of 78 ps = one 4 ns symbol, 8 taps ~ 0.6 ns of jitter
// and skew). Link 2 is bad at every tap; link 3 never acknowledges. The
// frames the master sends are applied to the tap models (broadcast
// increment / reset to all links, addressed commands to one link, which
// then acknowledges with its tap count after 100 cycles).
// Checked: the scan covers taps 0..MAX_TAP; for each good link the chosen
// tap is the centre of the first widest error-free run closed by errors on
// both sides, the reported eye width is that run's width (43 taps), the
// link's tap ends at the chosen value and link_ok is set; link 2 and link 3
// end not ok; `done` pulses once and `busy` covers the run.
module tb_link_sync_master;
  import ttc_pkg::*;

  localparam int N = 4, MAXT = 124, SETTLE = 20, DWELL = 100, ACKT = 600;
  localparam int PER = 51, BAD = 8;

  logic         clk = 0, rst_n = 0, start = 0;
  logic [15:0]  err_count [N];
  logic [N-1:0] ack_valid = '0;
  logic [7:0]   ack_tap [N];
  logic         err_clr, busy, done;
  logic [N-1:0] link_ok;
  logic [7:0]   best_tap [N], eye_width [N], scan_tap;
  logic         req, fvalid, grant = 0, accept;
  ttc_frame_t   frame;
  int checks = 0, failures = 0;

  link_sync_master #(.N_GCU(N), .MAX_TAP(MAXT), .SETTLE(SETTLE), .DWELL(DWELL),
                     .ACK_TIMEOUT(ACKT), .ERR_W(16)) dut (
    .clk, .rst_n, .start, .err_count, .ack_valid, .ack_tap, .err_clr, .busy, .done,
    .link_ok, .best_tap, .eye_width, .scan_tap, .req, .fvalid, .frame, .grant, .accept
  );

  assign accept = fvalid;
  always #2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int phase [N];
  int tap [N];
  int max_tap_seen = 0, n_done = 0;

  function automatic bit bad(input int l, input int t);
    if (l == 2) return 1;
    return ((t + phase[l]) % PER) < BAD;
  endfunction

  // link models
  int gap = 0;
  always @(posedge clk) begin
    if (gap > 0) gap <= gap - 1;
    if (req && !grant && gap == 0 && $urandom_range(0, 3) == 0) grant <= 1;
    if (rst_n && done) n_done++;
    for (int l = 0; l < N; l++) begin
      if (err_clr) err_count[l] <= 0;
      else if (bad(l, tap[l]) && $urandom_range(0, 3) == 0) err_count[l] <= err_count[l] + 1;
      if (tap[l] > max_tap_seen) max_tap_seen = tap[l];
    end
    if (accept) begin
      grant <= 0;
      gap   <= frame.is_long ? 168 : 64;
      if (!frame.is_long) begin
        for (int l = 0; l < N; l++) begin
          if (frame.data == CMD_TAP_INCR && tap[l] < 124) tap[l]++;
          if (frame.data == CMD_TAP_DECR && tap[l] > 0) tap[l]--;
          if (frame.data == CMD_TAP_RST) tap[l] = 0;
          if (frame.data == CMD_ERR_RST) err_count[l] <= 0;
        end
      end else if (frame.subaddr == SA_TAP) begin
        automatic int l = int'(frame.addr);
        if (frame.data == TAP_INCR && tap[l] < 124) tap[l]++;
        if (frame.data == TAP_DECR && tap[l] > 0) tap[l]--;
        if (frame.data == TAP_RST) tap[l] = 0;
        if (l != 3) fork
          begin
            repeat (100) @(negedge clk);
            ack_tap[l] = 8'(tap[l]);
            ack_valid[l] = 1;
            @(negedge clk) ack_valid[l] = 0;
          end
        join_none
      end
    end
  end

  // expected choice: first widest closed run, centre = start + width/2
  task automatic expect_eye(input int l, output int centre, output int width);
    int rs, best_w, best_s;
    bit in_run, seen_bad;
    best_w = 0; best_s = 0; in_run = 0; seen_bad = 0; rs = 0;
    for (int t = 0; t <= MAXT; t++) begin
      if (!bad(l, t)) begin
        if (!in_run) begin in_run = 1; rs = t; end
      end else begin
        if (in_run && seen_bad && (t - rs) > best_w) begin best_w = t - rs; best_s = rs; end
        in_run = 0; seen_bad = 1;
      end
    end
    centre = best_s + best_w / 2;
    width  = best_w;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, w;
    for (int l = 0; l < N; l++) begin
      phase[l] = $urandom_range(0, PER - 1);
      tap[l] = $urandom_range(0, 124);
      err_count[l] = 0; ack_tap[l] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    start = 1;
    @(negedge clk) start = 0;
    check(busy, "busy during the run");
    wait (done);
    repeat (5) @(negedge clk);
    check(!busy, "busy cleared at the end");
    check(n_done == 1, $sformatf("done pulses once (%0d)", n_done));
    check(max_tap_seen == MAXT, $sformatf("scan reached tap %0d", max_tap_seen));
    for (int l = 0; l < N; l++) begin
      if (l == 2) begin
        check(!link_ok[l], "link without an error-free tap is not ok");
        continue;
      end
      expect_eye(l, c, w);
      check(best_tap[l] == 8'(c), $sformatf("link %0d: chosen tap %0d, expected %0d (phase %0d)", l, best_tap[l], c, phase[l]));
      check(eye_width[l] == 8'(w) && w == PER - BAD, $sformatf("link %0d: eye width %0d, expected %0d", l, eye_width[l], w));
      check(tap[l] == c, $sformatf("link %0d: link tap set to %0d", l, tap[l]));
      if (l == 3) check(!link_ok[l], "link without acknowledgement is not ok");
      else        check(link_ok[l], $sformatf("link %0d ok", l));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
