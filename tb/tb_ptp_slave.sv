`timescale 1ns/1ps
// tb_ptp_slave - checks the frontend side of the PTP delay request-response
// exchange.
//
// The testbench plays the backend: it pulses `sof` and delivers the six
// synch frames (t1_g bytes written into the register file, LSB first),
// grants the delay_req after a random wait, then delivers the six
// delay_resp frames carrying t4_g. The local time runs freely. The global
// time stamps are built from a chosen local-clock error theta and one-way
// delays d_down / d_up:
//   t1_g = t2_l - d_down - theta,   t4_g = t3_l + d_up - theta
// (theta = lead of the local clock over the global clock), so the expected correction is ((t1-t2) + (t4-t3)) >>> 1. Cases: the three
// examples of the paper (offset +24, -26, and 23.5 rounded down to 23 with
// 10 ns of cable asymmetry), then random ones. Checked: the correction
// value, that it comes exactly once per exchange, the exchange / correction
// counters, the delay_req frame, the watchdog (a missing delay_resp counts a
// timeout and the node returns to idle) and that nothing happens while
// disabled.
module tb_ptp_slave;
  import ttc_pkg::*;

  localparam int W = 48, NB = 6, WD = 2000;

  logic        clk = 0, rst_n = 0, enable = 0;
  logic [W-1:0] local_time = 1000;
  logic        sof = 0, rx_valid = 0;
  ttc_frame_t  rx_frame = '0;
  logic [7:0]  regs [32];
  logic        req, fvalid, grant = 0, accept;
  ttc_frame_t  frame;
  logic        adj_valid;
  logic signed [W-1:0] adj;
  logic [W-1:0] t1_g, t2_l, t3_l, t4_g;
  logic [31:0] exchanges, corrections, timeouts;
  int checks = 0, failures = 0;

  ptp_slave #(.TIME_W(W), .N_REGS(32), .WATCHDOG(WD)) dut (
    .clk, .rst_n, .enable, .local_time, .sof, .rx_valid, .rx_frame, .regs,
    .req, .fvalid, .frame, .grant, .accept,
    .adj_valid, .adj, .t1_g, .t2_l, .t3_l, .t4_g, .exchanges, .corrections, .timeouts
  );

  assign accept = fvalid;

  always #2 clk = ~clk;
  always @(posedge clk) local_time <= local_time + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_adj = 0, n_acc = 0;
  logic signed [W-1:0] last_adj;
  logic [W-1:0] acc_time;
  always @(posedge clk) begin
    if (adj_valid) begin n_adj++; last_adj = adj; end
    if (req && !grant && $urandom_range(0, 7) == 0) grant <= 1;
    if (accept) begin
      grant <= 0;
      acc_time = local_time;
      n_acc++;
      if (!(frame.is_long == 0 && frame.data == CMD_DELAY_REQ)) begin
        failures++; $display("FAIL: delay_req frame");
      end
    end
  end

  // one addressed frame (sub-address sa) with register write
  task automatic deliver(input logic [7:0] sa, input logic [7:0] d, input bit with_sof);
    @(negedge clk);
    if (with_sof) begin sof = 1; @(negedge clk); sof = 0; end
    repeat (40) @(negedge clk);
    regs[sa] = d;                      // the decoder writes the register with rx_valid
    rx_frame = '{1'b1, 14'h0005, sa, d};
    rx_valid = 1;
    @(negedge clk);
    rx_valid = 0;
    repeat (20) @(negedge clk);
  endtask

  // a full exchange; d_down/d_up/theta in counts, resp=0 drops delay_resp
  task automatic exchange(input int theta, input int d_down, input int d_up, input bit resp,
                          output logic signed [W-1:0] expect_adj);
    logic [W-1:0] t1, t2, t3, t4;
    int a0;
    a0 = n_acc;
    // synch: the sof of the first frame stamps t2
    @(negedge clk);
    sof = 1;
    t2 = local_time;                   // sampled by the node at this clock edge
    @(negedge clk); sof = 0;
    t1 = t2 - W'(d_down) - W'(theta);
    repeat (40) @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      regs[SA_SYNC + b] = t1[8*b +: 8];
      rx_frame = '{1'b1, 14'h0005, SA_SYNC + 8'(b), t1[8*b +: 8]};
      rx_valid = 1;
      @(negedge clk) rx_valid = 0;
      repeat (168) @(negedge clk);
    end
    wait (n_acc > a0);
    @(negedge clk);
    t3 = acc_time;
    t4 = t3 + W'(d_up) - W'(theta);
    repeat (100) @(negedge clk);
    if (resp) begin
      for (int b = 0; b < NB; b++) begin
        regs[SA_RESP + b] = t4[8*b +: 8];
        rx_frame = '{1'b1, 14'h0005, SA_RESP + 8'(b), t4[8*b +: 8]};
        rx_valid = 1;
        @(negedge clk) rx_valid = 0;
        repeat (168) @(negedge clk);
      end
    end
    expect_adj = (signed'(t1 - t2) + signed'(t4 - t3)) >>> 1;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [W-1:0] e;
    int n0, x0, c0, to0;
    int thetas [$], dd [$], du [$];
    for (int i = 0; i < 32; i++) regs[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // disabled: frames are ignored
    deliver(SA_SYNC, 8'h11, 1);
    repeat (200) @(negedge clk);
    check(!req && exchanges == 0, "nothing happens while disabled");
    enable = 1;
    // the paper's examples (counts of 4 ns): theta is the local clock's
    // lead over the global clock; 10 ns asymmetry = 2.5 counts is modelled
    // as 3 vs 2 counts less 0.5 -> the sum is odd and rounds down
    thetas = '{-24, 26, -23};  dd = '{5, 7, 5};  du = '{5, 7, 6};
    for (int i = 0; i < 20; i++) begin
      thetas.push_back($urandom_range(0, 4000) - 2000);
      dd.push_back($urandom_range(1, 200));
      du.push_back($urandom_range(1, 200));
    end
    foreach (thetas[i]) begin
      n0 = n_adj; x0 = exchanges; c0 = corrections;
      exchange(thetas[i], dd[i], du[i], 1, e);
      repeat (5) @(negedge clk);
      check(n_adj == n0 + 1, "one correction per exchange");
      check(last_adj == e, $sformatf("correction %0d, expected %0d", last_adj, e));
      check(exchanges == x0 + 1, "exchange counted");
      check(corrections == c0 + ((e != 0) ? 1 : 0), "nonzero correction counted");
      if (i == 0) check(last_adj == 24, "paper example: offset +24");
      if (i == 1) check(last_adj == -26, "paper example: offset -26");
      if (i == 2) check(last_adj == 23, $sformatf("paper example: 23.5 -> 23 (%0d)", last_adj));
    end
    // lost delay_resp: watchdog
    to0 = timeouts; n0 = n_adj;
    exchange(10, 5, 5, 0, e);
    repeat (WD + 10) @(negedge clk);
    check(timeouts == to0 + 1, "missing delay_resp counted as timeout");
    check(n_adj == n0, "no correction without delay_resp");
    // recovers afterwards
    exchange(-7, 9, 9, 1, e);
    repeat (5) @(negedge clk);
    check(last_adj == e && e == 7, $sformatf("exchange after timeout (%0d)", last_adj));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
