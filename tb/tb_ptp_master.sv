`timescale 1ns/1ps
// tb_ptp_master - checks the backend side of the PTP delay request-response
// exchange.
//
// Four frontends are modelled by the testbench at frame level: they receive
// the master's frames through a single-client grant/accept handshake and
// answer the last synch byte with a delay_req (a `sof` pulse for the node,
// then the decoded short frame a few cycles later), except node 2 which
// never answers. Node 3 is disabled. Checked: nodes are served in
// round-robin order over the enabled ones only; the synch bytes carry the global time of the first byte's
// accept (t1_g, LSB first); the delay_resp bytes carry the global time of
// the delay_req's start of frame (t4_g); a silent node is counted as a
// timeout after WATCHDOG cycles; exchanges are counted.
module tb_ptp_master;
  import ttc_pkg::*;

  localparam int N = 4, W = 48, NB = 6, SP = 300, WD = 3000;

  logic         clk = 0, rst_n = 0, enable = 0;
  logic [N-1:0] node_en = 4'b0111;
  logic [W-1:0] global_time = 48'h0000_1234_5000;
  logic [N-1:0] sof = '0, rx_valid = '0;
  ttc_frame_t   rx_frame [N];
  logic         req, fvalid, grant = 0, accept;
  ttc_frame_t   frame;
  logic [W-1:0] t1_g, t4_g;
  logic [2:0]   node;
  logic [31:0]  exchanges, timeouts;
  int checks = 0, failures = 0;

  ptp_master #(.N_GCU(N), .TIME_W(W), .SYNC_PERIOD(SP), .WATCHDOG(WD)) dut (
    .clk, .rst_n, .enable, .node_en, .global_time, .sof, .rx_valid, .rx_frame,
    .req, .fvalid, .frame, .grant, .accept, .t1_g, .t4_g, .node, .exchanges, .timeouts
  );

  assign accept = fvalid;
  always #2 clk = ~clk;
  always @(posedge clk) global_time <= global_time + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // downlink side: grant after a random wait, one frame per 168 cycles
  int gap = 0;
  always @(posedge clk) begin
    if (gap > 0) gap <= gap - 1;
    if (req && !grant && gap == 0 && $urandom_range(0, 3) == 0) grant <= 1;
    if (accept) begin grant <= 0; gap <= 168; end
  end

  // frame log
  ttc_frame_t   fr [$];
  logic [W-1:0] fr_time [$];
  always @(posedge clk) if (accept) begin fr.push_back(frame); fr_time.push_back(global_time); end

  // frontends: answer the last synch byte
  logic [W-1:0] sof_gt [$];
  int           sof_node [$];
  always @(posedge clk) begin
    if (accept && frame.is_long && frame.subaddr == SA_SYNC + 8'(NB - 1) && frame.addr != 2) begin
      automatic int n = int'(frame.addr);
      fork
        begin
          repeat ($urandom_range(200, 400)) @(negedge clk);
          sof[n] = 1;
          sof_gt.push_back(global_time);
          sof_node.push_back(n);
          @(negedge clk) sof[n] = 0;
          repeat (62) @(negedge clk);
          rx_frame[n] = '{1'b0, 14'd0, 8'd0, CMD_DELAY_REQ};
          rx_valid[n] = 1;
          @(negedge clk) rx_valid[n] = 0;
        end
      join_none
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_node, k, nsync, nresp, last_sync_start, nex;
    logic [W-1:0] t1, t4;
    for (int i = 0; i < N; i++) rx_frame[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2 * SP) @(posedge clk);
    check(fr.size() == 0, "no frames while disabled");
    enable = 1;
    wait (exchanges + timeouts >= 7);
    repeat (2000) @(posedge clk);
    enable = 0;
    // walk the log: exchanges node 0, 1, 2 (timeout), 0, 1, 2, 0 ...
    exp_node = 0; k = 0; nex = 0; last_sync_start = -1;
    while (k < fr.size()) begin
      check(fr[k].is_long && fr[k].addr == 14'(exp_node) && fr[k].subaddr == SA_SYNC,
            $sformatf("exchange %0d starts with synch to node %0d (got %0d/%h)", nex, exp_node, fr[k].addr, fr[k].subaddr));
      t1 = fr_time[k];
      for (int b = 0; b < NB && k < fr.size(); b++, k++)
        check(fr[k].subaddr == SA_SYNC + 8'(b) && fr[k].data == t1[8*b +: 8],
              $sformatf("synch byte %0d = t1 byte", b));
      if (exp_node != 2 && k < fr.size()) begin
        // the sof log entry for this node, in order
        while (sof_node.size() != 0 && sof_node[0] != exp_node) begin void'(sof_node.pop_front()); void'(sof_gt.pop_front()); end
        if (sof_gt.size() != 0) begin
          t4 = sof_gt.pop_front(); void'(sof_node.pop_front());
          for (int b = 0; b < NB && k < fr.size(); b++, k++)
            check(fr[k].addr == 14'(exp_node) && fr[k].subaddr == SA_RESP + 8'(b) && fr[k].data == t4[8*b +: 8],
                  $sformatf("delay_resp byte %0d = t4 byte", b));
        end
      end
      exp_node = (exp_node + 1) % 3;
      nex++;
    end
    check(nex >= 7, $sformatf("exchanges seen %0d", nex));
    check(timeouts >= 2, $sformatf("silent node timed out (%0d)", timeouts));
    check(exchanges >= 4, $sformatf("exchanges counted (%0d)", exchanges));
    check(nex - (int'(exchanges) + int'(timeouts)) inside {0, 1}, "every exchange ends as exchange or timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
