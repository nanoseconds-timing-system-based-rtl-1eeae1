`timescale 1ns/1ps
// tb_ttc_decoder - drives the TTC receiver with a reference BMC line.
//
// The testbench builds the line itself (channel A = 0, channel B = frames
// from the reference layout, idle commands every 300 cycles) starting in a
// random phase, and checks:
//  - channel identification: `aligned` rises after an idle command;
//  - an addressed frame for this receiver is delivered and written to REGs,
//    one for another receiver is delivered but not written;
//  - a broadcast command is delivered;
//  - a frame with one flipped bit is corrected and counted as an error, a
//    frame with two flipped bits is dropped and counted;
//  - the error-reset command clears the error counter;
//  - the coarse delay adds exactly its setting to the start-of-frame latency;
//  - a half-bit slip of the line makes the receiver lose and regain
//    alignment.
module tb_ttc_decoder;
  import ttc_pkg::*;
  import tb_ref_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       rx_bit = 0;
  logic [4:0] coarse = '0;
  logic       aligned, sof, rx_valid, wr_valid;
  ttc_frame_t rx_frame;
  logic [15:0] err_count;
  logic [7:0] regs [32];
  int checks = 0, failures = 0;

  localparam logic [13:0] MY = 14'h0123;

  ttc_decoder #(.SEARCH_TIMEOUT(400), .LOSS_LIMIT(8)) dut (
    .clk, .rst_n, .rx_bit, .coarse, .my_addr(MY), .addr_match_en(1'b1), .err_rst(1'b0),
    .aligned, .sof, .rx_valid, .rx_frame, .wr_valid, .err_count, .regs
  );

  always #2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------- line generator
  bit   bq [$];            // channel-B bits waiting to be sent
  bit   level = 0;
  int   tph;
  bit [1:0] syms;
  int   cyc = 0;
  int   idle_cnt = 0;
  bit   slip = 0;
  int   last_start = -1;
  bit   fq [$];            // 1 for the start bit of a frame

  task automatic queue_frame(input bit is_long, input bit [13:0] a, input bit [7:0] s,
                             input bit [7:0] d, input int flip1, input int flip2);
    bit [41:0] f; int len;
    f = ref_frame(is_long, a, s, d, len);
    if (flip1 >= 0) f[41 - flip1] = ~f[41 - flip1];
    if (flip2 >= 0) f[41 - flip2] = ~f[41 - flip2];
    for (int j = 0; j < len; j++) begin
      bq.push_back(f[41 - j]);
      fq.push_back(j == 0);
    end
  endtask

  initial tph = $urandom_range(0, 3);

  always @(posedge clk) begin
    cyc++;
    if (slip) begin
      slip = 0;                       // repeat the current symbol: half-bit slip
    end else begin
      case (tph)
        0: begin syms = bmc_symbols(1'b0, level); level = syms[0]; rx_bit <= syms[1]; end
        2: begin
          bit b;
          if (bq.size() != 0) begin
            b = bq.pop_front();
            if (fq.pop_front()) last_start = cyc;
          end else begin
            b = 1'b1;
          end
          syms = bmc_symbols(b, level);
          level = syms[0];
          rx_bit <= syms[1];
        end
        default: rx_bit <= syms[0];
      endcase
      tph = (tph + 1) % 4;
    end
    idle_cnt++;
    if (idle_cnt >= 300 && bq.size() == 0) begin
      idle_cnt = 0;
      queue_frame(0, 0, 0, CMD_IDLE, -1, -1);
    end
  end

  // --------------------------------------------------------------- monitors
  ttc_frame_t got [$];
  int sof_cyc = -1;
  int realigns = 0;
  bit was_aligned = 0;
  always @(posedge clk) begin
    if (rx_valid) got.push_back(rx_frame);
    if (sof) sof_cyc = cyc;
    if (was_aligned && !aligned) realigns++;
    was_aligned = aligned;
  end

  task automatic wait_rx(input int maxc, output bit ok, output ttc_frame_t f);
    ok = 0;
    for (int i = 0; i < maxc; i++) begin
      @(posedge clk);
      while (got.size() != 0) begin
        f = got.pop_front();
        if (!(f.is_long == 0 && f.data == CMD_IDLE)) begin ok = 1; return; end
      end
    end
  endtask

  task automatic send_and_wait(input bit is_long, input bit [13:0] a, input bit [7:0] s,
                               input bit [7:0] d, input int fl1, input int fl2,
                               output bit ok, output ttc_frame_t f);
    wait (bq.size() == 0);
    @(posedge clk);
    got.delete();
    queue_frame(is_long, a, s, d, fl1, fl2);
    wait_rx(400, ok, f);
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok; ttc_frame_t f; int e0, lat0, lat6, t0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // channel identification
    t0 = cyc;
    wait (aligned == 1 || cyc - t0 > 4000);
    check(aligned, "channel aligned after idle commands");
    e0 = err_count;                   // errors counted during the search

    // addressed frame for me
    send_and_wait(1, MY, 8'h05, 8'h77, -1, -1, ok, f);
    check(ok && f.is_long && f.addr == MY && f.subaddr == 8'h05 && f.data == 8'h77, "addressed frame delivered");
    @(posedge clk);
    check(regs[5] == 8'h77, "register written");
    // addressed frame for someone else
    send_and_wait(1, 14'h0456, 8'h05, 8'h11, -1, -1, ok, f);
    check(ok && f.addr == 14'h0456 && f.data == 8'h11, "foreign frame delivered");
    @(posedge clk);
    check(regs[5] == 8'h77, "foreign frame not written");
    // broadcast
    send_and_wait(0, 0, 0, 8'h42, -1, -1, ok, f);
    check(ok && !f.is_long && f.data == 8'h42, "broadcast delivered");
    check(err_count == e0, $sformatf("no errors once aligned (%0d -> %0d)", e0, err_count));

    // single error in the data byte: corrected, counted
    e0 = err_count;
    send_and_wait(1, MY, 8'h06, 8'hA9, 30, -1, ok, f);
    check(ok && f.subaddr == 8'h06 && f.data == 8'hA9, "single error corrected");
    check(err_count == e0 + 1, $sformatf("single error counted (%0d)", err_count));
    // single error in a check bit of a broadcast frame
    send_and_wait(0, 0, 0, 8'h3F, 12, -1, ok, f);
    check(ok && f.data == 8'h3F, "check-bit error corrected");
    // double error: dropped, counted
    e0 = err_count;
    send_and_wait(1, MY, 8'h07, 8'h55, 20, 25, ok, f);
    check(!ok, "double error dropped");
    check(err_count == e0 + 1, $sformatf("double error counted (%0d)", err_count));
    check(regs[7] == 8'h00, "double-error frame not written");
    // error reset command
    send_and_wait(0, 0, 0, CMD_ERR_RST, -1, -1, ok, f);
    repeat (2) @(posedge clk);
    check(err_count == 0, "error reset command clears the counter");

    // coarse delay: start-of-frame latency grows by the setting
    send_and_wait(0, 0, 0, 8'h21, -1, -1, ok, f);
    lat0 = sof_cyc - last_start;
    // 6 cycles is 1.5 bit periods: the receiver has to find the channels again
    coarse = 5'd6;
    t0 = cyc;
    wait (!aligned || cyc - t0 > 1000);
    wait (aligned || cyc - t0 > 6000);
    check(aligned, "aligned again after the coarse-delay change");
    send_and_wait(0, 0, 0, 8'h22, -1, -1, ok, f);
    lat6 = sof_cyc - last_start;
    check(ok && f.data == 8'h22, "frame through coarse delay 6");
    check(lat6 - lat0 == 6, $sformatf("coarse delay adds 6 cycles (%0d -> %0d)", lat0, lat6));

    // half-bit slip: alignment lost and found again
    repeat (50) @(posedge clk);
    e0 = realigns;
    slip = 1;
    t0 = cyc;
    wait (realigns > e0 || cyc - t0 > 1000);
    check(realigns > e0, "alignment lost after slip");
    t0 = cyc;
    wait (aligned == 1 || cyc - t0 > 5000);
    check(aligned, "alignment regained after slip");
    send_and_wait(1, MY, 8'h09, 8'hE1, -1, -1, ok, f);
    check(ok && f.data == 8'hE1, $sformatf("frame after realignment ok=%0d data=%h al=%0d", ok, f.data, aligned));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
