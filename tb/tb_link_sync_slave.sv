`timescale 1ns/1ps
// tb_link_sync_slave - checks the frontend tap-command executor together
// with the fine delay chain it drives.
//
// The testbench hands decoded frames directly to the block (one every 64
// cycles, the shortest frame spacing) and keeps a model of the tap count:
// broadcast increment / decrement / reset, addressed commands for this node
// and for another node (must be ignored), increments beyond 124 and
// decrements below 0 (must saturate). After each command the tap count must
// match the model and the measured propagation delay of the chain must be
// tap count x 78 ps. Every addressed command for this node must be answered
// with exactly one acknowledge frame (SA_TAP_ACK, data = tap count) to this
// node's address; the grant is given after a random wait.
module tb_link_sync_slave;
  import ttc_pkg::*;

  localparam logic [13:0] MY = 14'h002A;

  logic       clk = 0, rst_n = 0;
  logic       rx_valid = 0;
  ttc_frame_t rx_frame = '0;
  logic [3:0] ce;
  logic       inc, ld;
  logic [4:0] cntvaluein;
  logic [4:0] cntvalueout [4];
  logic [7:0] tap_count;
  logic       req, fvalid, grant = 0, accept;
  ttc_frame_t frame;
  logic       din = 0, dout;
  int checks = 0, failures = 0;

  link_sync_slave dut (
    .clk, .rst_n, .my_addr(MY), .rx_valid, .rx_frame,
    .ce, .inc, .ld, .cntvaluein, .cntvalueout, .tap_count,
    .req, .fvalid, .frame, .grant, .accept
  );
  fine_delay u_fd (.clk, .ce, .inc, .ld, .cntvaluein, .cntvalueout, .din, .dout);

  assign accept = fvalid;            // single client: accept when offered

  always #2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // grant after a random wait while requested
  int acks = 0;
  logic [7:0] ack_data;
  always @(posedge clk) begin
    if (req && !grant && $urandom_range(0, 3) == 0) grant <= 1;
    if (accept) begin
      grant <= 0;
      acks++;
      ack_data = frame.data;
      if (!(frame.is_long && frame.addr == MY && frame.subaddr == SA_TAP_ACK)) begin
        failures++; $display("FAIL: acknowledge frame fields");
      end
    end
  end

  task automatic send(input bit is_long, input logic [13:0] a, input logic [7:0] d);
    @(negedge clk);
    rx_frame = '{is_long, a, is_long ? SA_TAP : 8'h00, d};
    rx_valid = 1;
    @(negedge clk);
    rx_valid = 0;
    repeat (63) @(negedge clk);
  endtask

  task automatic check_delay(input int model);
    realtime t0; real d;
    @(negedge clk);
    din = ~din;
    t0 = $realtime;
    if (dout != din) @(dout);
    d = $realtime - t0;
    check(d > model * 0.078 - 0.002 && d < model * 0.078 + 0.002,
          $sformatf("chain delay %0.3f ns for %0d taps", d, model));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model, acks_exp, op, kind;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(0, 0, CMD_TAP_RST);
    model = 0; acks_exp = 0;
    check(tap_count == 0, "reset to 0");
    // run to the top end: saturation at 124
    for (int i = 0; i < 130; i++) begin
      send(0, 0, CMD_TAP_INCR);
      if (model < 124) model++;
    end
    check(tap_count == 124, $sformatf("saturates at 124 (%0d)", tap_count));
    check(cntvalueout[0] == 31 && cntvalueout[3] == 31, "all four elements at 31");
    check_delay(model);
    // random commands
    for (int i = 0; i < 300; i++) begin
      op   = $urandom_range(0, 9);     // 0..4 incr, 5..8 decr, 9 reset
      kind = $urandom_range(0, 2);     // 0 broadcast, 1 addressed to me, 2 to another node
      if (kind == 0)
        send(0, 0, (op < 5) ? CMD_TAP_INCR : (op < 9) ? CMD_TAP_DECR : CMD_TAP_RST);
      else
        send(1, (kind == 1) ? MY : MY + 14'd1, (op < 5) ? TAP_INCR : (op < 9) ? TAP_DECR : TAP_RST);
      if (kind != 2) begin
        if (op < 5) begin if (model < 124) model++; end
        else if (op < 9) begin if (model > 0) model--; end
        else model = 0;
      end
      if (kind == 1) acks_exp++;
      check(tap_count == model, $sformatf("tap count %0d, model %0d", tap_count, model));
      if (kind == 1) check(acks == acks_exp && ack_data == 8'(model),
                           $sformatf("acknowledge %0d/%0d data %0d", acks, acks_exp, ack_data));
      if (i % 25 == 0) check_delay(model);
    end
    // decrement to 0 and beyond
    for (int i = 0; i < 130; i++) send(0, 0, CMD_TAP_DECR);
    check(tap_count == 0, "saturates at 0");
    check_delay(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
