`timescale 1ns/1ps
// tb_link_channel - behavioural model of everything between one backend and
// one frontend board: the two cables, the frontend's clock and data recovery
// chip and the backend's LVDS input capture flip-flop.
//
//  - downlink: bec_tx_line is delayed by DOWN_NS (cable). The recovered
//    clock gcu_clk is the backend clock delayed by DOWN_NS + 2 ns, so it
//    samples each 4 ns symbol in its middle; the recovered data passes
//    CDR_LAT retiming stages (the chip's latency) and leaves as
//    gcu_cdr_data.
//  - uplink: gcu_tx_line is delayed by UP_NS (cable); while `cut` is high
//    the line is held at 0 (unplugged cable). bec_rx_sample is the line as
//    captured at each backend clock edge: if the line changed within the
//    SETUP_NS before or HOLD_NS after the edge, the captured bit is random
//    (metastable capture), otherwise it is the line value.
// All delays are transport delays. For testbench use only.
module tb_link_channel #(
  parameter real DOWN_NS  = 15.0,
  parameter real UP_NS    = 15.0,
  parameter int  CDR_LAT  = 6,
  parameter real SETUP_NS = 0.3,
  parameter real HOLD_NS  = 0.3
) (
  input  logic bec_clk,
  input  logic bec_tx_line,
  output logic gcu_clk,
  output logic gcu_cdr_data,
  input  logic gcu_tx_line,
  input  logic cut,
  output logic bec_rx_sample
);
  logic              down_line = 0, up_line = 0, up_seen;
  logic [CDR_LAT-1:0] cdr_sr = '0;
  realtime           last_change = 0;

  initial bec_rx_sample = 0;

  // recovered clock: the backend clock (rising edges at 2 + 4k ns) shifted
  // by the cable delay plus half a symbol
  initial begin
    gcu_clk = 0;
    #(DOWN_NS + 4.0);
    forever begin
      gcu_clk = 1; #2.0;
      gcu_clk = 0; #2.0;
    end
  end

  // cable delays: every change is queued with its arrival time
  realtime dq_t [$], uq_t [$];
  logic    dq_v [$], uq_v [$];
  always @(bec_tx_line) begin dq_t.push_back($realtime + DOWN_NS); dq_v.push_back(bec_tx_line); end
  always @(gcu_tx_line) begin uq_t.push_back($realtime + UP_NS);   uq_v.push_back(gcu_tx_line); end
  initial forever begin
    wait (dq_t.size() != 0);
    if (dq_t[0] > $realtime) #(dq_t[0] - $realtime);
    down_line = dq_v.pop_front();
    void'(dq_t.pop_front());
  end
  initial forever begin
    wait (uq_t.size() != 0);
    if (uq_t[0] > $realtime) #(uq_t[0] - $realtime);
    up_line = uq_v.pop_front();
    void'(uq_t.pop_front());
    last_change = $realtime;
  end

  always @(posedge gcu_clk) cdr_sr <= {cdr_sr[CDR_LAT-2:0], down_line};
  assign gcu_cdr_data = cdr_sr[CDR_LAT-1];

  assign up_seen = cut ? 1'b0 : up_line;

  always @(posedge bec_clk) begin
    realtime edge_t;
    edge_t = $realtime;
    #(HOLD_NS);
    if (last_change > edge_t - SETUP_NS) bec_rx_sample = 1'($urandom_range(0, 1));
    else                                 bec_rx_sample = up_seen;
  end
endmodule
