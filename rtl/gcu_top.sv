`timescale 1ns/1ps
// gcu_top - the timing logic of one frontend board (GCU).
//
// Everything here runs on the 250 MHz clock recovered by the board's clock
// and data recovery chip from the downlink, so it is locked in frequency to
// the backend's global clock (syntonized). The blocks:
//   ttc_decoder       downlink receiver (coarse delay COARSE, only frames
//                     addressed to gcu_addr are written to its registers);
//   ttc_encoder       uplink transmitter; sends an idle command every
//                     IDLE_PERIOD cycles so the backend can align and count
//                     errors; clients: link_sync_slave (0), ptp_slave (1);
//   fine_delay        four cascaded delay elements after the encoder
//                     (behavioural model of FPGA primitives);
//   link_sync_slave   executes the backend's tap commands on fine_delay;
//   ptp_slave         PTP timing node: time stamps, offset computation;
//   local_time_counter local time, corrected by the offset;
//   pulse_gen         output pulse at a programmed local time.
//
// Ports: `cdr_data` is the data output of the recovery chip, already retimed
// to `clk`; `tx_line` goes to the uplink cable driver. `ptp_enable` enables
// the clock synchronization procedure on this node.
module gcu_top
  import ttc_pkg::*;
#(
  parameter int unsigned TIME_W         = 48,
  parameter int unsigned IDLE_PERIOD    = 128,
  parameter int unsigned SEARCH_TIMEOUT = 2400,
  parameter int unsigned WATCHDOG       = 8192,
  parameter logic [4:0]  COARSE         = 5'b00000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [ADDR_W-1:0]        gcu_addr,
  input  logic                     cdr_data,
  output logic                     tx_line,
  input  logic                     ptp_enable,
  input  logic                     pulse_arm,
  input  logic [TIME_W-1:0]        pulse_time,
  output logic                     pulse_out,
  output logic [TIME_W-1:0]        local_time,
  output logic                     aligned,
  output logic [15:0]              err_count,
  output logic [7:0]               tap_count,
  output logic signed [TIME_W-1:0] last_offset,
  output logic [31:0]              ptp_exchanges,
  output logic [31:0]              ptp_corrections,
  output logic [31:0]              ptp_timeouts
);
  localparam int unsigned N_REGS = 32;

  // decoder
  logic       sof, rx_valid, wr_valid;
  ttc_frame_t rx_frame;
  logic [7:0] regs [N_REGS];

  ttc_decoder #(
    .SEARCH_TIMEOUT(SEARCH_TIMEOUT), .N_REGS(N_REGS), .ERR_W(16)
  ) u_rx (
    .clk, .rst_n,
    .rx_bit       (cdr_data),
    .coarse       (COARSE),
    .my_addr      (gcu_addr),
    .addr_match_en(1'b1),
    .err_rst      (1'b0),
    .aligned,
    .sof,
    .rx_valid,
    .rx_frame,
    .wr_valid,
    .err_count,
    .regs
  );

  // frames for this node: broadcast commands and addressed frames that
  // passed the address match (the decoder delivers every good frame)
  logic rx_mine;
  assign rx_mine = rx_valid && (!rx_frame.is_long || wr_valid);

  // encoder and its clients
  logic [1:0] req, fvalid, grant, accept;
  ttc_frame_t frame [2];
  logic       enc_line;

  ttc_encoder #(.N_CLIENTS(2), .IDLE_PERIOD(IDLE_PERIOD)) u_tx (
    .clk, .rst_n,
    .idle_en(1'b1),
    .cha_bit(1'b0),
    .req, .fvalid, .frame, .grant, .accept,
    .line   (enc_line)
  );

  // fine delay and its control
  logic [3:0] ce;
  logic       inc, ld;
  logic [4:0] cntvaluein;
  logic [4:0] cntvalueout [4];

  fine_delay u_fine (
    .clk, .ce, .inc, .ld, .cntvaluein, .cntvalueout,
    .din (enc_line),
    .dout(tx_line)
  );

  link_sync_slave u_lss (
    .clk, .rst_n,
    .my_addr    (gcu_addr),
    .rx_valid   (rx_mine),
    .rx_frame,
    .ce, .inc, .ld, .cntvaluein, .cntvalueout,
    .tap_count,
    .req   (req[0]),
    .fvalid(fvalid[0]),
    .frame (frame[0]),
    .grant (grant[0]),
    .accept(accept[0])
  );

  // PTP timing node and local time
  logic                     adj_valid;
  logic signed [TIME_W-1:0] adj;
  logic [TIME_W-1:0]        t1_g, t2_l, t3_l, t4_g;

  ptp_slave #(.TIME_W(TIME_W), .N_REGS(N_REGS), .WATCHDOG(WATCHDOG)) u_ptp (
    .clk, .rst_n,
    .enable    (ptp_enable),
    .local_time,
    .sof,
    .rx_valid  (rx_mine),
    .rx_frame, .regs,
    .req   (req[1]),
    .fvalid(fvalid[1]),
    .frame (frame[1]),
    .grant (grant[1]),
    .accept(accept[1]),
    .adj_valid, .adj,
    .t1_g, .t2_l, .t3_l, .t4_g,
    .exchanges  (ptp_exchanges),
    .corrections(ptp_corrections),
    .timeouts   (ptp_timeouts)
  );

  assign last_offset = adj;

  local_time_counter #(.TIME_W(TIME_W)) u_ltime (
    .clk, .rst_n, .adj_valid, .adj, .time_out(local_time)
  );

  pulse_gen #(.TIME_W(TIME_W)) u_pulse (
    .clk, .rst_n,
    .arm       (pulse_arm),
    .sched_time(pulse_time),
    .time_in   (local_time),
    .pulse     (pulse_out),
    .armed     ()
  );
endmodule
