`timescale 1ns/1ps
// ptp_slave - frontend PTP timing node.
//
// What it does: answers the backend's offset measurement and corrects the
// local time counter. The sequence, on the local time scale:
//  1. the first synch frame (sub-address SA_SYNC) arrives: t2_l is the local
//     time at the decoder's start-of-frame pulse of that frame;
//  2. the last synch frame (SA_SYNC+NB-1) completes t1_g in the register
//     file; the node then sends delay_req (a broadcast-format frame with
//     command CMD_DELAY_REQ, no payload), and t3_l is the local time in the
//     cycle the encoder accepts it;
//  3. the last delay_resp frame (SA_RESP+NB-1) completes t4_g;
//  4. offset = ((t1_g - t2_l) + (t4_g - t3_l)) / 2, the division being an
//     arithmetic right shift by one bit (it rounds down: 23.5 becomes 23);
//  5. `adj_valid` pulses with `adj` = offset for the local time counter.
// A watchdog (WATCHDOG cycles) returns the FSM to idle when a message is
// lost. `corrections` counts non-zero offsets: frequent corrections point
// to a faulty node.
//
// Interface: sof/rx_valid/rx_frame/regs from the TTC decoder (which
// only passes addressed frames carrying this node's number);
// req/fvalid/frame/grant/accept to the TTC encoder; local_time from the local
// time counter. The arithmetic is modulo 2^TIME_W, the offset signed.
//
// From the paper: the eight-step procedure, equation (1), the 1-bit right
// shift, t1_g/t4_g read from the decoder registers, the watchdog. This
// design's choices: message encoding, time-stamp points, TIME_W, WATCHDOG.
module ptp_slave
  import ttc_pkg::*;
#(
  parameter int unsigned TIME_W   = 48,
  parameter int unsigned N_REGS   = 32,
  parameter int unsigned WATCHDOG = 8192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  input  logic [TIME_W-1:0]        local_time,
  input  logic                     sof,
  input  logic                     rx_valid,
  input  ttc_frame_t               rx_frame,
  input  logic [7:0]               regs [N_REGS],
  output logic                     req,
  output logic                     fvalid,
  output ttc_frame_t               frame,
  input  logic                     grant,
  input  logic                     accept,
  output logic                     adj_valid,
  output logic signed [TIME_W-1:0] adj,
  output logic [TIME_W-1:0]        t1_g,
  output logic [TIME_W-1:0]        t2_l,
  output logic [TIME_W-1:0]        t3_l,
  output logic [TIME_W-1:0]        t4_g,
  output logic [31:0]              exchanges,
  output logic [31:0]              corrections,
  output logic [31:0]              timeouts
);
  localparam int unsigned NB = TIME_W / 8;
  localparam int unsigned TW = $clog2(WATCHDOG + 1);

  typedef enum logic [2:0] {S_IDLE, S_SYNC, S_REQ, S_RESP, S_CALC} state_e;
  state_e state;

  logic [TW-1:0]     timer;
  logic [TIME_W-1:0] sof_time;
  logic              is_sync0, is_sync_last, is_resp_last;
  logic [TIME_W-1:0] t1_regs, t4_regs;
  logic signed [TIME_W-1:0] sum;

  initial assert (TIME_W % 8 == 0 && NB <= 8) else $error("TIME_W must be a multiple of 8, at most 64");

  assign is_sync0     = rx_valid && rx_frame.is_long && rx_frame.subaddr == SA_SYNC;
  assign is_sync_last = rx_valid && rx_frame.is_long && rx_frame.subaddr == SA_SYNC + 8'(NB - 1);
  assign is_resp_last = rx_valid && rx_frame.is_long && rx_frame.subaddr == SA_RESP + 8'(NB - 1);

  always_comb begin
    for (int unsigned b = 0; b < NB; b++) begin
      t1_regs[8*b +: 8] = regs[32'(SA_SYNC) + b];
      t4_regs[8*b +: 8] = regs[32'(SA_RESP) + b];
    end
  end

  assign sum = signed'((t1_g - t2_l) + (t4_g - t3_l));

  assign req           = (state == S_REQ);
  assign fvalid        = (state == S_REQ) && grant;
  assign frame.is_long = 1'b0;
  assign frame.addr    = '0;
  assign frame.subaddr = '0;
  assign frame.data    = CMD_DELAY_REQ;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      timer       <= '0;
      sof_time    <= '0;
      t1_g        <= '0;
      t2_l        <= '0;
      t3_l        <= '0;
      t4_g        <= '0;
      adj_valid   <= 1'b0;
      adj         <= '0;
      exchanges   <= '0;
      corrections <= '0;
      timeouts    <= '0;
    end else begin
      adj_valid <= 1'b0;
      if (sof) sof_time <= local_time;
      if (state != S_IDLE && state != S_CALC) timer <= timer + 1'b1;
      if (enable && is_sync0 && state != S_CALC) begin
        // a new synch message always restarts the exchange
        t2_l  <= sof_time;
        timer <= '0;
        state <= (NB == 1) ? S_REQ : S_SYNC;
        if (NB == 1) t1_g <= t1_regs;
      end else begin
        case (state)
          S_IDLE: timer <= '0;
          S_SYNC: if (is_sync_last) begin
            t1_g  <= t1_regs;
            state <= S_REQ;
          end
          S_REQ: if (accept) begin
            t3_l  <= local_time;
            state <= S_RESP;
          end
          S_RESP: if (is_resp_last) begin
            t4_g  <= t4_regs;
            state <= S_CALC;
          end
          S_CALC: begin
            adj       <= sum >>> 1;
            adj_valid <= 1'b1;
            exchanges <= exchanges + 1;
            if ((sum >>> 1) != 0) corrections <= corrections + 1;
            state     <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
        if (state != S_IDLE && state != S_CALC && timer == TW'(WATCHDOG - 1)) begin
          timeouts <= timeouts + 1;
          state    <= S_IDLE;
        end
      end
    end
  end
endmodule
