`timescale 1ns/1ps
// ptp_master - backend IEEE 1588 delay request-response master.
//
// What it does: addresses the offset measurement to the frontend nodes one
// after the other (round robin over the nodes whose link is ok), one node
// every SYNC_PERIOD cycles, forever while `enable` is high. For each node it
//  1. sends the synch message: NB = TIME_W/8 addressed frames to sub-
//     addresses SA_SYNC+0..NB-1 carrying t1_g, least significant byte first.
//     t1_g is the global time in the cycle the encoder accepts the first
//     frame, and that frame carries byte 0 of exactly that value (the byte
//     is taken from the running counter while waiting for `accept`);
//  2. waits for the node's delay_req (a broadcast-format frame with command
//     CMD_DELAY_REQ on that node's uplink decoder) and time-stamps its
//     arrival, t4_g, with the global time at the decoder's start-of-frame
//     pulse;
//  3. sends the delay_resp message: NB addressed frames to SA_RESP+0..NB-1
//     carrying t4_g.
// A watchdog returns the FSM to idle if the delay_req does not come within
// WATCHDOG cycles (the link has no handshake, a lost frame would otherwise
// stall the procedure); `timeouts` counts these events.
//
// Interface: sof/rx_valid/rx_frame of the node decoders; req/fvalid/frame/
// grant/accept to the TTC encoder. Both time stamps (send at `accept`,
// receive at `sof`) are taken at points with fixed latency to the line, the
// same points as in the frontend, so these latencies cancel in the offset.
//
// From the paper: delay request-response protocol without follow-up,
// hardware time stamping, round-robin scheduling, periodic cycle, watchdog.
// This design's choices: message encoding in TTC frames, the time-stamp
// points, TIME_W, SYNC_PERIOD, WATCHDOG.
module ptp_master
  import ttc_pkg::*;
#(
  parameter int unsigned N_GCU       = 48,
  parameter int unsigned TIME_W      = 48,
  parameter int unsigned SYNC_PERIOD = 4096,
  parameter int unsigned WATCHDOG    = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic [N_GCU-1:0]  node_en,
  input  logic [TIME_W-1:0] global_time,
  input  logic [N_GCU-1:0]  sof,
  input  logic [N_GCU-1:0]  rx_valid,
  input  ttc_frame_t        rx_frame [N_GCU],
  output logic              req,
  output logic              fvalid,
  output ttc_frame_t        frame,
  input  logic              grant,
  input  logic              accept,
  output logic [TIME_W-1:0] t1_g,
  output logic [TIME_W-1:0] t4_g,
  output logic [$clog2(N_GCU+1)-1:0] node,
  output logic [31:0]       exchanges,
  output logic [31:0]       timeouts
);
  localparam int unsigned NB = TIME_W / 8;
  localparam int unsigned IW = $clog2(N_GCU + 1);
  localparam int unsigned TW = $clog2(((SYNC_PERIOD > WATCHDOG) ? SYNC_PERIOD : WATCHDOG) + 1);
  localparam int unsigned BW = $clog2(NB + 1);

  typedef enum logic [2:0] {S_WAIT, S_PICK, S_SYNC, S_WREQ, S_RESP} state_e;
  state_e state;

  logic [TW-1:0]     timer;
  logic [BW-1:0]     byte_idx;
  logic [TIME_W-1:0] sof_time;
  logic [IW-1:0]     next_node;
  logic              next_found;

  initial assert (TIME_W % 8 == 0 && NB <= 8) else $error("TIME_W must be a multiple of 8, at most 64");

  // next enabled node after the current one
  always_comb begin
    next_node  = node;
    next_found = 1'b0;
    for (int unsigned k = 1; k <= N_GCU; k++) begin
      int unsigned c;
      c = (int'(node) + k) % N_GCU;
      if (!next_found && node_en[c]) begin
        next_found = 1'b1;
        next_node  = IW'(c);
      end
    end
  end

  always_comb begin
    req    = 1'b0;
    fvalid = 1'b0;
    frame  = '0;
    frame.is_long = 1'b1;
    frame.addr    = ADDR_W'(node);
    if (state == S_SYNC) begin
      req           = 1'b1;
      fvalid        = grant;
      frame.subaddr = SA_SYNC + 8'(byte_idx);
      frame.data    = (byte_idx == 0) ? global_time[7:0] : t1_g[8*byte_idx +: 8];
    end else if (state == S_RESP) begin
      req           = 1'b1;
      fvalid        = grant;
      frame.subaddr = SA_RESP + 8'(byte_idx);
      frame.data    = t4_g[8*byte_idx +: 8];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_WAIT;
      timer     <= '0;
      byte_idx  <= '0;
      node      <= IW'(N_GCU - 1);
      t1_g      <= '0;
      t4_g      <= '0;
      sof_time  <= '0;
      exchanges <= '0;
      timeouts  <= '0;
    end else begin
      case (state)
        S_WAIT: begin
          if (timer != TW'(SYNC_PERIOD - 1)) timer <= timer + 1'b1;
          else if (enable)                   state <= S_PICK;
        end
        S_PICK: begin
          timer <= '0;
          if (next_found) begin
            node     <= next_node;
            byte_idx <= '0;
            state    <= S_SYNC;
          end else begin
            state <= S_WAIT;
          end
        end
        S_SYNC: if (accept) begin
          if (byte_idx == 0) t1_g <= global_time;
          byte_idx <= byte_idx + 1'b1;
          if (byte_idx == BW'(NB - 1)) begin
            timer <= '0;
            state <= S_WREQ;
          end
        end
        S_WREQ: begin
          timer <= timer + 1'b1;
          if (sof[node]) sof_time <= global_time;
          if (rx_valid[node] && !rx_frame[node].is_long && rx_frame[node].data == CMD_DELAY_REQ) begin
            t4_g     <= sof_time;
            byte_idx <= '0;
            state    <= S_RESP;
          end else if (timer == TW'(WATCHDOG - 1)) begin
            timeouts <= timeouts + 1;
            timer    <= '0;
            state    <= S_WAIT;
          end
        end
        S_RESP: if (accept) begin
          byte_idx <= byte_idx + 1'b1;
          if (byte_idx == BW'(NB - 1)) begin
            exchanges <= exchanges + 1;
            timer     <= '0;
            state     <= S_WAIT;
          end
        end
        default: state <= S_WAIT;
      endcase
    end
  end
endmodule
