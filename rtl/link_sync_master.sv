`timescale 1ns/1ps
// link_sync_master - backend side of the serial link synchronization
// ("delay control master").
//
// Problem: the backend samples N_GCU uplink streams with its own global
// clock, each in an unknown phase. A stream whose transitions fall near the
// sampling edge is captured unreliably. The frontend transmitters therefore
// carry a programmable fine delay, and this block finds, for every link, the
// delay setting that puts the backend's sampling edge in the middle of the
// data eye.
//
// How it works (one calibration run, started by `start`):
//  1. broadcast the error-reset command, then the tap-reset command;
//  2. for tap = 0..MAX_TAP: wait SETTLE cycles, clear the backend error
//     counters (`err_clr`), wait DWELL cycles, and read every link's error
//     counter; then broadcast a tap increment. All links are scanned at once.
//     For every link a tracker follows the runs of error-free taps and keeps
//     the widest run that is closed by errors on both sides (a whole eye) and
//     the widest run of any kind;
//  3. for each link in turn: take the widest closed run, or else the widest
//     run, and its centre tap; move that link's delay there with addressed
//     commands (tap decrements from MAX_TAP when that is shorter, else a tap
//     reset and increments); wait for the link's acknowledgement and set
//     link_ok[i] if the reported tap equals the centre. The last tap steps
//     can make the uplink receiver slip and realign, losing the
//     acknowledgement, so after ACK_TIMEOUT cycles without one the block
//     asks again (addressed TAP_NOP), up to three times. A link with no
//     error-free tap, or still no acknowledgement, stays not ok.
// `done` pulses at the end; `busy` is high during the run.
//
// From the paper: the FSM scans the bit period with a variable delay chain
// and finds the optimal sampling point from the error count against the tap
// count (eye scan), with tap increment / decrement / reset commands and a
// req/grant connection to the encoder. This design's choices: scanning all
// links in parallel with broadcast commands, the closed-run rule, the centre
// = start + width/2, the timing constants and the acknowledgement check.
module link_sync_master
  import ttc_pkg::*;
#(
  parameter int unsigned N_GCU       = 48,
  parameter int unsigned MAX_TAP     = 124,
  parameter int unsigned SETTLE      = 2048,
  parameter int unsigned DWELL       = 1024,
  parameter int unsigned ACK_TIMEOUT = 4096,
  parameter int unsigned ERR_W       = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [ERR_W-1:0] err_count [N_GCU],
  input  logic [N_GCU-1:0] ack_valid,
  input  logic [7:0]       ack_tap [N_GCU],
  output logic             err_clr,
  output logic             busy,
  output logic             done,
  output logic [N_GCU-1:0] link_ok,
  output logic [7:0]       best_tap [N_GCU],
  output logic [7:0]       eye_width [N_GCU],
  output logic [7:0]       scan_tap,
  output logic             req,
  output logic             fvalid,
  output ttc_frame_t       frame,
  input  logic             grant,
  input  logic             accept
);
  localparam int unsigned IW = (N_GCU > 1) ? $clog2(N_GCU) : 1;
  localparam int unsigned TW = $clog2(ACK_TIMEOUT + SETTLE + DWELL + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_BRST, S_TRST, S_SETTLE, S_DWELL, S_EVAL, S_TINC,
    S_PICK, S_SEND, S_ACK, S_DONE
  } state_e;
  state_e state;

  logic [TW-1:0] timer;
  logic [IW-1:0] node;
  logic          send_rst;
  logic [7:0]    cmds_left;
  logic [7:0]    send_cmd;
  logic [1:0]    retries;

  // per-link eye trackers
  logic [7:0] run_start [N_GCU];
  logic [7:0] run_len   [N_GCU];
  logic       seen_err  [N_GCU];
  logic [7:0] bc_start  [N_GCU];   // widest closed run
  logic [7:0] bc_len    [N_GCU];
  logic [7:0] ba_start  [N_GCU];   // widest run of any kind
  logic [7:0] ba_len    [N_GCU];

  // choice for the link being placed
  logic [7:0] pick_start, pick_len, pick_centre;
  always_comb begin
    if (bc_len[node] != 0) begin
      pick_start = bc_start[node];
      pick_len   = bc_len[node];
    end else if (run_len[node] > ba_len[node]) begin
      pick_start = run_start[node];
      pick_len   = run_len[node];
    end else begin
      pick_start = ba_start[node];
      pick_len   = ba_len[node];
    end
    pick_centre = pick_start + (pick_len >> 1);
  end

  always_comb begin
    req    = 1'b0;
    fvalid = 1'b0;
    frame  = '0;
    case (state)
      S_BRST: begin req = 1'b1; fvalid = grant; frame.data = CMD_ERR_RST;  end
      S_TRST: begin req = 1'b1; fvalid = grant; frame.data = CMD_TAP_RST;  end
      S_TINC: begin req = 1'b1; fvalid = grant; frame.data = CMD_TAP_INCR; end
      S_SEND: begin
        req           = 1'b1;
        fvalid        = grant;
        frame.is_long = 1'b1;
        frame.addr    = ADDR_W'(node);
        frame.subaddr = SA_TAP;
        frame.data    = send_rst ? TAP_RST : send_cmd;
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      timer     <= '0;
      node      <= '0;
      send_rst  <= 1'b0;
      cmds_left <= '0;
      send_cmd  <= TAP_INCR;
      retries   <= '0;
      err_clr   <= 1'b0;
      done      <= 1'b0;
      scan_tap  <= '0;
      link_ok   <= '0;
      for (int unsigned i = 0; i < N_GCU; i++) begin
        run_start[i] <= '0; run_len[i] <= '0; seen_err[i] <= 1'b0;
        bc_start[i]  <= '0; bc_len[i]  <= '0;
        ba_start[i]  <= '0; ba_len[i]  <= '0;
        best_tap[i]  <= '0; eye_width[i] <= '0;
      end
    end else begin
      err_clr <= 1'b0;
      done    <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state   <= S_BRST;
          link_ok <= '0;
          for (int unsigned i = 0; i < N_GCU; i++) begin
            run_start[i] <= '0; run_len[i] <= '0; seen_err[i] <= 1'b0;
            bc_start[i]  <= '0; bc_len[i]  <= '0;
            ba_start[i]  <= '0; ba_len[i]  <= '0;
          end
        end
        S_BRST: if (accept) state <= S_TRST;
        S_TRST: if (accept) begin
          state    <= S_SETTLE;
          scan_tap <= '0;
          timer    <= '0;
        end
        S_SETTLE: begin
          timer <= timer + 1'b1;
          if (timer == TW'(SETTLE - 1)) begin
            err_clr <= 1'b1;
            timer   <= '0;
            state   <= S_DWELL;
          end
        end
        S_DWELL: begin
          timer <= timer + 1'b1;
          if (timer == TW'(DWELL - 1)) state <= S_EVAL;
        end
        S_EVAL: begin
          for (int unsigned i = 0; i < N_GCU; i++) begin
            if (err_count[i] == '0) begin
              if (run_len[i] == 0) run_start[i] <= scan_tap;
              run_len[i] <= run_len[i] + 8'd1;
            end else begin
              if (run_len[i] != 0) begin
                if (seen_err[i] && run_len[i] > bc_len[i]) begin
                  bc_start[i] <= run_start[i];
                  bc_len[i]   <= run_len[i];
                end
                if (run_len[i] > ba_len[i]) begin
                  ba_start[i] <= run_start[i];
                  ba_len[i]   <= run_len[i];
                end
              end
              run_len[i]  <= '0;
              seen_err[i] <= 1'b1;
            end
          end
          if (scan_tap == 8'(MAX_TAP)) begin
            node  <= '0;
            state <= S_PICK;
          end else begin
            state <= S_TINC;
          end
        end
        S_TINC: if (accept) begin
          scan_tap <= scan_tap + 8'd1;
          timer    <= '0;
          state    <= S_SETTLE;
        end
        S_PICK: begin
          retries         <= 2'd3;
          best_tap[node]  <= pick_centre;
          eye_width[node] <= pick_len;
          timer           <= '0;
          if (pick_len == 0) begin
            state <= S_ACK;   // nothing to place; times out as not ok
          end else if (8'(MAX_TAP) - pick_centre < pick_centre) begin
            send_rst  <= 1'b0;
            send_cmd  <= (8'(MAX_TAP) == pick_centre) ? TAP_INCR : TAP_DECR;
            cmds_left <= (8'(MAX_TAP) == pick_centre) ? 8'd1 : 8'(MAX_TAP) - pick_centre;
            state     <= S_SEND;
          end else begin
            send_rst  <= 1'b1;
            send_cmd  <= TAP_INCR;
            cmds_left <= pick_centre;
            state     <= S_SEND;
          end
        end
        S_SEND: if (accept) begin
          if (send_rst) send_rst <= 1'b0;
          else          cmds_left <= cmds_left - 8'd1;
          if ((send_rst && cmds_left == 0) || (!send_rst && cmds_left == 8'd1)) begin
            timer <= '0;
            state <= S_ACK;
          end
        end
        S_ACK: begin
          timer <= timer + 1'b1;
          if (eye_width[node] != 0 && ack_valid[node] && ack_tap[node] == best_tap[node]) begin
            link_ok[node] <= 1'b1;
            state         <= (node == IW'(N_GCU - 1)) ? S_DONE : S_PICK;
            node          <= node + 1'b1;
          end else if (timer == TW'(ACK_TIMEOUT - 1)) begin
            if (eye_width[node] != 0 && retries != 2'd0) begin
              // the acknowledge can be lost while the uplink receiver is
              // realigning after the last tap step: ask again
              retries   <= retries - 2'd1;
              send_rst  <= 1'b0;
              send_cmd  <= TAP_NOP;
              cmds_left <= 8'd1;
              state     <= S_SEND;
            end else begin
              state <= (node == IW'(N_GCU - 1)) ? S_DONE : S_PICK;
              node  <= node + 1'b1;
            end
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
