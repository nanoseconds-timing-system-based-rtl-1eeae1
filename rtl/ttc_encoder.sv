`timescale 1ns/1ps
// ttc_encoder - TTC transmitter (the "TTC TX" box of both boards).
//
// What it does: formats broadcast (16-bit) and addressed (42-bit) frames with
// their Hamming check bits, serializes them on channel B, time-division
// multiplexes channel A and channel B bit by bit, and BiPhase Mark encodes the
// result onto a single serial line at one symbol per clock cycle
// (250 MBd at 250 MHz). When idle commands are enabled it sends a broadcast
// idle command every IDLE_PERIOD cycles; receivers use it to identify the
// channels. A round-robin req/grant arbiter (ttc_arbiter) lets several
// clients share the link.
//
// How it works: a free-running 2-bit phase counter divides the line into
// 4-cycle slots: phase 0 starts a channel-A bit, phase 2 a channel-B bit. A
// new frame is loaded into the 42-bit shift register only at phase 1, when the
// shift register is empty, so the start bit of every frame reaches the line a
// fixed number of cycles after the client sees `accept`. Hardware time stamps
// use the `accept` cycle as the send time; the fixed latency cancels in the
// PTP offset because both ends use the same encoder and decoder. Channel B
// carries 1 between frames. Client frames take precedence over the idle
// command.
//
// Interface: client c holds req[c] while it owns the link and presents
// fvalid[c]/frame[c]; the frame is taken in the cycle where accept[c] is 1.
// Channel A carries `cha_bit`, reserved in this system and tied to 0.
//
// From the paper: TDM of channels A and B, the frame lengths, Hamming coding,
// BMC, broadcast/addressed generators, req/grant clients, periodic idle.
// This design's choices: the frame bit layout (taken from the CERN TTC
// format), the slot timing, the load-at-phase-1 rule, the idle period.
module ttc_encoder
  import ttc_pkg::*;
#(
  parameter int unsigned N_CLIENTS   = 2,
  parameter int unsigned IDLE_PERIOD = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 idle_en,
  input  logic                 cha_bit,
  input  logic [N_CLIENTS-1:0] req,
  input  logic [N_CLIENTS-1:0] fvalid,
  input  ttc_frame_t           frame [N_CLIENTS],
  output logic [N_CLIENTS-1:0] grant,
  output logic [N_CLIENTS-1:0] accept,
  output logic                 line
);
  localparam int unsigned IDW = $clog2(IDLE_PERIOD + 1);

  logic [1:0]          ph;
  logic [LONG_LEN-1:0] sreg;
  logic [5:0]          bits_left;
  logic [IDW-1:0]      idle_cnt;
  logic                idle_due;
  logic                load_slot;
  logic                client_go;
  ttc_frame_t          sel_frame;
  logic                bit_start, bit_val;

  ttc_arbiter #(.N(N_CLIENTS)) u_arb (.clk, .rst_n, .req, .grant);

  assign load_slot = (ph == 2'd1) && (bits_left == 6'd0);
  assign client_go = load_slot && ((grant & fvalid) != '0);
  assign accept    = client_go ? (grant & fvalid) : '0;

  always_comb begin
    sel_frame = '0;
    for (int unsigned c = 0; c < N_CLIENTS; c++)
      if (grant[c]) sel_frame = frame[c];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ph        <= '0;
      sreg      <= '1;
      bits_left <= '0;
      idle_cnt  <= '0;
      idle_due  <= 1'b0;
    end else begin
      ph <= ph + 2'd1;
      if (idle_cnt >= IDW'(IDLE_PERIOD - 1)) begin
        idle_cnt <= '0;
        idle_due <= idle_en;
      end else begin
        idle_cnt <= idle_cnt + 1'b1;
      end
      if (client_go) begin
        sreg      <= frame_bits(sel_frame);
        bits_left <= sel_frame.is_long ? 6'(LONG_LEN) : 6'(SHORT_LEN);
      end else if (load_slot && idle_due) begin
        sreg      <= frame_bits('{is_long: 1'b0, addr: '0, subaddr: '0, data: CMD_IDLE});
        bits_left <= 6'(SHORT_LEN);
        idle_due  <= 1'b0;
      end else if (ph == 2'd2 && bits_left != 0) begin
        sreg      <= {sreg[LONG_LEN-2:0], 1'b1};
        bits_left <= bits_left - 1'b1;
      end
    end
  end

  always_comb begin
    bit_start = (ph == 2'd0) || (ph == 2'd2);
    if (ph == 2'd0) bit_val = cha_bit;
    else            bit_val = (bits_left != 0) ? sreg[LONG_LEN-1] : 1'b1;
  end

  bmc_encoder u_bmc (.clk, .rst_n, .bit_start, .bit_val, .line);

  // A client only gets a frame taken while it is granted.
  a_accept_granted: assert property (@(posedge clk) disable iff (!rst_n) (accept & ~grant) == '0);
endmodule
