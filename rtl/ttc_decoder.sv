`timescale 1ns/1ps
// ttc_decoder - TTC receiver (the "TTC RX" box of both boards).
//
// What it does: takes the serial line sampled once per clock cycle, delays it
// by a programmable number of cycles (coarse delay), decodes the BiPhase Mark
// symbols, identifies which bit slots belong to channel A and which to
// channel B (channel bonding), deserializes channel-B frames, checks and
// corrects them with their Hamming code, and delivers broadcast commands and
// addressed writes. Addressed writes whose receiver number matches land in a
// small register file (REGs). An error counter counts line and frame errors;
// it is what the serial-link synchronization scans against the delay tap.
//
// How it works: a free-running 2-bit phase counter is compared with a 2-bit
// alignment hypothesis `align`; together they say which of the last two
// samples form the two halves of a channel-A or channel-B bit (bit value =
// first half XOR second half) and where the bit boundaries lie (the line must
// change level there). While not aligned the decoder tries one hypothesis for
// SEARCH_TIMEOUT cycles and moves to the next one unless a broadcast idle
// command is decoded without error; then the channel-aligned flag is set.
// Once aligned, LOSS_LIMIT errors (a missing transition at a bit boundary or
// a bad frame) with no good frame in between drop the flag and the search
// starts again. Only when aligned are frames delivered and `sof` (start of
// frame: the start bit of a channel-B frame has just been decoded) pulsed;
// time stamps of received PTP messages are taken on `sof`, so they do not
// depend on the frame length.
//
// Error counter: +1 per cycle with a boundary error or a corrected or bad
// frame while aligned, +1 per channel-B slot while not aligned, saturating;
// cleared by `err_rst` or by a broadcast error-reset command.
//
// Interface timing: `sof` comes 1 cycle after the start bit's second half
// passes the coarse delay; `rx_valid`/`rx_frame`/`wr_valid` come 2 cycles
// after the stop bit; `regs` is updated in the same cycle as `wr_valid`.
//
// From the paper: coarse delay (5-bit), channel bonding and deserializer,
// broadcast and addressed frame decoders, REGs, error counter, Hamming error
// correction, alignment on the first correctly decoded idle command, error
// reset command. This design's choices: the search/loss rules and their
// limits, what the error counter counts, the register-file size.
module ttc_decoder
  import ttc_pkg::*;
#(
  parameter int unsigned SEARCH_TIMEOUT = 2400,
  parameter int unsigned LOSS_LIMIT     = 8,
  parameter int unsigned N_REGS         = 32,
  parameter int unsigned ERR_W          = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rx_bit,
  input  logic [4:0]        coarse,
  input  logic [ADDR_W-1:0] my_addr,
  input  logic              addr_match_en,
  input  logic              err_rst,
  output logic              aligned,
  output logic              sof,
  output logic              rx_valid,
  output ttc_frame_t        rx_frame,
  output logic              wr_valid,
  output logic [ERR_W-1:0]  err_count,
  output logic [7:0]        regs [N_REGS]
);
  localparam int unsigned SW = $clog2(SEARCH_TIMEOUT + 1);
  localparam int unsigned LW = $clog2(LOSS_LIMIT + 1);
  localparam int unsigned RW = (N_REGS > 1) ? $clog2(N_REGS) : 1;

  // ---------------------------------------------------------------- symbols
  logic       d, s_prev;
  logic [1:0] ph, align, k;
  logic       bnd_err, b_strobe, b_bit;

  coarse_delay #(.MAX_DELAY(31)) u_coarse (.clk, .rst_n, .delay(coarse), .din(rx_bit), .dout(d));

  assign k        = ph - align;
  assign bnd_err  = ((k == 2'd0) || (k == 2'd2)) && (d == s_prev);
  assign b_strobe = (k == 2'd3);
  assign b_bit    = s_prev ^ d;

  // ----------------------------------------------------------- deserializer
  logic        busy, is_long, sof_i;
  logic [5:0]  n;
  logic [39:0] sr;
  logic        done, done_long;
  logic [40:0] done_w;
  logic        realign;

  // ------------------------------------------------------------ frame check
  ham_res_t    hres;
  logic        stop_ok, fmt_ok, frame_bad, frame_corr;
  ttc_frame_t  cf;

  always_comb begin
    if (done_long) begin
      hres    = ham_check(done_w[39:8], 32, done_w[6:1], 6, done_w[7]);
      fmt_ok  = done_w[40];
      cf.is_long = 1'b1;
      cf.addr    = hres.data[31:18];
      cf.subaddr = hres.data[15:8];
      cf.data    = hres.data[7:0];
    end else begin
      hres    = ham_check({24'd0, done_w[13:6]}, 8, {2'b00, done_w[4:1]}, 4, done_w[5]);
      fmt_ok  = !done_w[14];
      cf.is_long = 1'b0;
      cf.addr    = '0;
      cf.subaddr = '0;
      cf.data    = hres.data[7:0];
    end
    stop_ok    = done_w[0];
    frame_bad  = hres.fatal || !stop_ok || !fmt_ok;
    frame_corr = hres.corrected;
  end

  // E bit (word bit 17) and the constant 1 (bit 16) of an addressed frame
  logic e_bit;
  assign e_bit = done_long && hres.data[17] && hres.data[16];

  logic [SW-1:0] search_cnt;
  logic [LW-1:0] loss_cnt;
  logic          good_idle, err_event, cmd_err_rst;

  assign good_idle   = done && !frame_bad && !frame_corr && !cf.is_long && cf.data == CMD_IDLE;
  assign err_event   = aligned ? (bnd_err || (done && (frame_bad || frame_corr))) : b_strobe;
  assign cmd_err_rst = aligned && done && !frame_bad && !cf.is_long && cf.data == CMD_ERR_RST;
  assign realign     = (!aligned && search_cnt == SW'(SEARCH_TIMEOUT - 1)) ||
                       (aligned && (bnd_err || (done && frame_bad)) && loss_cnt == LW'(LOSS_LIMIT - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_prev     <= 1'b0;
      ph         <= '0;
      align      <= '0;
      busy       <= 1'b0;
      is_long    <= 1'b0;
      n          <= '0;
      sr         <= '0;
      sof_i      <= 1'b0;
      done       <= 1'b0;
      done_long  <= 1'b0;
      done_w     <= '1;
      aligned    <= 1'b0;
      search_cnt <= '0;
      loss_cnt   <= '0;
      sof        <= 1'b0;
      rx_valid   <= 1'b0;
      rx_frame   <= '0;
      wr_valid   <= 1'b0;
      err_count  <= '0;
      for (int unsigned r = 0; r < N_REGS; r++) regs[r] <= '0;
    end else begin
      s_prev   <= d;
      ph       <= ph + 2'd1;
      sof_i    <= 1'b0;
      done     <= 1'b0;
      sof      <= sof_i && aligned;
      rx_valid <= 1'b0;
      wr_valid <= 1'b0;

      // deserializer
      if (realign) begin
        busy <= 1'b0;
      end else if (b_strobe) begin
        if (!busy) begin
          if (!b_bit) begin
            busy  <= 1'b1;
            n     <= 6'd1;
            sof_i <= 1'b1;
          end
        end else begin
          sr <= {sr[38:0], b_bit};
          n  <= n + 6'd1;
          if (n == 6'd1) is_long <= b_bit;
          if ((n == 6'd15 && !is_long) || n == 6'd41) begin
            busy      <= 1'b0;
            done      <= 1'b1;
            done_long <= (n == 6'd41);
            done_w    <= {sr, b_bit};
          end
        end
      end

      // channel bonding
      if (!aligned) begin
        if (good_idle) begin
          aligned    <= 1'b1;
          loss_cnt   <= '0;
          search_cnt <= '0;
        end else if (realign) begin
          align      <= align + 2'd1;
          search_cnt <= '0;
        end else begin
          search_cnt <= search_cnt + 1'b1;
        end
      end else begin
        if (realign) begin
          aligned    <= 1'b0;
          search_cnt <= '0;
        end else if (done && !frame_bad) begin
          loss_cnt <= '0;
        end else if (bnd_err || (done && frame_bad)) begin
          loss_cnt <= loss_cnt + 1'b1;
        end
      end

      // frame delivery
      if (aligned && done && !frame_bad) begin
        rx_valid <= 1'b1;
        rx_frame <= cf;
        if (e_bit && (!addr_match_en || cf.addr == my_addr)) begin
          wr_valid <= 1'b1;
          regs[cf.subaddr[RW-1:0]] <= cf.data;
        end
      end

      // error counter
      if (err_rst || cmd_err_rst)               err_count <= '0;
      else if (err_event && err_count != '1)    err_count <= err_count + 1'b1;
    end
  end
endmodule
