`timescale 1ns/1ps
// ttc_pkg - shared types, constants and Hamming functions of the timing system.
//
// The serial link is a TTC-style link: the line carries BiPhase Mark (BMC)
// symbols at 250 MBd (one symbol per 250 MHz clock cycle), i.e. 125 Mb/s of
// data bits, and the data bits alternate between two time-division
// multiplexed channels, A and B. One channel-B bit therefore lasts four clock
// cycles. Channel A is reserved and always sent as 0. Channel B idles at 1 and
// carries two kinds of frame, sent MSB first:
//
//   broadcast (16 bit): 0 0 CMD[7:0] CHK[4:0] 1
//   addressed (42 bit): 0 1 ADDR[13:0] E 1 SUBADDR[7:0] DATA[7:0] CHK[6:0] 1
//
// The frame lengths, and the header / receiver number / internal address /
// data fields, follow the paper; the exact bit layout is that of the CERN TTC
// system on which the link is based. CHK is a single-error-correcting,
// double-error-detecting (SEC-DED) Hamming code computed here (the CERN
// check-bit equations are not given in the paper): the protected bits are
// placed at the non-power-of-two positions 3,5,6,7,9,... of a Hamming word,
// check bit j is the XOR of the bits whose position has bit j set, and the
// last check bit is the overall parity of data and check bits.
//
// Command codes, sub-addresses and the tap-command encoding are this design's
// own choice.
package ttc_pkg;

  localparam int unsigned SHORT_LEN = 16;
  localparam int unsigned LONG_LEN  = 42;
  localparam int unsigned ADDR_W    = 14;

  // Broadcast commands (channel B, 16-bit frames).
  localparam logic [7:0] CMD_IDLE      = 8'hA5;  // periodic idle, used for channel identification
  localparam logic [7:0] CMD_ERR_RST   = 8'h3C;  // reset the error counters of all receivers
  localparam logic [7:0] CMD_DELAY_REQ = 8'h5A;  // PTP delay_req (uplink, no payload)
  localparam logic [7:0] CMD_TAP_INCR  = 8'h11;  // fine-delay tap +1 (all frontends)
  localparam logic [7:0] CMD_TAP_DECR  = 8'h12;  // fine-delay tap -1 (all frontends)
  localparam logic [7:0] CMD_TAP_RST   = 8'h13;  // fine-delay tap to 0 (all frontends)

  // Sub-addresses of addressed frames (receiver internal registers).
  localparam logic [7:0] SA_SYNC    = 8'h00;  // 0x00..0x07: t1_g bytes, LSB first (synch)
  localparam logic [7:0] SA_RESP    = 8'h08;  // 0x08..0x0F: t4_g bytes, LSB first (delay_resp)
  localparam logic [7:0] SA_TAP     = 8'h10;  // data = TAP_INCR / TAP_DECR / TAP_RST
  localparam logic [7:0] SA_TAP_ACK = 8'h11;  // uplink: data = tap count after a command

  localparam logic [7:0] TAP_NOP  = 8'd0;  // no change, only acknowledge
  localparam logic [7:0] TAP_INCR = 8'd1;
  localparam logic [7:0] TAP_DECR = 8'd2;
  localparam logic [7:0] TAP_RST  = 8'd3;

  // A frame as handed to the encoder or delivered by the decoder.
  // For a broadcast frame only `data` (the command) is meaningful.
  typedef struct packed {
    logic              is_long;
    logic [ADDR_W-1:0] addr;
    logic [7:0]        subaddr;
    logic [7:0]        data;
  } ttc_frame_t;

  // Result of checking a received word.
  typedef struct packed {
    logic [31:0] data;       // corrected data
    logic        corrected;  // exactly one bit was wrong and has been fixed
    logic        fatal;      // uncorrectable (two or more bits wrong)
  } ham_res_t;

  // Position (1-based) in the Hamming word of protected bit i: the
  // non-power-of-two numbers 3, 5, 6, 7, 9, ..., 38.
  localparam logic [5:0] HAM_POS [32] = '{
     3,  5,  6,  7,  9, 10, 11, 12, 13, 14, 15, 17, 18, 19, 20, 21,
    22, 23, 24, 25, 26, 27, 28, 29, 30, 31, 33, 34, 35, 36, 37, 38};
  // HAM_MASK[j]: the protected bits whose position has bit j set, i.e. the
  // bits covered by check bit p(2^j). Derived from HAM_POS.
  localparam logic [31:0] HAM_MASK [6] = '{
    32'h56AA_AD5B, 32'h9B33_366D, 32'hE3C3_C78E,
    32'h03FC_07F0, 32'h03FF_F800, 32'hFC00_0000};

  // Check bits {overall, p32, p16, p8, p4, p2, p1} of the low k bits of d
  // (for k = 8 the positions end at 12, so p16 and p32 come out 0).
  function automatic logic [6:0] ham_chk(input logic [31:0] d, input int unsigned k);
    logic [5:0]  p;
    logic        ovl;
    logic [31:0] dm;
    dm = (k >= 32) ? d : (d & ((32'd1 << k) - 32'd1));
    for (int unsigned j = 0; j < 6; j++) p[j] = ^(dm & HAM_MASK[j]);
    ovl = ^dm ^ (^p);
    return {ovl, p};
  endfunction
  function automatic ham_res_t ham_check(input logic [31:0] d, input int unsigned k,
                                         input logic [5:0] p_rx, input int unsigned np,
                                         input logic ovl_rx);
    ham_res_t   r;
    logic [6:0] c;
    logic [5:0] syn;
    logic       par;
    logic [5:0] mask;
    mask = 6'((1 << np) - 1);
    c    = ham_chk(d, k);
    syn  = (c[5:0] ^ p_rx) & mask;
    par  = c[6] ^ ovl_rx ^ (^(c[5:0] & mask)) ^ (^(p_rx & mask));
    // par: parity of the whole received word (data, check bits, overall bit)
    r.data = d; r.corrected = 1'b0; r.fatal = 1'b0;
    if (syn != 0 || par) begin
      if (!par) r.fatal = 1'b1;                    // even number of errors
      else begin
        r.corrected = 1'b1;
        if ((syn & (syn - 1)) != 0) begin          // a data bit is wrong
          r.fatal = 1'b1;
          for (int unsigned i = 0; i < 32; i++)
            if (i < k && HAM_POS[i] == syn) begin
              r.data[i] = ~r.data[i];
              r.fatal   = 1'b0;
            end
        end
      end
    end
    return r;
  endfunction

  // Serialize a frame into the channel-B bit vector, MSB sent first.
  // A broadcast frame occupies bits [41:26]; the rest is padding.
  function automatic logic [LONG_LEN-1:0] frame_bits(input ttc_frame_t f);
    logic [31:0] w;
    logic [6:0]  c;
    if (f.is_long) begin
      w = {f.addr, 1'b1, 1'b1, f.subaddr, f.data};
      c = ham_chk(w, 32);
      return {2'b01, w, c, 1'b1};
    end else begin
      c = ham_chk({24'd0, f.data}, 8);
      return {2'b00, f.data, c[6], c[3:0], 1'b1, 26'h3FF_FFFF};
    end
  endfunction

endpackage
