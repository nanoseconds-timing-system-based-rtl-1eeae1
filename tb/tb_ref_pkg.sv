`timescale 1ns/1ps
// tb_ref_pkg - reference models shared by the testbenches, written apart
// from the RTL: the TTC frame layout with its SEC-DED Hamming check bits,
// built by placing the bits in an explicit Hamming code word, and a BiPhase
// Mark symbol generator.
package tb_ref_pkg;

  // Check bits {overall, p32, p16, p8, p4, p2, p1} of the low k bits of d.
  // Data bit i goes to the i-th position of the code word (1-based) that is
  // not a power of two; p(2^j) covers the positions with bit j set.
  function automatic bit [6:0] ref_chk(input bit [31:0] d, input int k);
    bit cw [64];
    int pos, di;
    bit [6:0] r;
    for (int q = 0; q < 64; q++) cw[q] = 0;
    pos = 1; di = 0;
    while (di < k) begin
      if ((pos & (pos - 1)) != 0) begin
        cw[pos] = d[di];
        di++;
      end
      pos++;
    end
    r = '0;
    for (int j = 0; j < 6; j++)
      for (int q = 1; q < pos; q++)
        if ((q & (1 << j)) != 0) r[j] ^= cw[q];
    for (int q = 0; q < k; q++) r[6] ^= d[q];
    for (int j = 0; j < 6; j++) r[6] ^= r[j];
    return r;
  endfunction

  // Frame bits, MSB first, left-aligned in 42 bits; len = 16 or 42.
  function automatic bit [41:0] ref_frame(input bit is_long, input bit [13:0] addr,
                                          input bit [7:0] sub, input bit [7:0] data,
                                          output int len);
    bit [31:0] w;
    bit [6:0]  c;
    if (is_long) begin
      w   = {addr, 1'b1, 1'b1, sub, data};
      c   = ref_chk(w, 32);
      len = 42;
      return {2'b01, w, c, 1'b1};
    end else begin
      c   = ref_chk({24'd0, data}, 8);
      len = 16;
      return {2'b00, data, c[6], c[3:0], 1'b1, 26'd0};
    end
  endfunction

  // BiPhase Mark: two symbols per bit, level toggles at every bit start and
  // again mid-bit for a 1. `level` is the line level before the bit; the
  // new line level is the second symbol.
  function automatic bit [1:0] bmc_symbols(input bit b, input bit level);
    bit s0, s1;
    s0 = ~level;
    s1 = b ? ~s0 : s0;
    return {s0, s1};
  endfunction

endpackage
