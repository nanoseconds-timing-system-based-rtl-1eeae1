`timescale 1ns/1ps
// tb_ttc_encoder - checks the TTC transmitter against a reference decoder.
//
// Two clients ask for the link at the same time: client 0 sends three
// addressed frames under one request, client 1 two broadcast commands. The
// testbench records the line, finds the BMC bit boundaries, separates
// channel A (must be all 0) from channel B, cuts channel B into frames and
// compares every frame bit by bit with the reference layout and Hamming
// bits. It also checks: client 0's frames are not interleaved with client
// 1's, idle commands appear, the latency from `accept` to the start bit is
// the same for all frames, and back-to-back frames follow each other every
// 168 cycles (42 bits x 4 cycles) or 64 cycles (16 bits x 4).
module tb_ttc_encoder;
  import ttc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NCYC = 4000;

  logic       clk = 0, rst_n = 0;
  logic [1:0] req = '0, fvalid, grant, accept;
  ttc_frame_t frame [2];
  logic       line;
  int         checks = 0, failures = 0;

  ttc_encoder #(.N_CLIENTS(2), .IDLE_PERIOD(300)) dut (
    .clk, .rst_n, .idle_en(1'b1), .cha_bit(1'b0),
    .req, .fvalid, .frame, .grant, .accept, .line
  );

  always #2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // stimulus
  ttc_frame_t list0 [3];
  ttc_frame_t list1 [2];
  int k0 = 0, k1 = 0;
  initial begin
    list0[0] = '{1'b1, 14'h1234, 8'h05, 8'hC3};
    list0[1] = '{1'b1, 14'h0001, 8'h10, 8'h01};
    list0[2] = '{1'b1, 14'h3FFF, 8'hFF, 8'h00};
    list1[0] = '{1'b0, 14'h0, 8'h0, 8'h5A};
    list1[1] = '{1'b0, 14'h0, 8'h0, 8'h81};
  end
  assign fvalid[0] = req[0] && grant[0];
  assign fvalid[1] = req[1] && grant[1];
  assign frame[0]  = list0[(k0 < 3) ? k0 : 2];
  assign frame[1]  = list1[(k1 < 2) ? k1 : 1];

  int   cyc = 0;
  bit   sym [NCYC];
  int   acc_cyc [$];
  int   acc_who [$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (cyc < NCYC) sym[cyc] = line;
      if (accept[0]) begin acc_cyc.push_back(cyc); acc_who.push_back(0); end
      if (accept[1]) begin acc_cyc.push_back(cyc); acc_who.push_back(1); end
      cyc++;
    end
  end

  always @(posedge clk) begin
    if (rst_n && accept[0]) k0 <= k0 + 1;
    if (rst_n && accept[1]) k1 <= k1 + 1;
  end
  always @(negedge clk) begin
    if (k0 >= 3) req[0] = 1'b0;
    if (k1 >= 2) req[1] = 1'b0;
  end

  // watchdog
  initial begin
    #(4 * (NCYC + 2000));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  off, viol, best_viol, nb, aph, ia, len, nfr, nidle;
    bit  bits [NCYC/2];
    bit  bstream [NCYC/4];
    int  bstart [NCYC/4];
    int  fr_sym [$];
    bit [41:0] got, exp;
    bit allzero;
    int  startc, lat0, lat;

    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    req = 2'b11;
    wait (cyc >= NCYC);

    // bit boundaries: the half-symbol offset with no missing transitions
    best_viol = 1 << 30; off = 0;
    for (int o = 0; o < 2; o++) begin
      viol = 0;
      for (int i = 8 + o; i + 1 < NCYC; i += 2) if (sym[i] == sym[i-1]) viol++;
      if (viol < best_viol) begin best_viol = viol; off = o; end
    end
    check(best_viol == 0, "BMC: a bit boundary without transition");
    nb = 0;
    for (int i = off; i + 1 < NCYC; i += 2) begin bits[nb] = sym[i] ^ sym[i+1]; nb++; end

    // channel A: the bit parity that is all zero
    aph = -1;
    for (int p = 0; p < 2; p++) begin
      allzero = 1;
      for (int i = 4 + p; i < nb; i += 2) if (bits[i]) allzero = 0;
      if (allzero && aph < 0) aph = p;
    end
    check(aph >= 0, "channel A not all zero");
    ia = 0;
    for (int i = (aph < 0 ? 1 : 1 - aph); i < nb; i += 2) begin
      bstream[ia] = bits[i];
      bstart[ia]  = off + 2 * i;       // symbol index of the bit's first half
      ia++;
    end

    // cut channel B into frames
    nfr = 0; nidle = 0;
    for (int i = 2; i < ia - 42; ) begin
      if (bstream[i] == 0) begin
        len = bstream[i+1] ? 42 : 16;
        got = '0;
        for (int j = 0; j < len; j++) got[41-j] = bstream[i+j];
        if (!bstream[i+1] && got[39:32] == 8'hA5) begin
          exp = ref_frame(0, 0, 0, 8'hA5, len);
          check(got == exp, "idle frame bits");
          nidle++;
        end else begin
          if (nfr < 3) exp = ref_frame(list0[nfr].is_long, list0[nfr].addr, list0[nfr].subaddr, list0[nfr].data, len);
          else if (nfr < 5) exp = ref_frame(list1[nfr-3].is_long, list1[nfr-3].addr, list1[nfr-3].subaddr, list1[nfr-3].data, len);
          else exp = '1;
          check(got == exp, $sformatf("frame %0d bits: got %h exp %h", nfr, got, exp));
          fr_sym.push_back(bstart[i]);
          nfr++;
        end
        i += len;
      end else i++;
    end
    check(nfr == 5, $sformatf("client frames seen: %0d", nfr));
    check(nidle >= 2, $sformatf("idle frames seen: %0d", nidle));

    // accept order: client 0 three times, then client 1 twice
    check(acc_who.size() == 5, "number of accepts");
    for (int i = 0; i < acc_who.size() && i < 5; i++)
      check(acc_who[i] == ((i < 3) ? 0 : 1), "arbitration order / lock");

    // fixed latency accept -> start bit on the line
    lat0 = -1;
    for (int i = 0; i < fr_sym.size() && i < acc_cyc.size(); i++) begin
      lat = fr_sym[i] - acc_cyc[i];
      if (lat0 < 0) lat0 = lat;
      check(lat == lat0, $sformatf("accept-to-line latency %0d vs %0d", lat, lat0));
    end
    check(lat0 > 0 && lat0 < 8, $sformatf("latency value %0d", lat0));

    // back-to-back rate
    if (acc_cyc.size() == 5) begin
      check(acc_cyc[1] - acc_cyc[0] == 168, $sformatf("long frame spacing %0d", acc_cyc[1] - acc_cyc[0]));
      check(acc_cyc[2] - acc_cyc[1] == 168, "long frame spacing 2");
      check(acc_cyc[4] - acc_cyc[3] == 64,
            $sformatf("short frame spacing %0d", acc_cyc[4] - acc_cyc[3]));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
