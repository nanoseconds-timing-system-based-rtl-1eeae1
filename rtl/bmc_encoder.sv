`timescale 1ns/1ps
// bmc_encoder - BiPhase Mark encoder, one line symbol per clock cycle.
//
// A data bit occupies two clock cycles (two half-bit symbols). The line level
// toggles at the start of every bit, and toggles again in the middle of the
// bit when the bit is 1 (standard BiPhase Mark code). The result is DC
// balanced and has at least one transition per bit, so the receiver can
// recover the clock and find the bit boundaries.
//
// Interface: pulse `bit_start` with the bit value on `bit_val` every second
// cycle. `line` is registered: the first half of the bit appears on `line`
// one cycle after `bit_start`, the second half one cycle later.
module bmc_encoder (
  input  logic clk,
  input  logic rst_n,
  input  logic bit_start,
  input  logic bit_val,
  output logic line
);
  logic mid_toggle;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      line       <= 1'b0;
      mid_toggle <= 1'b0;
    end else if (bit_start) begin
      line       <= ~line;
      mid_toggle <= bit_val;
    end else begin
      if (mid_toggle) line <= ~line;
      mid_toggle <= 1'b0;
    end
  end
endmodule
