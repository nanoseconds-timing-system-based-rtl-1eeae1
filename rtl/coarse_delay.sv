`timescale 1ns/1ps
// coarse_delay - programmable delay of a sampled serial stream in whole clock
// cycles (the "Coarse delay" input stage of the TTC receiver).
//
// The stream is shifted through a MAX_DELAY-deep shift register and the tap
// selected by `delay` is registered to the output, so the total latency is
// delay + 1 cycles. It lets a fixed latency in one direction of the link (for
// example the output buffers of the clock-and-data-recovery chip) be matched
// in the other direction. The 5-bit setting follows the design overview,
// which ties it to 0b00110 on the backend and 0b00000 on the frontend; the
// shift-register implementation is this design's own.
module coarse_delay #(
  parameter int unsigned MAX_DELAY = 31
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [$clog2(MAX_DELAY+1)-1:0] delay,
  input  logic                           din,
  output logic                           dout
);
  logic [MAX_DELAY:0] taps;

  assign taps[0] = din;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      taps[MAX_DELAY:1] <= '0;
      dout              <= 1'b0;
    end else begin
      taps[MAX_DELAY:1] <= taps[MAX_DELAY-1:0];
      dout              <= taps[delay];
    end
  end
endmodule
