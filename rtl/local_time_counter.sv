`timescale 1ns/1ps
// local_time_counter - a frontend's local time.
//
// Counts periods of the 250 MHz clock recovered from the downlink, so it runs
// at exactly the global clock frequency but starts at an arbitrary value
// (power-up and lock time differ between boards). When the PTP timing node
// pulses `adj_valid`, the signed offset `adj` is added in the same cycle as
// the normal increment: time <= time + 1 + adj. After that the count equals
// the global time to within one clock period (the phase between global and
// recovered clock is not resolved). The offset-add follows the paper's
// offset correction; TIME_W is this design's choice.
module local_time_counter #(
  parameter int unsigned TIME_W = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     adj_valid,
  input  logic signed [TIME_W-1:0] adj,
  output logic [TIME_W-1:0]        time_out
);
  always_ff @(posedge clk) begin
    if (!rst_n)         time_out <= '0;
    else if (adj_valid) time_out <= time_out + 1'b1 + TIME_W'(adj);
    else                time_out <= time_out + 1'b1;
  end
endmodule
