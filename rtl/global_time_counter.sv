`timescale 1ns/1ps
// global_time_counter - the backend's copy of the global time.
//
// Time is kept as a count of periods of the 250 MHz global clock (4 ns per
// count), as in the paper. The counter starts at `load_value` when `load` is
// high (in the experiment the start value comes from the White Rabbit node;
// with a free-running oscillator it is simply the reset value 0) and
// otherwise adds one per cycle. TIME_W = 48 bits (about 13 days at 4 ns) is
// this design's choice; the paper gives no width.
module global_time_counter #(
  parameter int unsigned TIME_W = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [TIME_W-1:0] load_value,
  output logic [TIME_W-1:0] time_out
);
  always_ff @(posedge clk) begin
    if (!rst_n)    time_out <= '0;
    else if (load) time_out <= load_value;
    else           time_out <= time_out + 1'b1;
  end
endmodule
