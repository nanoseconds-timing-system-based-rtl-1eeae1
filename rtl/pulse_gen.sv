`timescale 1ns/1ps
// pulse_gen - output pulse at a scheduled time.
//
// Both boards carry one; with both programmed with the same time, comparing
// the two pulses on an oscilloscope shows how well local and global time
// agree (this is how the paper measures the result). When armed, the block
// raises `pulse` for WIDTH cycles starting in the cycle after `time_in`
// equals `sched_time`, then disarms itself. Re-arming (`arm`) loads a new
// time. The width is this design's choice (100 ns at 250 MHz).
module pulse_gen #(
  parameter int unsigned TIME_W = 48,
  parameter int unsigned WIDTH  = 25
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arm,
  input  logic [TIME_W-1:0] sched_time,
  input  logic [TIME_W-1:0] time_in,
  output logic              pulse,
  output logic              armed
);
  localparam int unsigned CW = $clog2(WIDTH + 1);
  logic [TIME_W-1:0] target;
  logic [CW-1:0]     cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      target <= '0;
      armed  <= 1'b0;
      pulse  <= 1'b0;
      cnt    <= '0;
    end else begin
      if (arm) begin
        target <= sched_time;
        armed  <= 1'b1;
      end else if (armed && time_in == target) begin
        armed <= 1'b0;
        pulse <= 1'b1;
        cnt   <= CW'(WIDTH - 1);
      end
      if (pulse) begin
        if (cnt == 0) pulse <= 1'b0;
        else          cnt   <= cnt - 1'b1;
      end
    end
  end
endmodule
