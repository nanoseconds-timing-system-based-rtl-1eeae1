`timescale 1ns/1ps
// fine_delay - behavioural model of the fine delay chain placed at the output
// of the frontend TTC encoder: four programmable delay elements
// (idelaye2_model) in cascade, each with 32 settings (0..31 taps) of about
// 78 ps, for at most 124 taps, about 9.7 ns. That is a little more than two
// 4 ns line symbols, enough to scan the whole eye of the 250 MBd line.
// Not synthesizable: it models FPGA delay primitives.
//
// Control follows the primitives: on a rising edge of `clk`, `ld` loads
// `cntvaluein` into all four elements; ce[e] with `inc` steps element e up
// (inc=1) or down (inc=0). `cntvalueout` returns each element's setting. The
// link_sync_slave decides which element to step, so that the four settings
// always add up to the wanted total tap count.
//
// From the paper: the cascade of four IDELAYE2, ~78 ps taps, ~9.6 ns range,
// placement at the encoder output. This model's choices: 32 settings per
// element (the paper calls them 31-tap; 4 x 31 steps of 78 ps give its
// 9.6 ns), no intrinsic delay.
module fine_delay #(
  parameter real TAP_NS = 0.078
) (
  input  logic       clk,
  input  logic [3:0] ce,
  input  logic       inc,
  input  logic       ld,
  input  logic [4:0] cntvaluein,
  output logic [4:0] cntvalueout [4],
  input  logic       din,
  output logic       dout
);
  logic chain [5];

  assign chain[0] = din;
  assign dout     = chain[4];

  for (genvar e = 0; e < 4; e++) begin : g_elem
    idelaye2_model #(.TAP_NS(TAP_NS)) u_idelay (
      .C          (clk),
      .CE         (ce[e]),
      .INC        (inc),
      .LD         (ld),
      .CNTVALUEIN (cntvaluein),
      .CNTVALUEOUT(cntvalueout[e]),
      .IDATAIN    (chain[e]),
      .DATAOUT    (chain[e+1])
    );
  end
endmodule
