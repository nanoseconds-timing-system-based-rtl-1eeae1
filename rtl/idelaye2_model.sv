`timescale 1ns/1ps
// idelaye2_model - behavioural model of one programmable input delay element
// (an FPGA IDELAYE2 primitive in VAR_LOAD mode). Not synthesizable: the
// element is an FPGA primitive and only its behaviour is modelled here.
//
// The delay from IDATAIN to DATAOUT is CNTVALUEOUT * TAP_NS (transport delay,
// about 78 ps per tap as calibrated in the paper). On a rising edge of C:
// LD loads CNTVALUEIN; otherwise CE with INC=1 adds one tap and CE with INC=0
// removes one, wrapping around between 31 and 0 like the real primitive.
// Only the ports the timing system uses are modelled (C, CE, INC, LD,
// CNTVALUEIN, CNTVALUEOUT, IDATAIN, DATAOUT).
//
// Delay model: every change of IDATAIN is scheduled onto DATAOUT with the
// delay in force at that moment (`<= #d`), so pulses shorter than the delay
// pass through, as on a wire. A tap change affects the edges that follow it
// only. Synthesis tools warn that the `always @(IDATAIN)` block has
// non-edge sensitivity and synthesize it as `always @*`, which drops the delay
// and leaves a wire. That is expected: in an FPGA build this module is
// replaced by the vendor primitive, and only the simulation behaviour matters.
module idelaye2_model #(
  parameter real TAP_NS = 0.078
) (
  input  logic       C,
  input  logic       CE,
  input  logic       INC,
  input  logic       LD,
  input  logic [4:0] CNTVALUEIN,
  output logic [4:0] CNTVALUEOUT,
  input  logic       IDATAIN,
  output logic       DATAOUT
);
  initial CNTVALUEOUT = 5'd0;
  initial DATAOUT     = 1'b0;

  always @(posedge C) begin
    if (LD)      CNTVALUEOUT <= CNTVALUEIN;
    else if (CE) CNTVALUEOUT <= INC ? CNTVALUEOUT + 5'd1 : CNTVALUEOUT - 5'd1;
  end

  // Transport delay: every input change is carried to the output after the
  // delay selected at the time of the change.
  always @(IDATAIN) DATAOUT <= #(TAP_NS * real'(CNTVALUEOUT)) IDATAIN;
endmodule
