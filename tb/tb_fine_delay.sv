`timescale 1ns/1ps
// tb_fine_delay - checks the behavioural fine-delay chain (four cascaded
// programmable delay elements of 32 settings each).
//
// For random settings, loaded through the LD/CNTVALUEIN port or stepped with
// CE/INC, the testbench sends a rising and a falling edge through the chain
// and measures the delay with $realtime: it must equal the sum of the four
// settings times 78 ps (the tap size of the 200 MHz-referenced delay
// element). It also checks the extremes: 0 taps and 4 x 31 = 124 taps
// (9.672 ns, the paper's "~9.6 ns" range), single-tap stepping and that an
// edge already inside an element keeps that element's delay.
module tb_fine_delay;
  localparam real TAP = 0.078;
  logic       clk = 0, inc = 0, ld = 0, din = 0, dout;
  logic [3:0] ce = '0;
  logic [4:0] cntvaluein = '0;
  logic [4:0] cntvalueout [4];
  int checks = 0, failures = 0;

  fine_delay #(.TAP_NS(TAP)) dut (.clk, .ce, .inc, .ld, .cntvaluein, .cntvalueout, .din, .dout);

  always #2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int total();
    return int'(cntvalueout[0]) + int'(cntvalueout[1]) + int'(cntvalueout[2]) + int'(cntvalueout[3]);
  endfunction

  // send one edge, return the measured delay in ns
  task automatic measure(output real d);
    realtime t0;
    @(negedge clk);
    #0.5;
    din = ~din;
    t0 = $realtime;
    if (dout != din) @(dout);
    d = $realtime - t0;
  endtask

  task automatic load_all(input logic [4:0] v);
    @(negedge clk);
    cntvaluein = v; ld = 1;
    @(negedge clk);
    ld = 0;
  endtask

  task automatic step(input int e, input bit up);
    @(negedge clk);
    ce[e] = 1; inc = up;
    @(negedge clk);
    ce = '0;
  endtask

  task automatic check_delay(input string what);
    real d, want;
    for (int k = 0; k < 2; k++) begin
      measure(d);
      want = total() * TAP;
      check(d > want - 0.002 && d < want + 0.002,
            $sformatf("%s: delay %0.3f ns for %0d taps, want %0.3f", what, d, total(), want));
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real d;
    repeat (2) @(negedge clk);
    load_all(5'd0);
    check(total() == 0, "load 0");
    check_delay("zero taps");
    load_all(5'd31);
    check(total() == 124, "maximum 124 taps");
    check_delay("maximum");
    measure(d);
    check(d > 9.6 && d < 9.7, $sformatf("range ~9.6 ns (%0.3f)", d));
    // random stepping
    load_all(5'd0);
    for (int i = 0; i < 60; i++) begin
      int e; bit up;
      e  = $urandom_range(0, 3);
      up = (cntvalueout[e] == 0) ? 1 : (cntvalueout[e] == 31) ? 0 : bit'($urandom_range(0, 1));
      begin
        int prev_taps;
        prev_taps = int'(cntvalueout[e]);
        step(e, up);
        check(int'(cntvalueout[e]) == prev_taps + (up ? 1 : -1), "CE/INC steps one tap");
      end
      if (i % 6 == 0) check_delay("random setting");
    end
    // a setting change acts on each element separately: an edge launched
    // 0.2 ns before the clock that loads 0 is still inside the first element
    // (20 taps = 1.56 ns) and keeps that element's delay; the other three
    // elements are already at 0 when it reaches them
    load_all(5'd20);
    @(negedge clk);
    cntvaluein = 0; ld = 1;
    #1.8;
    din = ~din;
    begin
      realtime t0;
      t0 = $realtime;
      @(dout);
      d = $realtime - t0;
    end
    @(negedge clk) ld = 0;
    check(d > 20 * TAP - 0.002 && d < 20 * TAP + 0.002, $sformatf("edge in flight keeps its delay (%0.3f)", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
