`timescale 1ns/1ps
// tb_pulse_gen - checks the programmable pulse output.
//
// A time counter runs next to the generator. For random programmed times the
// pulse must rise on the clock after the counter equals the programmed time
// (a fixed one-cycle latency, identical for every pulse so that boards with
// equal times pulse together), last WIDTH clocks, and fire only once per arm.
module tb_pulse_gen;
  localparam int W = 32, WIDTH = 25;
  logic         clk = 0, rst_n = 0, arm = 0;
  logic [W-1:0] sched_time = '0, time_in = '0;
  logic         pulse, armed;
  int checks = 0, failures = 0;

  pulse_gen #(.TIME_W(W), .WIDTH(WIDTH)) dut (.clk, .rst_n, .arm, .sched_time, .time_in, .pulse, .armed);

  always #2 clk = ~clk;
  always @(posedge clk) if (rst_n) time_in <= time_in + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int npulses = 0;
  logic [W-1:0] rise_time;
  logic p_d = 0;
  always @(posedge clk) begin
    if (pulse && !p_d) npulses++;
    p_d <= pulse;
  end

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] t;
    int n0, width;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      t = time_in + $urandom_range(30, 300);
      sched_time = t; arm = 1;
      @(negedge clk) arm = 0;
      check(armed, "armed after arm");
      n0 = npulses;
      wait (pulse);
      rise_time = time_in;
      @(negedge clk);
      // pulse and counter change on the same edge: the pulse rises with the
      // counter at t + 1, i.e. one clock after the counter read t
      check(rise_time == t + 1, $sformatf("pulse one cycle after the programmed time (%0d vs %0d)", rise_time, t));
      width = 1;
      while (pulse) begin @(negedge clk); if (pulse) width++; end
      check(width == WIDTH, $sformatf("pulse width %0d", width));
      repeat (100) @(negedge clk);
      check(npulses == n0 + 1, "one pulse per arm");
      check(!armed, "disarmed after the pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
