`timescale 1ns/1ps
// tb_global_time_counter - checks the backend's global time counter.
//
// The counter must advance by exactly one count per 250 MHz clock (one
// count = 4 ns), start from 0 after reset, take a loaded value, and wrap
// around at its width. Random load values come from $urandom.
module tb_global_time_counter;
  localparam int W = 16;
  logic         clk = 0, rst_n = 0, load = 0;
  logic [W-1:0] load_value = '0, time_out;
  int checks = 0, failures = 0;

  global_time_counter #(.TIME_W(W)) dut (.clk, .rst_n, .load, .load_value, .time_out);

  always #2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] t0;
    realtime r0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(time_out == 1, $sformatf("first count after reset (%0d)", time_out));
    // rate: 1000 cycles -> 1000 counts -> 4000 ns
    t0 = time_out; r0 = $realtime;
    repeat (1000) @(posedge clk);
    #1;
    check(W'(time_out - t0) == 1000, $sformatf("1000 counts in 1000 cycles (%0d)", time_out - t0));
    check($realtime - r0 == 4000.0, "4 ns per count");
    // random loads
    for (int i = 0; i < 20; i++) begin
      logic [W-1:0] v;
      v = W'($urandom);
      load_value = v; load = 1;
      @(posedge clk); #1 load = 0;
      check(time_out == v, "load value");
      repeat ($urandom_range(1, 50)) begin
        t0 = time_out;
        @(posedge clk); #1;
        check(time_out == W'(t0 + 1), "increment by one");
      end
    end
    // wrap-around
    load_value = '1; load = 1;
    @(posedge clk); #1 load = 0;
    @(posedge clk); #1;
    check(time_out == 0, "wraps to 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
