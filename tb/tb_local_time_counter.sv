`timescale 1ns/1ps
// tb_local_time_counter - checks the frontend's local time counter.
//
// Without a correction the counter advances one count per clock. When the
// time synchronization issues a correction (adj_valid with a signed offset)
// the count for that clock becomes 1 + offset, so the local time jumps by
// the measured offset; the test uses the offsets of the paper's examples
// (+24, -26, +23 counts) and random ones, and compares against a model.
module tb_local_time_counter;
  localparam int W = 48;
  logic                clk = 0, rst_n = 0, adj_valid = 0;
  logic signed [W-1:0] adj = '0;
  logic [W-1:0]        time_out;
  int checks = 0, failures = 0;

  local_time_counter #(.TIME_W(W)) dut (.clk, .rst_n, .adj_valid, .adj, .time_out);

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
    logic [W-1:0] model;
    int offs [$];
    offs = '{24, -26, 23};
    for (int i = 0; i < 20; i++) offs.push_back($urandom_range(0, 2000) - 1000);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    model = time_out;
    check(model == 1, "starts from 0 after reset");
    foreach (offs[i]) begin
      repeat ($urandom_range(1, 40)) begin
        @(posedge clk); #1;
        model = model + 1;
        check(time_out == model, "free-running count");
      end
      adj = W'(offs[i]); adj_valid = 1;
      @(posedge clk); #1 adj_valid = 0;
      model = model + 1 + W'(offs[i]);
      check(time_out == model, $sformatf("correction %0d applied", offs[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
