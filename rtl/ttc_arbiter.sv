`timescale 1ns/1ps
// ttc_arbiter - request/grant arbiter in front of a TTC encoder.
//
// Several clients share one encoder. A client raises `req` and keeps it high
// for as long as it needs the link, usually a whole multi-frame message, so
// that no other client can interleave frames with it. When the link is free
// the arbiter grants the next requesting client in round-robin order,
// starting after the last owner. The grant is dropped in the cycle after the
// owner lowers `req`. The req/grant pairs and the arbiter itself (drawn as a
// traffic light inside the encoder) follow the design overview; the
// round-robin order and the lock-while-requesting rule are this design's own
// choice.
//
// Timing: `grant` is registered; a free arbiter grants one cycle after `req`.
module ttc_arbiter #(
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  output logic [N-1:0] grant
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      grant <= '0;
      last  <= IW'(N - 1);
    end else if ((grant & req) == '0) begin
      logic found;
      found = 1'b0;
      grant <= '0;
      for (int unsigned k = 1; k <= N; k++) begin
        int unsigned c;
        c = (int'(last) + k) % N;
        if (!found && req[c]) begin
          found    = 1'b1;
          grant[c] <= 1'b1;
          last     <= IW'(c);
        end
      end
    end
  end

  // At most one client owns the link.
  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
