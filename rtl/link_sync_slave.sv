`timescale 1ns/1ps
// link_sync_slave - frontend side of the serial link synchronization
// ("delay control slave").
//
// What it does: executes the tap commands the backend sends over the TTC
// downlink on the frontend's fine delay chain, and after an addressed command
// reports the new tap count back on the uplink, so the backend can check it.
//
// How it works: a broadcast command (CMD_TAP_INCR / CMD_TAP_DECR /
// CMD_TAP_RST, used while the backend scans all links together) or an
// addressed write to SA_TAP (data TAP_INCR / TAP_DECR / TAP_RST / TAP_NOP, to set
// one link) produces a one-cycle control pulse for the four cascaded delay
// elements. An increment steps the first element that is not yet at 31, a
// decrement steps the last element that is not at 0, and a reset loads 0 into
// all four, so the chain never wraps and its delay is always the sum of the
// four settings (`tap_count`, 0..124). Increments at 124 and decrements at 0
// are ignored. After an addressed command, and once the elements have
// updated, the block requests the uplink and sends an addressed frame
// (SA_TAP_ACK, data = tap count).
//
// Interface: rx_valid/rx_frame from the TTC decoder; ce/inc/ld/cntvaluein to
// and cntvalueout from the fine delay; req/fvalid/frame/grant/accept to the
// TTC encoder. Commands are at least one frame (64 cycles) apart.
//
// From the paper: remote increment/decrement/reset of the tap count from the
// backend, tap enable / tap increment / tap count signals, req/grant to the
// encoder. This design's choices: the element-stepping rule, the
// acknowledgement frame, the command encoding.
module link_sync_slave
  import ttc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] my_addr,
  input  logic              rx_valid,
  input  ttc_frame_t        rx_frame,
  output logic [3:0]        ce,
  output logic              inc,
  output logic              ld,
  output logic [4:0]        cntvaluein,
  input  logic [4:0]        cntvalueout [4],
  output logic [7:0]        tap_count,
  output logic              req,
  output logic              fvalid,
  output ttc_frame_t        frame,
  input  logic              grant,
  input  logic              accept
);
  typedef enum logic [1:0] {OP_NONE, OP_INCR, OP_DECR, OP_RST} op_e;
  op_e        op;
  logic       addressed;
  logic [1:0] ack_wait;
  logic       ack_pend;

  always_comb begin
    op        = OP_NONE;
    addressed = 1'b0;
    if (rx_valid && !rx_frame.is_long) begin
      case (rx_frame.data)
        CMD_TAP_INCR: op = OP_INCR;
        CMD_TAP_DECR: op = OP_DECR;
        CMD_TAP_RST:  op = OP_RST;
        default:      op = OP_NONE;
      endcase
    end else if (rx_valid && rx_frame.is_long && rx_frame.addr == my_addr &&
                 rx_frame.subaddr == SA_TAP) begin
      addressed = 1'b1;
      case (rx_frame.data)
        TAP_INCR: op = OP_INCR;
        TAP_DECR: op = OP_DECR;
        TAP_RST:  op = OP_RST;
        default:  op = OP_NONE;
      endcase
    end
  end

  always_comb begin
    tap_count = '0;
    for (int unsigned e = 0; e < 4; e++) tap_count = tap_count + 8'(cntvalueout[e]);
  end

  assign cntvaluein = '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ce       <= '0;
      inc      <= 1'b0;
      ld       <= 1'b0;
      ack_wait <= '0;
      ack_pend <= 1'b0;
    end else begin
      logic found;
      ce    <= '0;
      ld    <= 1'b0;
      found = 1'b0;
      case (op)
        OP_INCR: begin
          inc <= 1'b1;
          for (int e = 0; e < 4; e++)
            if (!found && cntvalueout[e] != 5'd31) begin
              found = 1'b1;
              ce[e] <= 1'b1;
            end
        end
        OP_DECR: begin
          inc <= 1'b0;
          for (int e = 3; e >= 0; e--)
            if (!found && cntvalueout[e] != 5'd0) begin
              found = 1'b1;
              ce[e] <= 1'b1;
            end
        end
        OP_RST:  ld <= 1'b1;
        default: ;
      endcase
      // acknowledge addressed commands once the elements have updated
      if (addressed)          ack_wait <= 2'd2;
      else if (ack_wait != 0) ack_wait <= ack_wait - 2'd1;
      if (ack_wait == 2'd1)   ack_pend <= 1'b1;
      else if (accept)        ack_pend <= 1'b0;
    end
  end

  assign req          = ack_pend;
  assign fvalid       = ack_pend && grant;
  assign frame.is_long = 1'b1;
  assign frame.addr    = my_addr;
  assign frame.subaddr = SA_TAP_ACK;
  assign frame.data    = tap_count;
endmodule
