// serial_link_tx: sender side of the camera readout / re-sync serial link.
//
// A message (chec_pkg::link_msg_t, 66 bits) is sent as one start bit ('1'),
// the message bits, least significant first, and one stop bit ('0'), each bit
// held for BIT_NS clock ticks; the line idles low. send_i is accepted while
// ready_o is high; the line then carries the frame for (2+MSG_BITS)*BIT_NS
// ticks, starting on the tick after acceptance, after which ready_o returns. The paper says only that a serial message carrying a
// unique event identifier is sent to the modules after a camera trigger; the
// framing and bit time are this design's own.
module serial_link_tx
  import chec_pkg::*;
#(
  parameter int unsigned BIT_NS = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      send_i,
  input  link_msg_t msg_i,
  output logic      ready_o,
  output logic      line_o
);
  localparam int unsigned FRAME = MSG_BITS + 2;

  logic [FRAME-1:0]              shreg;
  logic [$clog2(FRAME+1)-1:0]    bits_left;
  logic [$clog2(BIT_NS+1)-1:0]   tick;

  assign ready_o = (bits_left == 0);
  assign line_o  = (bits_left != 0) && shreg[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      bits_left <= '0;
      tick      <= '0;
    end else if (bits_left == 0) begin
      if (send_i) begin
        shreg     <= {1'b0, msg_i, 1'b1};
        bits_left <= FRAME[$bits(bits_left)-1:0];
        tick      <= '0;
      end
    end else if (tick == BIT_NS[$bits(tick)-1:0] - 1'b1) begin
      tick      <= '0;
      shreg     <= shreg >> 1;
      bits_left <= bits_left - 1'b1;
    end else begin
      tick <= tick + 1'b1;
    end
  end
endmodule
