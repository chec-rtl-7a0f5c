// serial_link_rx: receiver side of the camera readout / re-sync serial link.
//
// Waits for the rising edge of the '1' start bit, then samples each of the MSG_BITS message bits
// in the middle of its BIT_NS-tick bit time (the link is synchronous to the
// common clock, so no oversampling is needed). msg_valid_o pulses for one tick
// with the assembled message LINK_LATENCY = MSG_BITS*BIT_NS + BIT_NS/2 + 2
// ticks after the tick on which the sender accepted it; the FEE module relies
// on that fixed latency to align its counter with the trigger FPGA's.
module serial_link_rx
  import chec_pkg::*;
#(
  parameter int unsigned BIT_NS = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      line_i,
  output logic      msg_valid_o,
  output link_msg_t msg_o
);
  logic [MSG_BITS-1:0]            shreg;
  logic [$clog2(MSG_BITS+1)-1:0]  bits_left;
  logic [$clog2(BIT_NS+1)-1:0]    tick;
  logic                           active;
  logic                           line_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg       <= '0;
      bits_left   <= '0;
      tick        <= '0;
      active      <= 1'b0;
      msg_valid_o <= 1'b0;
      line_q      <= 1'b0;
    end else begin
      msg_valid_o <= 1'b0;
      line_q      <= line_i;
      if (!active) begin
        if (line_i && !line_q) begin
          // start bit seen on its first tick; first data bit's middle is
          // BIT_NS + BIT_NS/2 ticks later
          active    <= 1'b1;
          bits_left <= MSG_BITS[$bits(bits_left)-1:0];
          tick      <= '0;
        end
      end else if (tick == BIT_NS[$bits(tick)-1:0] + BIT_NS[$bits(tick)-1:0] / 2 - 1'b1) begin
        shreg     <= {line_i, shreg[MSG_BITS-1:1]};
        bits_left <= bits_left - 1'b1;
        tick      <= BIT_NS[$bits(tick)-1:0] / 2;
        if (bits_left == 1) begin
          active      <= 1'b0;
          msg_valid_o <= 1'b1;
        end
      end else begin
        tick <= tick + 1'b1;
      end
    end
  end

  assign msg_o = link_msg_t'(shreg);
endmodule
