// xdacq_merger: the data-acquisition board's merge of all camera data streams
// onto the single off-camera link.
//
// N_IN byte streams (the 32 module event streams and the trigger-record
// stream) arrive with a valid/ready handshake and a last flag on the final
// byte of each packet. Each input first fills a store-and-forward buffer of
// IN_BUF bytes (byte_fifo), so the slow 1 Gbps module links fill their
// buffers in parallel. A packet counter per input tracks whole packets held.
// A round-robin arbiter then picks, after the input served last, the next
// input holding a whole packet and forwards that packet at one byte per tick
// (8 Gbps at the 1 ns tick, standing in for the 10 Gbps fibre), up to and
// including its last byte, so packets are never interleaved. Arbitration takes
// one tick between packets. An input's ready drops only when its buffer is
// full.
//
// The paper gives the merge of all module data onto one 10 Gbps link; the
// buffering and arbitration are this design's own, and the 10 Gbit Ethernet
// MAC and optics are not part of it.
module xdacq_merger #(
  parameter int unsigned N_IN   = 33,
  parameter int unsigned IN_BUF = 16384
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_IN-1:0][7:0]    in_data_i,
  input  logic [N_IN-1:0]         in_valid_i,
  input  logic [N_IN-1:0]         in_last_i,
  output logic [N_IN-1:0]         in_ready_o,
  output logic [7:0]              out_data_o,
  output logic                    out_valid_o,
  output logic                    out_last_o,
  output logic [$clog2(N_IN)-1:0] out_src_o,
  input  logic                    out_ready_i
);
  localparam int unsigned SW = $clog2(N_IN);
  localparam int unsigned PW = $clog2(IN_BUF + 1);

  logic [N_IN-1:0][8:0]    q_data;
  logic [N_IN-1:0]         q_empty, q_full, q_rd, q_wr, have_pkt, pkt_in, pkt_out;
  logic [N_IN-1:0][PW-1:0] q_used, pkts;

  logic          locked;
  logic [SW-1:0] sel, next_sel;
  logic          found;

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    assign in_ready_o[i] = !q_full[i];
    assign q_wr[i]       = in_valid_i[i] && !q_full[i];
    assign pkt_in[i]     = q_wr[i] && in_last_i[i];
    assign pkt_out[i]    = q_rd[i] && q_data[i][8];
    assign have_pkt[i]   = (pkts[i] != 0);

    byte_fifo #(.WIDTH(9), .DEPTH(IN_BUF)) u_q (
      .clk, .rst_n, .wr_i(q_wr[i]), .wr_data_i({in_last_i[i], in_data_i[i]}), .rd_i(q_rd[i]),
      .rd_data_o(q_data[i]), .empty_o(q_empty[i]), .full_o(q_full[i]), .used_o(q_used[i])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) pkts[i] <= '0;
      else        pkts[i] <= pkts[i] + PW'(pkt_in[i]) - PW'(pkt_out[i]);
    end
  end

  // round-robin search starting after the last served input
  always_comb begin
    found    = 1'b0;
    next_sel = sel;
    for (int k = 1; k <= N_IN; k++) begin
      if (!found && have_pkt[(int'(sel) + k) % N_IN]) begin
        found    = 1'b1;
        next_sel = SW'((int'(sel) + k) % N_IN);
      end
    end
  end

  assign out_src_o   = sel;
  assign out_valid_o = locked && !q_empty[sel];
  assign out_data_o  = q_data[sel][7:0];
  assign out_last_o  = q_data[sel][8];

  always_comb begin
    q_rd      = '0;
    q_rd[sel] = out_valid_o && out_ready_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      sel    <= SW'(N_IN - 1);
    end else if (!locked) begin
      if (found) begin
        sel    <= next_sel;
        locked <= 1'b1;
      end
    end else if (out_valid_o && out_ready_i && out_last_o) begin
      locked <= 1'b0;
    end
  end

  // a granted input holds a whole packet, so it never runs dry mid-packet,
  // and it is not switched away from before its last byte
  a_no_underrun: assert property (@(posedge clk) disable iff (!rst_n) locked |-> !q_empty[sel]);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           (locked && !(out_valid_o && out_ready_i && out_last_o)) |=> (locked && $stable(sel)));
endmodule
