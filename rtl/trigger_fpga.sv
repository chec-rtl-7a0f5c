// trigger_fpga: the backplane FPGA that forms the camera trigger and starts
// the readout of every module.
//
// It holds the nanosecond timestamp counter (cleared by the rising edge of the
// array-wide 1 PPS), the coincidence trigger over all 512 patch lines and a
// 32-bit event counter. For every camera trigger it
//   * pulses cam_trig_o (the camera trigger reported to the timing board),
//   * queues a READOUT message {event id, trigger timestamp} that is broadcast
//     to all modules on the serial link, and
//   * emits a trigger record on a byte stream for the data-acquisition board:
//     event id (4 bytes), timestamp (4), source (1: 1 = external), then the
//     512-bit patch pattern (64 bytes), each field most significant byte first;
//     rec_last_o marks the final byte.
// After each PPS a RESYNC message carrying the counter value at the tick the
// link accepts it is broadcast, so the modules can load their own counters.
// A queued readout is sent before a queued re-sync.
//
// New triggers are inhibited while a message is queued or being sent, while
// the trigger record is being streamed, and while any module reports busy.
// The paper gives the trigger's role, the serial message with a unique event
// identifier and the trigger patterns sent to the acquisition board; the
// message, record layout and the inhibit rules are this design's own.
module trigger_fpga
  import chec_pkg::*;
#(
  parameter int unsigned N_MOD      = N_MODULES,
  parameter int unsigned COINC_NS   = 8,
  parameter int unsigned HOLDOFF_NS = 16,
  parameter int unsigned BIT_NS     = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [N_MOD-1:0][PATCH_PER_MODULE-1:0] patch_trig_i,
  input  logic                                   coinc_en_i,
  input  logic                                   ext_trig_i,
  input  logic                                   pps_i,
  input  logic [N_MOD-1:0]                       fee_busy_i,
  output logic                                   ser_o,
  output logic                                   cam_trig_o,
  output logic                                   veto_o,
  output timestamp_t                             time_o,
  output event_id_t                              event_count_o,
  output logic [7:0]                             rec_data_o,
  output logic                                   rec_valid_o,
  output logic                                   rec_last_o,
  input  logic                                   rec_ready_i
);
  localparam int unsigned NP        = N_MOD * PATCH_PER_MODULE;
  localparam int unsigned REC_BYTES = 9 + NP / 8;

  logic       pps_q, pps_rise;
  timestamp_t now;
  logic       trig, trig_ext, inhibit;
  logic [NP-1:0] pattern;

  logic       rd_pend, rs_pend;
  event_id_t  rd_id;
  timestamp_t rd_ts;
  logic       tx_ready, tx_send;
  link_msg_t  tx_msg;

  logic [REC_BYTES*8-1:0]           rec_sh;
  logic [$clog2(REC_BYTES+1)-1:0]   rec_left;

  assign pps_rise = pps_i && !pps_q;

  timestamp_counter #(.WIDTH(32)) u_time (
    .clk, .rst_n, .clear_i(pps_rise), .load_i(1'b0), .load_val_i('0), .count_o(now)
  );

  assign inhibit = rd_pend || rs_pend || !tx_ready || (rec_left != 0) || (|fee_busy_i);

  coincidence_trigger #(.N_MOD(N_MOD), .COINC_NS(COINC_NS), .HOLDOFF_NS(HOLDOFF_NS)) u_trig (
    .clk, .rst_n, .patch_trig_i, .coinc_en_i, .ext_trig_i, .inhibit_i(inhibit),
    .trig_o(trig), .trig_src_ext_o(trig_ext), .pattern_o(pattern), .veto_o
  );

  // Message dispatch
  always_comb begin
    tx_send = 1'b0;
    tx_msg  = '{kind: MSG_NONE, event_id: '0, timestamp: '0};
    if (tx_ready && rd_pend) begin
      tx_send = 1'b1;
      tx_msg  = '{kind: MSG_READOUT, event_id: rd_id, timestamp: rd_ts};
    end else if (tx_ready && rs_pend) begin
      tx_send = 1'b1;
      tx_msg  = '{kind: MSG_RESYNC, event_id: event_count_o, timestamp: now};
    end
  end

  serial_link_tx #(.BIT_NS(BIT_NS)) u_tx (
    .clk, .rst_n, .send_i(tx_send), .msg_i(tx_msg), .ready_o(tx_ready), .line_o(ser_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pps_q         <= 1'b0;
      rd_pend       <= 1'b0;
      rs_pend       <= 1'b0;
      rd_id         <= '0;
      rd_ts         <= '0;
      event_count_o <= '0;
      cam_trig_o    <= 1'b0;
      rec_sh        <= '0;
      rec_left      <= '0;
    end else begin
      pps_q      <= pps_i;
      cam_trig_o <= trig;
      if (pps_rise) rs_pend <= 1'b1;
      else if (tx_send && !rd_pend) rs_pend <= 1'b0;
      if (tx_send && rd_pend) rd_pend <= 1'b0;
      if (trig) begin
        // the trigger decision lands in the tick after its condition; the
        // timestamp refers to the tick the condition was seen
        rd_pend       <= 1'b1;
        rd_id         <= event_count_o;
        rd_ts         <= now - 1'b1;
        event_count_o <= event_count_o + 1'b1;
        rec_sh        <= {event_count_o, now - 1'b1, 7'd0, trig_ext, pattern};
        rec_left      <= REC_BYTES[$bits(rec_left)-1:0];
      end else if (rec_left != 0 && rec_ready_i) begin
        rec_sh   <= rec_sh << 8;
        rec_left <= rec_left - 1'b1;
      end
    end
  end

  assign rec_valid_o = (rec_left != 0);
  assign rec_data_o  = rec_sh[REC_BYTES*8-1 -: 8];
  assign rec_last_o  = (rec_left == 1);
  assign time_o      = now;
endmodule
