// tb_trigger_fpga: the backplane trigger FPGA on its own, with a link
// receiver standing in for a module. Checks:
//   * a neighbour-pair coincidence gives cam_trig, a READOUT message with
//     event id 0, 1, ... and the time of the tick the coincidence formed
//     (second edge + 1), and a 73-byte trigger record with id, time, source
//     and exactly the two patch bits set;
//   * an external trigger is numbered next and flagged as external;
//   * a PPS clears the counter and is followed by a RESYNC message carrying
//     the counter value at the tick the link accepted it;
//   * module busy vetoes a trigger, and no message is sent for it.
module tb_trigger_fpga;
  import chec_pkg::*;
  localparam int NM = 32, BIT_NS = 4, LAT = MSG_BITS * BIT_NS + BIT_NS / 2 + 2;
  logic clk = 0, rst_n = 0, ext = 0, pps = 0, ser, cam_trig, veto, rvalid, rlast, mvalid;
  logic [NM-1:0][15:0] lines = '0;
  logic [NM-1:0] busy = '0;
  timestamp_t now; event_id_t evc; logic [7:0] rdata;
  link_msg_t rmsg;
  int checks = 0, failures = 0;
  longint tick = 0;
  always #1 clk = ~clk;
  always @(posedge clk) tick <= tick + 1;

  trigger_fpga dut (.clk, .rst_n, .patch_trig_i(lines), .coinc_en_i(1'b1), .ext_trig_i(ext), .pps_i(pps),
    .fee_busy_i(busy), .ser_o(ser), .cam_trig_o(cam_trig), .veto_o(veto), .time_o(now), .event_count_o(evc),
    .rec_data_o(rdata), .rec_valid_o(rvalid), .rec_last_o(rlast), .rec_ready_i(1'b1));
  serial_link_rx #(.BIT_NS(BIT_NS)) urx (.clk, .rst_n, .line_i(ser), .msg_valid_o(mvalid), .msg_o(rmsg));

  link_msg_t msgs [$]; longint msg_tick [$];
  always @(posedge clk) if (rst_n && mvalid) begin msgs.push_back(rmsg); msg_tick.push_back(tick); end
  logic [7:0] rec [$]; int recs = 0;
  always @(posedge clk) if (rst_n && rvalid) begin rec.push_back(rdata); if (rlast) recs++; end
  int trigs = 0, vetoes = 0;
  always @(posedge clk) if (rst_n) begin if (cam_trig) trigs++; if (veto) vetoes++; end

  initial begin
    #400000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    timestamp_t t_form; int p1, p2; logic [511:0] pat;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (100) @(negedge clk);
    // coincidence: module 12 patches 5 and 6 (horizontal neighbours)
    p1 = 12*16+5; p2 = 12*16+6;
    lines[12][5] = 1; repeat (2) @(negedge clk);
    lines[12][6] = 1; t_form = now + 1;    // window of the second line opens next tick
    repeat (4) @(negedge clk); lines = '0;
    repeat (LAT + 400) @(negedge clk);
    chk(trigs == 1, "one camera trigger");
    chk(msgs.size() == 1, "one message");
    if (msgs.size() == 1) begin
      chk(msgs[0].kind == MSG_READOUT && msgs[0].event_id == 0, "readout message id 0");
      chk(msgs[0].timestamp == t_form, $sformatf("timestamp %0d want %0d", msgs[0].timestamp, t_form));
    end
    chk(rec.size() == 73 && recs == 1, $sformatf("record size %0d", rec.size()));
    if (rec.size() == 73) begin
      chk({rec[0], rec[1], rec[2], rec[3]} == 0, "record id");
      chk({rec[4], rec[5], rec[6], rec[7]} == t_form, "record time");
      chk(rec[8] == 0, "record source");
      for (int i = 0; i < 64; i++) pat[511 - 8*i -: 8] = rec[9 + i];
      chk(pat[p1] && pat[p2] && $countones(pat) == 2, "record pattern");
    end
    // external trigger
    rec.delete(); msgs.delete(); msg_tick.delete();
    ext = 1; repeat (3) @(negedge clk); ext = 0;
    repeat (LAT + 400) @(negedge clk);
    chk(trigs == 2 && msgs.size() == 1 && msgs[0].event_id == 1, "external trigger numbered 1");
    chk(rec.size() == 73 && rec[8] == 1, "external source flag");
    // PPS
    msgs.delete(); msg_tick.delete();
    @(negedge clk); pps = 1; @(negedge clk);
    chk(now == 0, $sformatf("counter after PPS %0d", now));
    repeat (10) @(negedge clk); pps = 0;
    repeat (LAT + 400) @(negedge clk);
    chk(msgs.size() == 1 && msgs[0].kind == MSG_RESYNC, "resync message");
    if (msgs.size() == 1) $display("resync ts %0d arrival tick %0d now-offset %0d", msgs[0].timestamp, msg_tick[0], tick - longint'(now));
    if (msgs.size() == 1) chk(msgs[0].timestamp + LAT == timestamp_t'(msg_tick[0] - (tick - longint'(now))), "resync time + latency = counter at arrival");
    // busy veto
    msgs.delete(); msg_tick.delete();
    busy[7] = 1;
    lines[3][0] = 1; lines[3][1] = 1; repeat (4) @(negedge clk); lines = '0;
    repeat (LAT + 100) @(negedge clk);
    chk(trigs == 2 && vetoes == 1 && msgs.size() == 0, "busy vetoes the trigger");
    busy = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
