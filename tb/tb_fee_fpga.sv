// tb_fee_fpga: one module FPGA with four behavioural sampling ASICs.
// The ASIC inputs carry a known function of (ASIC, channel, time), so every
// sample of an event can be predicted. Checks:
//   * a RESYNC message aligns the module counter with the sender's counter;
//   * a READOUT gives a 12300-byte event: header fields, every sample of the
//     96-ci window starting LOOKBACK (32) ns before the trigger time, also
//     for a window that wraps around the 4096-ci ring, and the end flag;
//   * bytes leave no faster than one per 8 ticks (1 Gbps) and the event takes
//     at least 12300*8 ticks;
//   * a READOUT arriving while busy is dropped and counted; busy clears.
module tb_fee_fpga;
  import chec_pkg::*;
  localparam int BIT_NS = 4, LAT = MSG_BITS * BIT_NS + BIT_NS / 2 + 2;
  localparam int EV_BYTES = 12 + 96 * 64 * 2;
  logic clk = 0, rst_n = 0, send = 0, tx_ready, line;
  link_msg_t msg;
  logic busy, areq, aready, ovalid, olast, oready;
  timestamp_t ftime;
  logic [15:0] dropped;
  logic [CELL_BITS-1:0] wcell, rstart; logic [7:0] rblocks, odata;
  logic [3:0] avalid; sample_t [3:0][15:0] adata, ain;
  int checks = 0, failures = 0;
  longint tick = 0;
  always #1 clk = ~clk;
  always @(posedge clk) tick <= tick + 1;

  function automatic sample_t f(int a, int c, timestamp_t t);
    return sample_t'(t * 5 + a * 700 + c * 37 + (t >> 7));
  endfunction

  serial_link_tx #(.BIT_NS(BIT_NS)) utx (.clk, .rst_n, .send_i(send), .msg_i(msg), .ready_o(tx_ready), .line_o(line));

  fee_fpga dut (.clk, .rst_n, .module_id_i(8'd17), .ser_i(line), .busy_o(busy), .time_o(ftime), .dropped_o(dropped),
    .asic_wr_cell_o(wcell), .asic_req_o(areq), .asic_req_start_o(rstart), .asic_req_blocks_o(rblocks),
    .asic_valid_i(avalid), .asic_data_i(adata), .asic_ready_o(aready),
    .out_data_o(odata), .out_last_o(olast), .out_valid_o(ovalid), .out_ready_i(oready));

  for (genvar a = 0; a < 4; a++) begin : g_asic
    always_comb for (int c = 0; c < 16; c++) ain[a][c] = f(a, c, ftime);
    targetc_model ua (.clk, .sample_i(ain[a]), .wr_cell_i(wcell), .req_i(areq), .req_start_i(rstart),
      .req_blocks_i(rblocks), .valid_o(avalid[a]), .data_o(adata[a]), .ready_i(aready));
  end

  // collect output bytes
  logic [7:0] ev [$]; logic last_seen; longint last_byte_tick = -100, first_tick, end_tick;
  int min_gap = 1000;
  always @(posedge clk) if (rst_n && ovalid && oready) begin
    if (ev.size() == 0) first_tick = tick;
    if (tick - last_byte_tick < min_gap) min_gap = int'(tick - last_byte_tick);
    last_byte_tick = tick;
    ev.push_back(odata);
    checks++; if (olast != (ev.size() == EV_BYTES)) begin failures++; $display("last flag at byte %0d", ev.size()); end
    if (olast) end_tick = tick;
  end

  task automatic send_msg(link_msg_t m, output longint acc);
    @(negedge clk); msg = m; send = 1;
    while (!tx_ready) @(negedge clk);
    @(posedge clk); acc = tick;
    @(negedge clk); send = 0;
  endtask

  task automatic check_event(int id, timestamp_t t);
    int start; int k;
    checks++; if (ev.size() != EV_BYTES) begin failures++; $display("event size %0d", ev.size()); return; end
    checks++; if (ev[0] != 17 || ev[1] != 96) begin failures++; $display("header id/len %0d %0d", ev[0], ev[1]); end
    checks++; if ({ev[2], ev[3], ev[4], ev[5]} != 32'(id)) begin failures++; $display("event id"); end
    checks++; if ({ev[6], ev[7], ev[8], ev[9]} != t) begin failures++; $display("timestamp"); end
    start = int'((t - 32) % 4096);
    checks++; if ({ev[10], ev[11]} != 16'(start)) begin failures++; $display("start ci %0d want %0d", {ev[10], ev[11]}, start); end
    k = 12;
    for (int ci = 0; ci < 96; ci++)
      for (int a = 0; a < 4; a++)
        for (int c = 0; c < 16; c++) begin
          sample_t want; want = f(a, c, t - 32 + ci);
          checks++;
          if ({ev[k], ev[k+1]} !== {4'b0, want}) begin
            failures++; if (failures < 10) $display("cell %0d asic %0d ch %0d: %h want %h", ci, a, c, {ev[k], ev[k+1]}, want);
          end
          k += 2;
        end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint acc; timestamp_t base, t;
    msg = '0; oready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    // re-sync to a far-away time
    base = 32'd1_000_000;
    send_msg('{kind: MSG_RESYNC, event_id: 0, timestamp: base}, acc);
    repeat (LAT + 3) @(negedge clk);
    checks++; if (ftime != base + timestamp_t'(tick - acc)) begin failures++; $display("resync: %0d want %0d", ftime, base + timestamp_t'(tick - acc)); end
    // fill the storage ring, then read a window that wraps (trigger ci 10)
    repeat (5000) @(negedge clk);
    t = ftime - 200; t = t - (t % 4096) + 10;
    if (t > ftime - 100) t -= 4096;
    send_msg('{kind: MSG_READOUT, event_id: 32'h0000_0abc, timestamp: t}, acc);
    repeat (LAT + 5) @(negedge clk);
    checks++; if (!busy) begin failures++; $display("not busy during readout"); end
    // a second trigger while busy is dropped
    send_msg('{kind: MSG_READOUT, event_id: 32'h0000_0abd, timestamp: ftime - 100}, acc);
    repeat (LAT + 5) @(negedge clk);
    checks++; if (dropped != 1) begin failures++; $display("dropped %0d", dropped); end
    // back-pressure for a while
    oready = 0; repeat (3000) @(negedge clk); oready = 1;
    while (ev.size() < EV_BYTES) @(negedge clk);
    repeat (5) @(negedge clk);
    check_event(32'h0abc, t);
    checks++; if (min_gap < 8) begin failures++; $display("bytes %0d ticks apart", min_gap); end
    checks++; if (end_tick - first_tick < (EV_BYTES - 1) * 8) begin failures++; $display("event too fast"); end
    checks++; if (busy) begin failures++; $display("still busy"); end
    // a second event, not wrapping
    ev.delete();
    t = ftime - 150;
    send_msg('{kind: MSG_READOUT, event_id: 32'h1234_5678, timestamp: t}, acc);
    while (ev.size() < EV_BYTES) @(negedge clk);
    repeat (5) @(negedge clk);
    check_event(32'h1234_5678, t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
