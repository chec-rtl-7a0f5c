// tb_chec_camera: end-to-end run of the camera with its first row only
// (4 modules, 256 pixels, 64 trigger patches) and every other parameter at
// its default (4096-cell storage, 96 ns window, 16 KB buffers), with
// behavioural models of the trigger and sampling ASICs around the digital
// top. tb_chec_camera_full runs the first half of this sequence at 32 modules.
//
// Every pixel carries a known waveform: a function of (module, ASIC, channel,
// time) plus injected light pulses. The sequence:
//   1. fill the storage rings, then light two neighbouring 2x2 patches that
//      sit in different modules (modules 1 and 2), 3 ns apart: the camera
//      must trigger (event 0) with the coincidence time;
//   2. while the modules are busy reading out, light another neighbour pair:
//      the trigger must be vetoed;
//   3. hold the output link back for a while (back-pressure);
//   4. collect the 5 packets of the event (4 module events of 12300 bytes
//      and the 17-byte trigger record) and compare every byte with the
//      prediction: headers, the 64-bit pattern, all 24576 samples, including
//      the light pulse at its cells;
//   5. a PPS clears the camera time; after the re-sync message every module
//      counter must equal the trigger FPGA's;
//   6. an external trigger whose window wraps around the storage ring gives
//      event 1, checked in full;
//   7. an LED flash with a set pattern.
// Each mechanism is counted and a failure is counted for any that never
// happened.
module tb_chec_camera;
  import chec_pkg::*;
  localparam int NM = 4, LAT = MSG_BITS * 4 + 2 + 2;
  localparam int EV_BYTES = 12 + 96 * 64 * 2, REC_BYTES = 9 + NM * 2;
  localparam int THR = 1000, PULSE_AMP = 400;
  // the lit neighbour pair: right-most patch of one module, left-most of the
  // next module in the same row; VM: module used for the vetoed pair
  localparam int PM1 = 1, PQ1 = 3, PM2 = 2, PQ2 = 0, VM = 3;
  // run the second half (PPS re-sync, external trigger, wrapped window)
  localparam bit SECOND_EVENT = 1;
  // progress report
  always begin #200us; $display("t=%0t events=%0d packets=%0d", $time, evc, pkts_done); end

  logic clk = 0, rst_n = 0, ext = 0, pps = 0, dacq_ready = 1, led_fire = 0;
  logic [NM-1:0][15:0] patch;
  logic cam_trig, veto;
  event_id_t evc; timestamp_t now;
  logic [NM-1:0][CELL_BITS-1:0] wcell, rstart;
  logic [NM-1:0] areq, aready;
  logic [NM-1:0][7:0] rblocks;
  logic [NM-1:0][3:0] avalid;
  sample_t [NM-1:0][3:0][15:0] adata, ain;
  logic [NM-1:0][15:0] dropped;
  timestamp_t [NM-1:0] ftime;
  logic [7:0] dd; logic dv, dl; logic [$clog2(NM+1)-1:0] dsrc;
  logic [3:0][9:0] led_pat = '0, led;
  logic [31:0] flashes;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  chec_camera #(.N_MOD(NM)) dut (
    .clk, .rst_n, .patch_trig_i(patch), .coinc_en_i(1'b1), .ext_trig_i(ext), .pps_i(pps),
    .cam_trig_o(cam_trig), .veto_o(veto), .event_count_o(evc), .time_o(now),
    .asic_wr_cell_o(wcell), .asic_req_o(areq), .asic_req_start_o(rstart), .asic_req_blocks_o(rblocks),
    .asic_valid_i(avalid), .asic_data_i(adata), .asic_ready_o(aready), .fee_dropped_o(dropped),
    .fee_time_o(ftime),
    .dacq_data_o(dd), .dacq_valid_o(dv), .dacq_last_o(dl), .dacq_src_o(dsrc), .dacq_ready_i(dacq_ready),
    .led_fire_i(led_fire), .led_period_i(32'd0), .led_pattern_i(led_pat), .led_o(led), .led_flash_count_o(flashes));

  // ---- light: up to 8 pulses, each on one 2x2 patch (module, patch q) ----
  int lp_m [8], lp_q [8]; timestamp_t lp_t [8]; int n_lp = 0;
  localparam int LP_LEN = 10;
  // is pixel (row, col) of module m lit at time t?
  timestamp_t lit_lo = '1, lit_hi = '0;   // bounds of all pulses, for speed
  function automatic bit lit(int m, int prow, int pcol, timestamp_t t);
    if (t < lit_lo || t >= lit_hi) return 0;
    for (int i = 0; i < n_lp; i++)
      if (lp_m[i] == m && prow / 2 == lp_q[i] / 4 && pcol / 2 == lp_q[i] % 4 &&
          t >= lp_t[i] && t < lp_t[i] + LP_LEN) return 1;
    return 0;
  endfunction
  // the value a sampling ASIC channel sees at camera time t
  function automatic sample_t wave(int m, int a, int c, timestamp_t t);
    sample_t v;
    v = sample_t'(t * 3 + m * 101 + a * 29 + c * 7 + (t >> 9)) & 12'h3ff;
    if (lit(m, 2 * a + c / 8, c % 8, t)) v = v + 12'(PULSE_AMP * 4);
    return v;
  endfunction

  for (genvar m = 0; m < NM; m++) begin : g_mod
    for (genvar a = 0; a < 4; a++) begin : g_asic
      logic [15:0][15:0] amp;
      always_comb for (int c = 0; c < 16; c++) begin
        ain[m][a][c] = wave(m, a, c, ftime[m]);
        amp[c] = lit(m, 2 * a + c / 8, c % 8, now) ? 16'(PULSE_AMP) : 16'd0;
      end
      targetc_model u_tc (.clk, .sample_i(ain[m][a]), .wr_cell_i(wcell[m]), .req_i(areq[m]),
        .req_start_i(rstart[m]), .req_blocks_i(rblocks[m]), .valid_o(avalid[m][a]), .data_o(adata[m][a]),
        .ready_i(aready[m]));
      t5tea_model u_tt (.amp_i(amp), .thr_i(18'(THR)), .trig_o(patch[m][4*a +: 4]));
    end
  end

  // ---- output collection ----
  logic [7:0] pkt [NM+1][$];
  int pkts_done = 0, stalls = 0, srcs_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (dv && !dacq_ready) stalls++;
    if (dv && dacq_ready) begin
      pkt[dsrc].push_back(dd);
      if (dl) pkts_done++;
    end
  end
  int n_coinc = 0, n_ext = 0, n_veto = 0;
  always @(posedge clk) if (rst_n) begin
    if (veto) n_veto++;
  end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic light(int m, int q, timestamp_t t);
    lp_m[n_lp] = m; lp_q[n_lp] = q; lp_t[n_lp] = t; n_lp++;
    if (t < lit_lo) lit_lo = t;
    if (t + LP_LEN > lit_hi) lit_hi = t + LP_LEN;
  endtask

  task automatic check_event(int id, timestamp_t t, bit external, int pm1, int pq1, int pm2, int pq2);
    logic [NM*16-1:0] pat; int k, start, lit_cells;
    chk(pkts_done == NM + 1, $sformatf("packets %0d", pkts_done));
    // trigger record
    chk(pkt[NM].size() == REC_BYTES, $sformatf("record bytes %0d", pkt[NM].size()));
    if (pkt[NM].size() == REC_BYTES) begin
      chk({pkt[NM][0], pkt[NM][1], pkt[NM][2], pkt[NM][3]} == 32'(id), "record id");
      chk({pkt[NM][4], pkt[NM][5], pkt[NM][6], pkt[NM][7]} == t, "record time");
      chk(pkt[NM][8] == 8'(external), "record source");
      for (int i = 0; i < NM * 2; i++) pat[NM*16-1 - 8*i -: 8] = pkt[NM][9 + i];
      if (!external) chk(pat[pm1*16+pq1] && pat[pm2*16+pq2] && $countones(pat) == 2, "record pattern");
    end
    start = int'((t - 32) % 4096);
    lit_cells = 0;
    for (int m = 0; m < NM; m++) begin
      chk(pkt[m].size() == EV_BYTES, $sformatf("module %0d bytes %0d", m, pkt[m].size()));
      if (pkt[m].size() != EV_BYTES) continue;
      chk(pkt[m][0] == 8'(m) && pkt[m][1] == 96, "module header");
      chk({pkt[m][2], pkt[m][3], pkt[m][4], pkt[m][5]} == 32'(id), "module event id");
      chk({pkt[m][6], pkt[m][7], pkt[m][8], pkt[m][9]} == t, "module time");
      chk({pkt[m][10], pkt[m][11]} == 16'(start), "module start cell");
      k = 12;
      for (int ci = 0; ci < 96; ci++)
        for (int a = 0; a < 4; a++)
          for (int c = 0; c < 16; c++) begin
            sample_t w; w = wave(m, a, c, t - 32 + ci);
            if (lit(m, 2 * a + c / 8, c % 8, t - 32 + ci)) lit_cells++;
            checks++;
            if ({pkt[m][k], pkt[m][k+1]} !== {4'b0, w}) begin
              failures++; if (failures < 20) $display("module %0d cell %0d asic %0d ch %0d: %h want %h", m, ci, a, c, {pkt[m][k], pkt[m][k+1]}, w);
            end
            k += 2;
          end
    end
    if (!external) chk(lit_cells == 2 * 4 * LP_LEN, $sformatf("lit samples in window %0d", lit_cells));
    for (int i = 0; i <= NM; i++) pkt[i].delete();
    pkts_done = 0;
  endtask

  initial begin
    #20ms; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    timestamp_t t0, t1; int wrap_cells; wrap_cells = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (4300) @(negedge clk);
    // 1. coincidence between module 7 patch 3 (ASIC 0, columns 6-7) and
    //    module 8 patch 0 (ASIC 0, columns 0-1), neighbours across modules
    t0 = now + 5;
    light(PM1, PQ1, t0); light(PM2, PQ2, t0 + 3);
    while (!cam_trig) @(negedge clk);
    n_coinc++;
    chk(evc == 1, "event counter after first trigger");
    // the patch sum crosses in tick t0+3, its window opens in t0+4
    // 2. a second neighbour pair while busy
    repeat (2000) @(negedge clk);
    light(VM, 5, now + 5); light(VM, 6, now + 5);
    repeat (100) @(negedge clk);
    chk(n_veto >= 1, "trigger vetoed while busy");
    chk(evc == 1, "no event from the vetoed trigger");
    // 3. back-pressure
    while (!dv) @(negedge clk);
    dacq_ready = 0; repeat (5000) @(negedge clk); dacq_ready = 1;
    // 4. collect and check event 0
    while (pkts_done < NM + 1) @(negedge clk);
    repeat (10) @(negedge clk);
    check_event(0, t0 + 4, 0, PM1, PQ1, PM2, PQ2);
    $display("event 0 checked at %0t", $time);
    // the camera time restarts at the PPS: forget the light pulses
    n_lp = 0; lit_lo = '1; lit_hi = '0;
    if (SECOND_EVENT) begin
    // 5. PPS and re-sync
    pps = 1; repeat (5) @(negedge clk); pps = 0;
    repeat (LAT + 300) @(negedge clk);
    begin
      int bad; bad = 0;
      for (int m = 0; m < NM; m++) if (ftime[m] != now) bad++;
      chk(bad == 0, $sformatf("%0d module counters out of step after re-sync", bad));
    end
    chk(now < 2000, "camera time cleared by PPS");
    // 6. external trigger at camera time 10 (mod 4096): window wraps
    repeat (4200) @(negedge clk);
    while (now % 4096 != 10) @(negedge clk);
    t1 = now;
    ext = 1; repeat (4) @(negedge clk); ext = 0;
    n_ext++;
    while (pkts_done < NM + 1) @(negedge clk);
    repeat (10) @(negedge clk);
    wrap_cells = (int'(t1) % 4096) < 32 ? 1 : 0;
    check_event(1, t1, 1, 0, 0, 0, 0);
    chk(evc == 2, "two events");
    $display("event 1 checked at %0t", $time);
    end
    // 7. LED flash
    led_pat = {10'h3ff, 10'h001, 10'h155, 10'h2aa};
    led_fire = 1; @(negedge clk); led_fire = 0; @(negedge clk);
    chk(led == led_pat && flashes == 1, "LED flash pattern");
    // mechanisms
    chk(n_coinc >= 1, "coincidence trigger happened");
    if (SECOND_EVENT) chk(n_ext >= 1, "external trigger happened");
    chk(n_veto >= 1, "busy veto happened");
    chk(stalls >= 1, "output back-pressure happened");
    if (SECOND_EVENT) chk(wrap_cells == 1, "storage ring wrap happened");
    for (int m = 0; m < NM; m++) chk(dropped[m] == 0, "no module dropped a readout");
    $display("mechanisms: coincidence %0d external %0d veto %0d stall-ticks %0d wrap %0d resync 1 led %0d",
             n_coinc, n_ext, n_veto, stalls, wrap_cells, flashes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
