// tb_coincidence_trigger: drives the 512 patch lines of a full camera with
// directed and random pulses and compares trig_o, pattern_o, trig_src_ext_o
// and veto_o every tick with a reference model. The model builds the patch
// neighbourhood from the module rows 4,6,6,6,6,4 on a 24x24 grid on its own.
// Directed cases: a pair across a module boundary (trigger 2 ticks after the
// second edge), a pair too far apart in time, a diagonal pair, a lone patch,
// an inhibited pair (veto), an external trigger.
module tb_coincidence_trigger;
  import chec_pkg::*;
  localparam int NM = 32, NP = NM * 16, W = 8, H = 16;
  logic clk = 0, rst_n = 0, coinc_en = 1, ext = 0, inhibit = 0;
  logic [NM-1:0][15:0] lines = '0;
  logic trig, src, veto;
  logic [NP-1:0] pattern;
  int checks = 0, failures = 0, n_trig = 0, n_veto = 0, n_ext = 0;
  always #1 clk = ~clk;

  coincidence_trigger #(.N_MOD(NM), .COINC_NS(W), .HOLDOFF_NS(H)) dut (
    .clk, .rst_n, .patch_trig_i(lines), .coinc_en_i(coinc_en), .ext_trig_i(ext), .inhibit_i(inhibit),
    .trig_o(trig), .trig_src_ext_o(src), .pattern_o(pattern), .veto_o(veto));

  // independent geometry: grid cell (r,c) -> patch index
  int grid [24][24];
  int prow [NP], pcol [NP];
  initial begin
    int rows_n [6] = '{4, 6, 6, 6, 6, 4};
    int m = 0;
    for (int r = 0; r < 24; r++) for (int c = 0; c < 24; c++) grid[r][c] = -1;
    for (int gr = 0; gr < 6; gr++)
      for (int k = 0; k < rows_n[gr]; k++) begin
        int gc;
        gc = (rows_n[gr] == 4) ? k + 1 : k;
        for (int q = 0; q < 16; q++) begin
          grid[gr*4 + q/4][gc*4 + q%4] = m*16 + q;
          prow[m*16+q] = gr*4 + q/4; pcol[m*16+q] = gc*4 + q%4;
        end
        m++;
      end
  end

  // reference model
  int win [NP];
  logic [NP-1:0] lq = '0;
  int hold = 0; logic eq = 0, cq = 0;
  logic e_trig = 0, e_src = 0, e_veto = 0; logic [NP-1:0] e_pat = '0;
  always @(posedge clk) if (rst_n) begin
    logic [NP-1:0] act; logic co, cond, er;
    for (int p = 0; p < NP; p++) act[p] = (win[p] != 0);
    co = 0;
    for (int p = 0; p < NP; p++) if (act[p]) begin
      int r, c;
      r = prow[p]; c = pcol[p];
      if (c < 23 && grid[r][c+1] >= 0 && act[grid[r][c+1]]) co = 1;
      if (r < 23 && grid[r+1][c] >= 0 && act[grid[r+1][c]]) co = 1;
    end
    co = co && coinc_en;
    er = ext && !eq;
    cond = co || er;
    e_trig <= 0; e_veto <= 0;
    if (cond && !(inhibit || hold != 0)) begin
      e_trig <= 1; e_src <= !co; e_pat <= act; hold = H;
    end else begin
      if (cond && !cq) e_veto <= 1;
      if (hold != 0) hold--;
    end
    eq <= ext; cq <= cond;
    for (int p = 0; p < NP; p++) begin
      if (lines[p/16][p%16] && !lq[p]) win[p] = W; else if (win[p] != 0) win[p]--;
    end
    lq <= lines;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (trig !== e_trig || veto !== e_veto || (e_trig && (pattern !== e_pat || src !== e_src))) begin
      failures++; if (failures < 10) $display("%0t mismatch trig %b/%b veto %b/%b src %b/%b", $time, trig, e_trig, veto, e_veto, src, e_src);
    end
    if (trig) n_trig++;
    if (veto) n_veto++;
    if (trig && src) n_ext++;
  end

  task automatic pulse(int p, int len);
    fork begin
      lines[p/16][p%16] = 1; repeat (len) @(negedge clk); lines[p/16][p%16] = 0;
    end join_none
  endtask

  task automatic expect_trig_after(int ticks, bit want, string what);
    int got = 0;
    repeat (ticks) begin @(negedge clk); if (trig) got++; end
    checks++; if ((got != 0) != want) begin failures++; $display("%s: trigger %0d, wanted %0b", what, got, want); end
  endtask

  initial begin
    #400000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) win[p] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    // module 4 (row 1, first) patch 3 and module 5 patch 0 touch across the boundary
    pulse(4*16+3, 5); repeat (3) @(negedge clk); pulse(5*16+0, 5);
    @(negedge clk); checks++; if (trig) begin failures++; $display("early trigger"); end
    @(negedge clk); checks++; if (!trig || !pattern[4*16+3] || !pattern[5*16]) begin failures++; $display("no trigger 2 ticks after edge"); end
    repeat (40) @(negedge clk);
    // same pair, edges W ticks apart -> no trigger
    pulse(4*16+3, 3); repeat (W) @(negedge clk); pulse(5*16+0, 3);
    expect_trig_after(30, 0, "late pair");
    // diagonal pair (module 10 patches 0 and 5) -> no trigger
    pulse(10*16+0, 4); pulse(10*16+5, 4);
    expect_trig_after(30, 0, "diagonal");
    // vertical pair across rows of modules: module 0 patch 12 and module 5 patch 0
    pulse(0*16+12, 4); pulse(5*16+0, 4);
    expect_trig_after(30, 1, "vertical pair across modules");
    // inhibited pair -> veto
    inhibit = 1; pulse(20*16+6, 4); pulse(20*16+7, 4);
    expect_trig_after(30, 0, "inhibited"); inhibit = 0;
    // external trigger
    ext = 1; repeat (3) @(negedge clk); ext = 0;
    repeat (30) @(negedge clk);
    // coincidence disabled
    coinc_en = 0; pulse(7*16+1, 4); pulse(7*16+2, 4);
    expect_trig_after(30, 0, "disabled"); coinc_en = 1;
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 9) == 0) pulse($urandom_range(0, NP-1), $urandom_range(1, 6));
      if ($urandom_range(0, 29) == 0) begin int p; p = $urandom_range(0, NP-1); pulse(p, 4); if (p+1 < NP) pulse(p+1, 3); end
      if ($urandom_range(0, 199) == 0) ext = !ext;
      inhibit = ($urandom_range(0, 15) == 0);
    end
    checks++; if (n_trig < 5 || n_veto < 1 || n_ext < 1) begin failures++; $display("too few events: trig %0d veto %0d ext %0d", n_trig, n_veto, n_ext); end
    $display("triggers %0d vetoes %0d external %0d", n_trig, n_veto, n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
