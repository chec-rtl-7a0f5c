// coincidence_trigger: camera-level trigger decision of the backplane FPGA.
//
// Input: the 512 first-level trigger lines (16 per module), each the output
// of a trigger ASIC comparing the analogue sum of a 2x2 pixel patch with a
// threshold. A rising edge on a line opens a coincidence window of COINC_NS
// ticks for that patch. The camera triggers when two neighbouring patches
// (sharing an edge on the camera's 24x24 patch grid, also across module
// boundaries) have open windows at the same time, i.e. their edges lie less
// than COINC_NS ns apart. A rising edge on ext_trig_i triggers as well.
//
// Timing: a line that rises in tick t opens its window from t+1; trig_o is a
// one-tick pulse in the tick after the condition is seen, so a coincidence
// completed by an edge in tick t gives trig_o in tick t+2. pattern_o holds the
// open windows at the trigger until the next trigger, and trig_src_o tells
// which source fired. After a trigger, HOLDOFF_NS ticks must pass before the
// next one; while inhibit_i is high (readout busy) or during hold-off a
// trigger condition is dropped and its first tick reported on veto_o.
//
// The paper gives the rule (coincidence of two neighbouring patches) and the
// nanosecond accuracy; the edge-based window, the hold-off, the veto and the
// module placement on the grid are this design's choices (see chec_pkg).
module coincidence_trigger
  import chec_pkg::*;
#(
  parameter int unsigned N_MOD      = N_MODULES,
  parameter int unsigned COINC_NS   = 8,
  parameter int unsigned HOLDOFF_NS = 16
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic [N_MOD-1:0][PATCH_PER_MODULE-1:0]     patch_trig_i,
  input  logic                                       coinc_en_i,
  input  logic                                       ext_trig_i,
  input  logic                                       inhibit_i,
  output logic                                       trig_o,
  output logic                                       trig_src_ext_o,
  output logic [N_MOD*PATCH_PER_MODULE-1:0]          pattern_o,
  output logic                                       veto_o
);
  localparam int unsigned NP = N_MOD * PATCH_PER_MODULE;

  logic [NP-1:0] line, line_q, active;
  logic [$clog2(COINC_NS+1)-1:0] win [NP];
  logic [NP-1:0] pair_hit;
  logic          ext_q, ext_rise, coinc, cond, cond_q, blocked;
  logic [$clog2(HOLDOFF_NS+1)-1:0] holdoff;

  assign line = patch_trig_i;

  // Coincidence windows, one per patch.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_q <= '0;
      for (int p = 0; p < NP; p++) win[p] <= '0;
    end else begin
      line_q <= line;
      for (int p = 0; p < NP; p++) begin
        if (line[p] && !line_q[p]) win[p] <= COINC_NS[$bits(win[p])-1:0];
        else if (win[p] != 0)       win[p] <= win[p] - 1'b1;
      end
    end
  end

  always_comb
    for (int p = 0; p < NP; p++) active[p] = (win[p] != 0);

  // Each patch checks its right and lower neighbour, so every adjacent pair
  // is tested exactly once.
  for (genvar m = 0; m < N_MOD; m++) begin : g_mod
    for (genvar q = 0; q < PATCH_PER_MODULE; q++) begin : g_patch
      localparam int R  = patch_row(m, q);
      localparam int C  = patch_col(m, q);
      localparam int PR = patch_at(R, C + 1, N_MOD);
      localparam int PD = patch_at(R + 1, C, N_MOD);
      localparam int P  = m * PATCH_PER_MODULE + q;
      logic right_hit, down_hit;
      if (PR >= 0) begin : g_r
        assign right_hit = active[PR];
      end else begin : g_nr
        assign right_hit = 1'b0;
      end
      if (PD >= 0) begin : g_d
        assign down_hit = active[PD];
      end else begin : g_nd
        assign down_hit = 1'b0;
      end
      assign pair_hit[P] = active[P] && (right_hit || down_hit);
    end
  end

  assign coinc    = coinc_en_i && (|pair_hit);
  assign ext_rise = ext_trig_i && !ext_q;
  assign cond     = coinc || ext_rise;
  assign blocked  = inhibit_i || (holdoff != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ext_q          <= 1'b0;
      cond_q         <= 1'b0;
      holdoff        <= '0;
      trig_o         <= 1'b0;
      trig_src_ext_o <= 1'b0;
      pattern_o      <= '0;
      veto_o         <= 1'b0;
    end else begin
      ext_q  <= ext_trig_i;
      cond_q <= cond;
      trig_o <= 1'b0;
      veto_o <= 1'b0;
      if (holdoff != 0) holdoff <= holdoff - 1'b1;
      if (cond && !blocked) begin
        trig_o         <= 1'b1;
        trig_src_ext_o <= !coinc;
        pattern_o      <= active;
        holdoff        <= HOLDOFF_NS[$bits(holdoff)-1:0];
      end else if (cond && !cond_q) begin
        veto_o <= 1'b1;
      end
    end
  end
endmodule
