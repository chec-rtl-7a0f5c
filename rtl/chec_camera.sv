// chec_camera: digital electronics of the camera, from the first-level
// trigger lines and the sampling ASICs' digital interface to the merged data
// stream that leaves the camera.
//
// Structure (one clk tick = 1 ns):
//   * trigger_fpga (backplane): takes the 512 patch trigger lines, the 1 PPS
//     and an external trigger, decides the camera trigger, counts events and
//     broadcasts READOUT / RESYNC messages on one serial line to all modules;
//     its trigger records (event id, time, 512-bit pattern) go to the merger.
//   * N_MOD x fee_fpga: each keeps a counter aligned with the trigger FPGA,
//     drives the write cell of its four sampling ASICs, and on READOUT reads
//     the 96 ns window, packs it into a 12300-byte event, buffers it and
//     sends it at 1 Gbps. Each reports busy back to the trigger FPGA.
//   * xdacq_merger: merges the module streams (inputs 0..N_MOD-1) and the
//     trigger records (input N_MOD) packet by packet onto one byte-wide link.
//   * led_controller: drives the four corner flashers (10 LEDs each).
// The sampling and trigger ASICs themselves are outside this RTL: the
// trigger lines enter on patch_trig_i and each module's ASIC interface is
// brought out on the asic_* ports (module m, ASIC a, channel c).
// The block split follows the paper's camera architecture; the interfaces
// between the blocks are this design's own.
module chec_camera
  import chec_pkg::*;
#(
  parameter int unsigned N_MOD       = N_MODULES,
  parameter int unsigned WINDOW_BLK  = WINDOW_BLOCKS,
  parameter int unsigned COINC_NS    = 8,
  parameter int unsigned HOLDOFF_NS  = 16,
  parameter int unsigned LOOKBACK_NS = 32,
  parameter int unsigned BUF_BYTES   = 16384,
  parameter int unsigned BYTE_NS     = 8,
  parameter int unsigned BIT_NS      = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // trigger and timing
  input  logic [N_MOD-1:0][PATCH_PER_MODULE-1:0] patch_trig_i,
  input  logic                                   coinc_en_i,
  input  logic                                   ext_trig_i,
  input  logic                                   pps_i,
  output logic                                   cam_trig_o,
  output logic                                   veto_o,
  output event_id_t                              event_count_o,
  output timestamp_t                             time_o,
  // sampling ASIC interfaces, per module
  output logic [N_MOD-1:0][CELL_BITS-1:0]        asic_wr_cell_o,
  output logic [N_MOD-1:0]                       asic_req_o,
  output logic [N_MOD-1:0][CELL_BITS-1:0]        asic_req_start_o,
  output logic [N_MOD-1:0][7:0]                  asic_req_blocks_o,
  input  logic [N_MOD-1:0][ASICS_PER_MODULE-1:0] asic_valid_i,
  input  sample_t [N_MOD-1:0][ASICS_PER_MODULE-1:0][CH_PER_ASIC-1:0] asic_data_i,
  output logic [N_MOD-1:0]                       asic_ready_o,
  output logic [N_MOD-1:0][15:0]                 fee_dropped_o,
  output timestamp_t [N_MOD-1:0]                 fee_time_o,
  // merged data stream leaving the camera
  output logic [7:0]                             dacq_data_o,
  output logic                                   dacq_valid_o,
  output logic                                   dacq_last_o,
  output logic [$clog2(N_MOD+1)-1:0]             dacq_src_o,
  input  logic                                   dacq_ready_i,
  // LED flashers
  input  logic                                   led_fire_i,
  input  logic [31:0]                            led_period_i,
  input  logic [3:0][9:0]                        led_pattern_i,
  output logic [3:0][9:0]                        led_o,
  output logic [31:0]                            led_flash_count_o
);
  localparam int unsigned NIN = N_MOD + 1;

  logic                 ser;
  logic [N_MOD-1:0]     fee_busy;
  logic [NIN-1:0][7:0]  m_data;
  logic [NIN-1:0]       m_valid, m_last, m_ready;

  trigger_fpga #(.N_MOD(N_MOD), .COINC_NS(COINC_NS), .HOLDOFF_NS(HOLDOFF_NS), .BIT_NS(BIT_NS)) u_trigger (
    .clk, .rst_n, .patch_trig_i, .coinc_en_i, .ext_trig_i, .pps_i,
    .fee_busy_i(fee_busy), .ser_o(ser), .cam_trig_o, .veto_o,
    .time_o, .event_count_o,
    .rec_data_o(m_data[N_MOD]), .rec_valid_o(m_valid[N_MOD]),
    .rec_last_o(m_last[N_MOD]), .rec_ready_i(m_ready[N_MOD])
  );

  for (genvar m = 0; m < N_MOD; m++) begin : g_fee
    fee_fpga #(.WINDOW_BLK(WINDOW_BLK), .LOOKBACK_NS(LOOKBACK_NS), .BUF_BYTES(BUF_BYTES),
               .BYTE_NS(BYTE_NS), .BIT_NS(BIT_NS)) u_fee (
      .clk, .rst_n, .module_id_i(8'(m)), .ser_i(ser), .busy_o(fee_busy[m]),
      .time_o(fee_time_o[m]), .dropped_o(fee_dropped_o[m]),
      .asic_wr_cell_o(asic_wr_cell_o[m]), .asic_req_o(asic_req_o[m]),
      .asic_req_start_o(asic_req_start_o[m]), .asic_req_blocks_o(asic_req_blocks_o[m]),
      .asic_valid_i(asic_valid_i[m]), .asic_data_i(asic_data_i[m]), .asic_ready_o(asic_ready_o[m]),
      .out_data_o(m_data[m]), .out_last_o(m_last[m]), .out_valid_o(m_valid[m]),
      .out_ready_i(m_ready[m])
    );
  end

  xdacq_merger #(.N_IN(NIN)) u_xdacq (
    .clk, .rst_n, .in_data_i(m_data), .in_valid_i(m_valid), .in_last_i(m_last),
    .in_ready_o(m_ready), .out_data_o(dacq_data_o), .out_valid_o(dacq_valid_o),
    .out_last_o(dacq_last_o), .out_src_o(dacq_src_o), .out_ready_i(dacq_ready_i)
  );

  led_controller #(.N_FLASHERS(4), .N_LEDS(10)) u_led (
    .clk, .rst_n, .fire_i(led_fire_i), .period_i(led_period_i), .pattern_i(led_pattern_i),
    .led_o, .flash_count_o(led_flash_count_o)
  );
endmodule
