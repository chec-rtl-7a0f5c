// fee_fpga: the FPGA of one front-end (FEE) module, which controls the four
// sampling ASICs of the module and turns a camera trigger into an event packet.
//
// Time keeping. The module keeps its own nanosecond counter. A RESYNC message
// from the trigger FPGA carries that FPGA's counter value at the tick the
// link accepted it; the message arrives a fixed LINK_LAT ticks later, so the
// module loads value + LINK_LAT + 1 and from then on agrees tick for tick.
// The counter's low 12 bits are the storage cell the ASICs write this tick
// (asic_wr_cell_o), so a timestamp names a cell of the 4096-cell ring.
//
// Readout. A READOUT message {event id, trigger time T} starts the sequence:
//   1. the window start cell S = (T - LOOKBACK_NS) mod 4096 and its length of
//      WINDOW_BLOCKS x 32 cells are requested from all four ASICs at once
//      (asic_req_o, one tick);
//   2. a 12-byte header goes into the event buffer: module id, window length,
//      event id (4 bytes), T (4), S (2), multi-byte fields MSB first;
//   3. for each cell of the window, once all four ASICs show a digitised cell
//      (asic_valid_i), the cell is taken (asic_ready_o, one tick) and its 64
//      samples go into the buffer as 2 bytes each, ASIC by ASIC, channel by
//      channel, high byte (4 zero bits and bits 11:8) first. The last byte is
//      flagged as end of packet.
// An event is 12 + 96*64*2 = 12300 bytes. The buffer drains onto out_* at one
// byte every BYTE_NS ticks (8 ns, i.e. 1 Gbps) with a valid/ready handshake.
// busy_o is high from the message until the event is buffered and while the
// buffer lacks room for another event; a READOUT arriving when busy is dropped
// and counted in dropped_o.
//
// From the paper: the ASICs' storage depth (4096 ns), the 96 ns window in
// 32 ns blocks placed to the nanosecond, the FPGA reading, packaging and
// buffering the data, and the 1 Gbps output. The event format, look-back,
// buffer depth, busy handshake and the counter re-sync are this design's own;
// the UDP/Ethernet framing and ASIC configuration are not part of this block.
module fee_fpga
  import chec_pkg::*;
#(
  parameter int unsigned WINDOW_BLK  = WINDOW_BLOCKS,
  parameter int unsigned LOOKBACK_NS = 32,
  parameter int unsigned BUF_BYTES   = 16384,
  parameter int unsigned BYTE_NS     = 8,
  parameter int unsigned BIT_NS      = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [7:0]                             module_id_i,
  input  logic                                   ser_i,
  output logic                                   busy_o,
  output timestamp_t                             time_o,
  output logic [15:0]                            dropped_o,
  // sampling ASICs (shared request, per-ASIC data)
  output logic [CELL_BITS-1:0]                   asic_wr_cell_o,
  output logic                                   asic_req_o,
  output logic [CELL_BITS-1:0]                   asic_req_start_o,
  output logic [7:0]                             asic_req_blocks_o,
  input  logic [ASICS_PER_MODULE-1:0]            asic_valid_i,
  input  sample_t [ASICS_PER_MODULE-1:0][CH_PER_ASIC-1:0] asic_data_i,
  output logic                                   asic_ready_o,
  // event byte stream towards the data-acquisition board
  output logic [7:0]                             out_data_o,
  output logic                                   out_last_o,
  output logic                                   out_valid_o,
  input  logic                                   out_ready_i
);
  localparam int unsigned LINK_LAT    = MSG_BITS * BIT_NS + BIT_NS / 2 + 2;
  localparam int unsigned CELLS       = WINDOW_BLK * BLOCK_NS;
  localparam int unsigned HDR_BYTES   = 12;
  localparam int unsigned CELL_BYTES  = ASICS_PER_MODULE * CH_PER_ASIC * 2;  // 128
  localparam int unsigned EVENT_BYTES = HDR_BYTES + CELLS * CELL_BYTES;
  localparam int unsigned UW          = $clog2(BUF_BYTES + 1);

  typedef enum logic [1:0] { S_IDLE, S_HDR, S_WAIT, S_EMIT } state_e;
  state_e state;

  logic       msg_valid;
  link_msg_t  msg;
  timestamp_t now;

  event_id_t         ev_id;
  timestamp_t        ev_ts;
  logic [CELL_BITS-1:0] ev_start;
  logic [7:0]        idx;       // byte index within header / cell
  logic [7:0]        cells_done;
  sample_t [ASICS_PER_MODULE*CH_PER_ASIC-1:0] cell_q;

  logic        f_wr, f_rd, f_empty, f_full;
  logic [8:0]  f_wdata, f_rdata;
  logic [UW-1:0] f_used;
  logic [$clog2(BYTE_NS+1)-1:0] pace;

  serial_link_rx #(.BIT_NS(BIT_NS)) u_rx (
    .clk, .rst_n, .line_i(ser_i), .msg_valid_o(msg_valid), .msg_o(msg)
  );

  timestamp_counter #(.WIDTH(32)) u_time (
    .clk, .rst_n, .clear_i(1'b0),
    .load_i(msg_valid && msg.kind == MSG_RESYNC),
    .load_val_i(msg.timestamp + LINK_LAT + 1),
    .count_o(now)
  );

  assign time_o         = now;
  assign asic_wr_cell_o = now[CELL_BITS-1:0];

  logic room;
  assign room   = (BUF_BYTES - 32'(f_used)) >= EVENT_BYTES;
  assign busy_o = (state != S_IDLE) || !room;

  // header byte for the current index
  logic [7:0] hdr_byte;
  always_comb begin
    unique case (idx)
      8'd0:    hdr_byte = module_id_i;
      8'd1:    hdr_byte = 8'(CELLS);
      8'd2:    hdr_byte = ev_id[31:24];
      8'd3:    hdr_byte = ev_id[23:16];
      8'd4:    hdr_byte = ev_id[15:8];
      8'd5:    hdr_byte = ev_id[7:0];
      8'd6:    hdr_byte = ev_ts[31:24];
      8'd7:    hdr_byte = ev_ts[23:16];
      8'd8:    hdr_byte = ev_ts[15:8];
      8'd9:    hdr_byte = ev_ts[7:0];
      8'd10:   hdr_byte = 8'(ev_start >> 8);
      default: hdr_byte = ev_start[7:0];
    endcase
  end

  // sample byte for the current index: sample idx/2, high byte first
  sample_t cur_sample;
  assign cur_sample = cell_q[idx[7:1]];

  always_comb begin
    f_wr    = 1'b0;
    f_wdata = '0;
    if (state == S_HDR) begin
      f_wr    = 1'b1;
      f_wdata = {1'b0, hdr_byte};
    end else if (state == S_EMIT) begin
      f_wr    = 1'b1;
      f_wdata = {(cells_done == 8'(CELLS - 1)) && (idx == 8'(CELL_BYTES - 1)),
                 idx[0] ? cur_sample[7:0] : {4'b0, cur_sample[11:8]}};
    end
  end

  assign asic_ready_o = (state == S_WAIT) && (&asic_valid_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ev_id      <= '0;
      ev_ts      <= '0;
      ev_start   <= '0;
      idx        <= '0;
      cells_done <= '0;
      cell_q     <= '0;
      asic_req_o <= 1'b0;
      dropped_o  <= '0;
    end else begin
      asic_req_o <= 1'b0;
      if (msg_valid && msg.kind == MSG_READOUT && busy_o)
        dropped_o <= dropped_o + 1'b1;
      unique case (state)
        S_IDLE: if (msg_valid && msg.kind == MSG_READOUT && !busy_o) begin
          ev_id      <= msg.event_id;
          ev_ts      <= msg.timestamp;
          ev_start   <= CELL_BITS'(msg.timestamp - LOOKBACK_NS);
          asic_req_o <= 1'b1;
          idx        <= '0;
          cells_done <= '0;
          state      <= S_HDR;
        end
        S_HDR: begin
          if (idx == 8'(HDR_BYTES - 1)) begin
            idx   <= '0;
            state <= S_WAIT;
          end else idx <= idx + 1'b1;
        end
        S_WAIT: if (&asic_valid_i) begin
          for (int a = 0; a < ASICS_PER_MODULE; a++)
            for (int c = 0; c < CH_PER_ASIC; c++)
              cell_q[a*CH_PER_ASIC + c] <= asic_data_i[a][c];
          idx   <= '0;
          state <= S_EMIT;
        end
        S_EMIT: begin
          if (idx == 8'(CELL_BYTES - 1)) begin
            idx        <= '0;
            cells_done <= cells_done + 1'b1;
            state      <= (cells_done == 8'(CELLS - 1)) ? S_IDLE : S_WAIT;
          end else idx <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign asic_req_start_o  = ev_start;
  assign asic_req_blocks_o = 8'(WINDOW_BLK);

  byte_fifo #(.WIDTH(9), .DEPTH(BUF_BYTES)) u_buf (
    .clk, .rst_n, .wr_i(f_wr), .wr_data_i(f_wdata), .rd_i(f_rd),
    .rd_data_o(f_rdata), .empty_o(f_empty), .full_o(f_full), .used_o(f_used)
  );

  // 1 Gbps pacing: one byte every BYTE_NS ticks
  assign out_valid_o = !f_empty && (pace == 0);
  assign out_data_o  = f_rdata[7:0];
  assign out_last_o  = f_rdata[8];
  assign f_rd        = out_valid_o && out_ready_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     pace <= '0;
    else if (f_rd)  pace <= ($bits(pace))'(BYTE_NS - 1);
    else if (pace != 0) pace <= pace - 1'b1;
  end

  // the buffer never overflows: busy_o keeps a whole event's room free
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(f_wr && f_full));
endmodule
