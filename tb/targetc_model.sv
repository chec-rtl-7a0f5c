// targetc_model: behavioural model of one 16-channel sampling ASIC as seen by
// the module FPGA; it is a simulation model, not synthesizable RTL.
//
// Every clk tick (1 ns) the 16 input values, standing for the already
// quantised 12-bit analogue levels, are stored in cell wr_cell_i of a
// DEPTH-cell ring per channel (the sampling array in front of the storage
// array is folded into this write). A request (req_i, start cell, number of
// 32-cell blocks) freezes a copy of the window, as the ASIC's digitisation of
// the held cells would, and after CONV_NS ticks offers the cells one by one,
// oldest first, with a valid/ready handshake. The window wraps around the
// ring.
module targetc_model
  import chec_pkg::*;
#(
  parameter int unsigned DEPTH   = STORAGE_DEPTH,
  parameter int unsigned MAX_WIN = 16 * BLOCK_NS,
  parameter int unsigned CONV_NS = 50
) (
  input  logic                          clk,
  input  sample_t [CH_PER_ASIC-1:0]     sample_i,
  input  logic [$clog2(DEPTH)-1:0]      wr_cell_i,
  input  logic                          req_i,
  input  logic [$clog2(DEPTH)-1:0]      req_start_i,
  input  logic [7:0]                    req_blocks_i,
  output logic                          valid_o,
  output sample_t [CH_PER_ASIC-1:0]     data_o,
  input  logic                          ready_i
);
  sample_t mem [DEPTH][CH_PER_ASIC];
  sample_t win [MAX_WIN][CH_PER_ASIC];
  int      n_cells = 0;
  int      rd      = 0;
  int      conv    = 0;

  always @(posedge clk) begin
    for (int c = 0; c < CH_PER_ASIC; c++) mem[wr_cell_i][c] <= sample_i[c];
    if (req_i) begin
      n_cells <= int'(req_blocks_i) * BLOCK_NS;
      for (int k = 0; k < int'(req_blocks_i) * BLOCK_NS; k++)
        for (int c = 0; c < CH_PER_ASIC; c++)
          win[k][c] <= mem[(int'(req_start_i) + k) % DEPTH][c];
      rd   <= 0;
      conv <= CONV_NS;
    end else if (conv > 0) begin
      conv <= conv - 1;
    end else if (valid_o && ready_i) begin
      rd <= rd + 1;
    end
  end

  assign valid_o = (conv == 0) && (rd < n_cells);
  always_comb
    for (int c = 0; c < CH_PER_ASIC; c++) data_o[c] = win[rd % MAX_WIN][c];
endmodule
