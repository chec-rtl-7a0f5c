// byte_fifo: the event buffer of an FEE module, a synchronous FIFO of
// DEPTH entries of WIDTH bits (a byte plus its end-of-packet flag).
//
// First-word fall-through: rd_data_o shows the oldest entry whenever
// empty_o is low; rd_i pops it at the clock edge. wr_i pushes wr_data_i and is
// ignored when full. used_o counts the stored entries. DEPTH must be a power
// of two. The paper says the module FPGA buffers raw data for output; the
// depth is this design's choice.
module byte_fifo #(
  parameter int unsigned WIDTH = 9,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_i,
  input  logic [WIDTH-1:0]           wr_data_i,
  input  logic                       rd_i,
  output logic [WIDTH-1:0]           rd_data_o,
  output logic                       empty_o,
  output logic                       full_o,
  output logic [$clog2(DEPTH+1)-1:0] used_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign empty_o   = (used_o == 0);
  assign full_o    = (used_o == DEPTH[$bits(used_o)-1:0]);
  assign do_wr     = wr_i && !full_o;
  assign do_rd     = rd_i && !empty_o;
  assign rd_data_o = mem[rp];

  always_ff @(posedge clk)
    if (do_wr) mem[wp] <= wr_data_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp     <= '0;
      rp     <= '0;
      used_o <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      used_o <= used_o + {{($bits(used_o)-1){1'b0}}, do_wr} - {{($bits(used_o)-1){1'b0}}, do_rd};
    end
  end
endmodule
