// timestamp_counter: nanosecond time counter shared by the trigger FPGA and
// every FEE module.
//
// The counter advances by one every clk tick (1 ns). In the trigger FPGA it is
// cleared by the array-wide 1 PPS pulse, so it counts nanoseconds within the
// current second; in an FEE module it is loaded from a re-sync message so that
// both ends agree on the time of a trigger. The low bits also select the
// storage cell the sampling ASICs write, which is how "re-sync counters and
// sampling" is carried out. Clear wins over load; both take effect on the next
// clock edge (count_o shows 0 or load_val_i one tick later).
module timestamp_counter #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_i,
  input  logic             load_i,
  input  logic [WIDTH-1:0] load_val_i,
  output logic [WIDTH-1:0] count_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count_o <= '0;
    else if (clear_i) count_o <= '0;
    else if (load_i)  count_o <= load_val_i;
    else              count_o <= count_o + 1'b1;
  end
endmodule
