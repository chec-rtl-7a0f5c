// tb_timestamp_counter: checks counting, clear (PPS) priority over load, and
// load of the nanosecond counter against a software model, tick by tick.
module tb_timestamp_counter;
  logic clk = 0, rst_n = 0, clear = 0, load = 0;
  logic [31:0] load_val = 0, count, model;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  timestamp_counter #(.WIDTH(32)) dut (.clk, .rst_n, .clear_i(clear), .load_i(load), .load_val_i(load_val), .count_o(count));

  initial begin
    #5000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    model = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); model = 1;
    for (int i = 0; i < 1000; i++) begin
      checks++; if (count !== model) begin failures++; $display("mismatch %0d: %0d vs %0d", i, count, model); end
      clear = ($urandom_range(0, 30) == 0);
      load  = ($urandom_range(0, 20) == 0);
      load_val = $urandom;
      @(posedge clk);
      if (clear) model = 0; else if (load) model = load_val; else model = model + 1;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
