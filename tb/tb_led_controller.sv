// tb_led_controller: checks that a rising fire input lights exactly the
// programmed LEDs for PULSE_NS ticks starting one tick later, that a held
// fire input flashes once, that periodic mode flashes every period_i ticks,
// and that the flash counter matches.
module tb_led_controller;
  localparam int PW = 4;
  logic clk = 0, rst_n = 0, fire = 0;
  logic [31:0] period = 0, count;
  logic [3:0][9:0] pattern = '0, led;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  led_controller #(.N_FLASHERS(4), .N_LEDS(10), .PULSE_NS(PW)) dut (
    .clk, .rst_n, .fire_i(fire), .period_i(period), .pattern_i(pattern), .led_o(led), .flash_count_o(count));

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_flash(logic [3:0][9:0] pat);
    // called at the negedge where fire has just been raised
    @(negedge clk);
    for (int k = 0; k < PW; k++) begin
      checks++; if (led !== pat) begin failures++; $display("tick %0d led %h want %h", k, led, pat); end
      @(negedge clk);
    end
    checks++; if (led !== '0) begin failures++; $display("led stays on"); end
  endtask

  initial begin
    int n, first, t;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      logic [3:0][9:0] p;
      p = {$urandom, $urandom}; pattern = p;
      repeat (3) @(negedge clk);
      fire = 1;
      check_flash(p);
      repeat (10) @(negedge clk);   // held high: no second flash
      checks++; if (led !== '0) begin failures++; $display("second flash while held"); end
      fire = 0;
    end
    checks++; if (count != 20) begin failures++; $display("count %0d", count); end
    // periodic mode: 37-tick period
    pattern = '1; period = 37; n = 0; first = -1;
    for (t = 0; t < 400; t++) begin
      @(negedge clk);
      if (led != 0 && first < 0) first = t;
      if (led != 0 && (t - first) % 37 == 0) n++;
      if (first >= 0) begin
        checks++;
        if ((led != 0) != (((t - first) % 37) < PW)) begin failures++; $display("periodic shape at %0d", t); end
      end
    end
    checks++; if (n < 10) begin failures++; $display("periodic flashes %0d", n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
