// tb_serial_link: sends random READOUT and RESYNC messages through
// serial_link_tx into serial_link_rx and checks each received message, the
// fixed latency MSG_BITS*BIT_NS + BIT_NS/2 + 2 from acceptance to
// msg_valid, back-to-back frames, and that ready is low for the whole frame.
module tb_serial_link;
  import chec_pkg::*;
  localparam int unsigned BIT_NS = 4;
  localparam int LAT = MSG_BITS * BIT_NS + BIT_NS / 2 + 2;
  logic clk = 0, rst_n = 0, send = 0, ready, line, mvalid;
  link_msg_t msg, rx_msg, exp_q[$];
  longint t_acc[$];
  longint tick = 0;
  int checks = 0, failures = 0, received = 0;
  always #1 clk = ~clk;
  always @(posedge clk) tick <= tick + 1;

  serial_link_tx #(.BIT_NS(BIT_NS)) utx (.clk, .rst_n, .send_i(send), .msg_i(msg), .ready_o(ready), .line_o(line));
  serial_link_rx #(.BIT_NS(BIT_NS)) urx (.clk, .rst_n, .line_i(line), .msg_valid_o(mvalid), .msg_o(rx_msg));

  initial begin
    #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && mvalid) begin
    link_msg_t e; longint ta;
    received++;
    e = exp_q.pop_front(); ta = t_acc.pop_front();
    checks++; if (rx_msg !== e) begin failures++; $display("msg mismatch %h vs %h", rx_msg, e); end
    checks++; if (tick - ta != LAT) begin failures++; $display("latency %0d, expected %0d", tick - ta, LAT); end
  end

  initial begin
    msg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      msg = '{kind: (i % 3 == 0) ? MSG_RESYNC : MSG_READOUT, event_id: $urandom, timestamp: $urandom};
      if (i % 5 == 0) begin msg.event_id = '1; msg.timestamp = '1; end
      send = 1;
      while (!ready) @(negedge clk);
      @(posedge clk);
      exp_q.push_back(msg); t_acc.push_back(tick);
      @(negedge clk); send = 0;
      for (int k = 0; k < (MSG_BITS + 2) * BIT_NS - 1; k++) begin
        checks++; if (ready) begin failures++; $display("ready during frame"); end
        @(negedge clk);
      end
      if (i % 2 == 0) repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    repeat (400) @(posedge clk);
    checks++; if (received != 40) begin failures++; $display("received %0d", received); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
