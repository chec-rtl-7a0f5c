// tb_xdacq_merger: eight sources send numbered packets of random length at
// random times into the merger, with random back-pressure on the output.
// Checks that every packet arrives whole and in order per source, that
// packets are never interleaved and that out_src names the sender.
module tb_xdacq_merger;
  localparam int N = 8, PKTS = 30;
  logic clk = 0, rst_n = 0, out_ready = 0;
  logic [N-1:0][7:0] d; logic [N-1:0] v, l, r;
  logic [7:0] od; logic ov, ol; logic [2:0] osrc;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  xdacq_merger #(.N_IN(N), .IN_BUF(64)) dut (.clk, .rst_n, .in_data_i(d), .in_valid_i(v), .in_last_i(l), .in_ready_o(r),
    .out_data_o(od), .out_valid_o(ov), .out_last_o(ol), .out_src_o(osrc), .out_ready_i(out_ready));

  // source s, packet k: length len(s,k), byte i = {s, k, i} folded to 8 bits
  function automatic int plen(int s, int k); return 1 + (s * 7 + k * 13) % 40; endfunction
  function automatic logic [7:0] pbyte(int s, int k, int i); return 8'(s * 31 + k * 17 + i * 3); endfunction

  int sk [N], si [N];
  always_comb for (int s = 0; s < N; s++) begin
    v[s] = rst_n && (sk[s] < PKTS) && gate[s];
    d[s] = pbyte(s, sk[s], si[s]);
    l[s] = (si[s] == plen(s, sk[s]) - 1);
  end
  logic [N-1:0] gate;
  always @(posedge clk) if (rst_n) for (int s = 0; s < N; s++) begin
    if (v[s] && r[s]) begin
      if (l[s]) begin sk[s] <= sk[s] + 1; si[s] <= 0; end else si[s] <= si[s] + 1;
    end
  end

  int rk [N], ri [N]; int cur = -1; int got = 0;
  always @(posedge clk) if (rst_n && ov && out_ready) begin
    int s; s = int'(osrc);
    checks++;
    if (cur >= 0 && s != cur) begin failures++; $display("interleaved: %0d during %0d", s, cur); end
    if (od !== pbyte(s, rk[s], ri[s]) || ol !== (ri[s] == plen(s, rk[s]) - 1)) begin
      failures++; if (failures < 10) $display("src %0d pkt %0d byte %0d wrong", s, rk[s], ri[s]);
    end
    if (ol) begin rk[s]++; ri[s] = 0; cur = -1; got++; end else begin ri[s]++; cur = s; end
  end

  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < N; s++) begin sk[s] = 0; si[s] = 0; rk[s] = 0; ri[s] = 0; end
    gate = '1;
    repeat (3) @(negedge clk); rst_n = 1;
    while (got < N * PKTS) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      // sources pause between packets at random
      for (int s = 0; s < N; s++) if (si[s] == 0) gate[s] = ($urandom_range(0, 2) != 0); else gate[s] = 1;
    end
    for (int s = 0; s < N; s++) begin checks++; if (rk[s] != PKTS) begin failures++; $display("src %0d got %0d", s, rk[s]); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
