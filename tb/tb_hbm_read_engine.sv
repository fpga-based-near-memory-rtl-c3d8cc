// tb_hbm_read_engine: preloads a channel model (latency 10, random
// back-pressure) and checks that a range is streamed out complete and in
// order to a randomly stalling consumer, and that with no stalls the
// engine sustains close to one beat per cycle despite the latency.
module tb_hbm_read_engine;
  import nma_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, req_valid, req_ready, rsp_valid, out_valid, out_ready;
  logic [HBM_ADDR_W-1:0] base_addr;
  logic [HBM_ADDR_W:0] n_beats;
  hbm_req_t req;
  logic [HBM_W-1:0] rsp_data, out_data;
  hbm_read_engine #(.FIFO_DEPTH(16)) dut (.*);
  hbm_channel_model #(.LATENCY(10), .STALL_PCT(0)) u_ch (.*);

  int got = 0, cyc = 0, t0 = 0, t1 = 0;
  bit random_ready = 1;
  always @(posedge clk) cyc++;
  always @(negedge clk) out_ready = random_ready ? ($urandom % 2) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_data != {8{32'(got + 32'h55)}}) begin failures++; $display("beat %0d wrong", got); end
    got++;
  end

  task automatic run(int n);
    got = 0;
    @(negedge clk); n_beats = (HBM_ADDR_W+1)'(n); start = 1;
    @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    t1 = cyc;
    checks++; if (got != n) begin failures++; $display("got %0d of %0d", got, n); end
  endtask

  initial begin
    for (int i = 0; i < 300; i++) u_ch.poke(23'(40 + i), {8{32'(i + 32'h55)}});
    start = 0; base_addr = 23'd40; n_beats = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(100);
    random_ready = 0;
    run(200);
    checks++; if (t1 - t0 > 200 + 30) begin failures++; $display("rate: %0d cycles", t1 - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
