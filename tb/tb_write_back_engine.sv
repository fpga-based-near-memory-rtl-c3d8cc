// tb_write_back_engine: preloads result beats in three channels and checks
// the host lines: channel 0's beats first, four beats per line, a zero-
// padded partial last line, and the done pulse.
module tb_write_back_engine;
  import nma_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NC = 3, BPC = 5;      // 15 beats -> 4 lines, last one partial
  logic start, busy, done, line_valid, line_ready;
  logic [HBM_ADDR_W-1:0] base_addr;
  logic [HBM_ADDR_W:0] beats_per_ch;
  logic [1:0] n_ch;
  logic [NC-1:0] req_valid, req_ready, rsp_valid;
  hbm_req_t [NC-1:0] req;
  logic [NC-1:0][HBM_W-1:0] rsp_data;
  logic [OCAPI_W-1:0] line_data;
  write_back_engine #(.N_CH(NC)) dut (.*);
  for (genvar c = 0; c < NC; c++) begin : g_ch
    hbm_channel_model #(.LATENCY(5)) u_ch (.clk, .req_valid(req_valid[c]),
      .req_ready(req_ready[c]), .req(req[c]), .rsp_valid(rsp_valid[c]), .rsp_data(rsp_data[c]));
    initial for (int i = 0; i < BPC; i++) u_ch.poke(23'(1000 + i), {8{32'(c*100 + i + 1)}});
  end

  int lines = 0;
  always @(negedge clk) line_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n && line_valid && line_ready) begin
    for (int k = 0; k < 4; k++) begin
      int idx;
      logic [HBM_W-1:0] exp;
      idx = lines*4 + k;
      exp = (idx < NC*BPC) ? {8{32'((idx / BPC)*100 + (idx % BPC) + 1)}} : '0;
      checks++;
      if (line_data[k*HBM_W +: HBM_W] != exp) begin failures++; $display("line %0d beat %0d", lines, k); end
    end
    lines++;
  end

  initial begin
    start = 0; base_addr = 23'd1000; beats_per_ch = BPC; n_ch = NC;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++; if (lines != 4) begin failures++; $display("lines %0d", lines); end
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
