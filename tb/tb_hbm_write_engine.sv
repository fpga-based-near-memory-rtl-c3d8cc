// tb_hbm_write_engine: streams beats into three channel models and checks
// the blocked partitioning (beats_per_ch beats per channel from base_addr)
// and the done pulse.
module tb_hbm_write_engine;
  import nma_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NC = 3, BPC = 7;
  logic start, busy, done, in_valid, in_ready;
  logic [HBM_ADDR_W-1:0] base_addr;
  logic [HBM_ADDR_W:0] beats_per_ch;
  logic [1:0] n_ch;
  logic [HBM_W-1:0] in_data;
  logic [NC-1:0] req_valid, req_ready, rsp_valid;
  hbm_req_t [NC-1:0] req;
  logic [NC-1:0][HBM_W-1:0] rsp_data;
  hbm_write_engine #(.N_CH(NC)) dut (.*);
  for (genvar c = 0; c < NC; c++) begin : g_ch
    hbm_channel_model #(.LATENCY(4)) u_ch (.clk, .req_valid(req_valid[c]),
      .req_ready(req_ready[c]), .req(req[c]), .rsp_valid(rsp_valid[c]), .rsp_data(rsp_data[c]));
  end

  logic [HBM_W-1:0] beats [NC*BPC];
  int dones = 0;
  always @(posedge clk) if (rst_n && done) dones++;

  initial begin
    foreach (beats[i]) for (int w = 0; w < 8; w++) beats[i][w*32 +: 32] = $urandom;
    start = 0; in_valid = 0; in_data = '0; base_addr = 23'h100; beats_per_ch = BPC; n_ch = NC;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    for (int i = 0; i < NC*BPC; i++) begin
      in_valid = ($urandom % 4) != 0;
      while (!in_valid) begin @(negedge clk); in_valid = ($urandom % 4) != 0; end
      in_data = beats[i];
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
    end
    repeat (5) @(posedge clk);
    checks++; if (dones != 1 || busy) begin failures++; $display("done count %0d", dones); end
    checks++; if (g_ch[0].u_ch.writes + g_ch[1].u_ch.writes + g_ch[2].u_ch.writes != NC*BPC) failures++;
    for (int i = 0; i < NC*BPC; i++) begin
      logic [HBM_W-1:0] got;
      case (i / BPC)
        0: got = g_ch[0].u_ch.peek(23'h100 + 23'(i % BPC));
        1: got = g_ch[1].u_ch.peek(23'h100 + 23'(i % BPC));
        default: got = g_ch[2].u_ch.peek(23'h100 + 23'(i % BPC));
      endcase
      checks++; if (got != beats[i]) begin failures++; $display("beat %0d misplaced", i); end
    end
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
