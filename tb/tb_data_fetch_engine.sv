// tb_data_fetch_engine: sends cache lines and checks that each comes out as
// four 256-bit beats, lowest words first, at one beat per cycle when the
// consumer is always ready (4 cycles per line), and under random stalls.
module tb_data_fetch_engine;
  import nma_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic line_valid, line_ready, beat_valid, beat_ready;
  logic [OCAPI_W-1:0] line_data;
  logic [HBM_W-1:0] beat_data;
  data_fetch_engine dut (.*);

  localparam int NL = 40;
  logic [OCAPI_W-1:0] lines [NL];
  int sent = 0, got = 0, first_beat = -1, last_beat = -1, cyc = 0;
  bit stall_mode = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && beat_valid && beat_ready) begin
    checks++;
    if (beat_data != lines[got/4][(got%4)*HBM_W +: HBM_W]) begin
      failures++; $display("beat %0d wrong", got);
    end
    if (got == 0) first_beat = cyc;
    if (got == 4*20 - 1) last_beat = cyc;
    got++;
  end

  initial begin
    foreach (lines[i]) for (int w = 0; w < 32; w++) lines[i][w*32 +: 32] = $urandom;
    line_valid = 0; beat_ready = 1; line_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NL; i++) begin
      if (i == 20) stall_mode = 1;
      @(negedge clk);
      line_valid = 1; line_data = lines[i];
      do begin
        if (stall_mode) beat_ready = $urandom % 2;
        @(posedge clk);
      end while (!line_ready);
      @(negedge clk) line_valid = 0;
    end
    beat_ready = 1;
    repeat (20) @(posedge clk);
    checks++; if (got != 4*NL) begin failures++; $display("got %0d beats", got); end
    // 20 lines in 80 beats without stalls: 1 beat per cycle
    checks++; if (last_beat - first_beat > 80 + 20) begin
      failures++; $display("rate: %0d cycles for 80 beats", last_beat - first_beat);
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
