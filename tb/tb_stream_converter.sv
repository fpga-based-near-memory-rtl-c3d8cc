// tb_stream_converter: packs beats into lines (first beat in bits 255:0),
// holds a line while the host stalls, and flushes a partial last line with
// zero padding.
module tb_stream_converter;
  import nma_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush, beat_valid, beat_ready, line_valid, line_ready, idle;
  logic [HBM_W-1:0] beat_data;
  logic [OCAPI_W-1:0] line_data;
  stream_converter dut (.*);

  localparam int NB = 4*10 + 3;   // ten full lines and a partial one
  logic [HBM_W-1:0] beats [NB];
  int lines_got = 0;

  always @(posedge clk) if (rst_n && line_valid && line_ready) begin
    for (int k = 0; k < 4; k++) begin
      logic [HBM_W-1:0] exp;
      exp = (lines_got*4 + k < NB) ? beats[lines_got*4 + k] : '0;
      checks++;
      if (line_data[k*HBM_W +: HBM_W] != exp) begin
        failures++; $display("line %0d beat %0d wrong", lines_got, k);
      end
    end
    lines_got++;
  end
  always @(negedge clk) line_ready = ($urandom % 3) != 0;

  initial begin
    foreach (beats[i]) for (int w = 0; w < 8; w++) beats[i][w*32 +: 32] = $urandom;
    flush = 0; beat_valid = 0; beat_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NB; i++) begin
      @(negedge clk);
      beat_valid = 1; beat_data = beats[i];
      do @(posedge clk); while (!beat_ready);
      @(negedge clk) beat_valid = 0;
    end
    @(negedge clk) flush = 1;
    repeat (20) @(posedge clk);
    flush = 0;
    checks++; if (lines_got != 11) begin failures++; $display("lines %0d", lines_got); end
    checks++; if (!idle) failures++;
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
