// tb_stream_fifo: random traffic through a small FIFO; checks order, that
// a full FIFO refuses words (back-pressure) and the one-cycle latency.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [2:0] count;
  stream_fifo #(.WIDTH(16), .DEPTH(4)) dut (.*);

  int next_in = 0, next_out = 0, full_seen = 0;
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: a word written now is visible next cycle
    @(negedge clk); in_valid = 1; in_data = 16'hBEEF;
    @(negedge clk); in_valid = 0;
    checks++; if (!(out_valid && out_data == 16'hBEEF)) begin failures++; $display("latency fail"); end
    out_ready = 1; @(negedge clk); out_ready = 0;
    checks++; if (out_valid) failures++;
    // random traffic
    repeat (2000) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      in_data  = 16'(next_in);
      out_ready = ($urandom % 4) == 0;
      if (in_valid && !in_ready) begin
        full_seen++;
        checks++; if (count != 3'd4) failures++;
      end
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != 16'(next_out)) begin failures++; $display("order fail %0d %0d", out_data, next_out); end
        next_out++;
      end
      if (in_valid && in_ready) next_in++;
    end
    checks++; if (full_seen == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
