// tb_fx_div: random signed Q16.16 divisions (and division by zero)
// against integer arithmetic; checks the W+FRAC+1 cycle latency.
module tb_fx_div;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done;
  logic signed [31:0] a, b, q;
  fx_div #(.W(32), .FRAC(16)) dut (.*);
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic one(int x, int y);
    int t0, e;
    @(negedge clk); a = x; b = y; start = 1;
    @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    e = fxd(x, y);
    checks++;
    if (q != e) begin failures++; $display("%0d / %0d: got %0d exp %0d", x, y, q, e); end
    checks++;
    if (cyc - t0 > 32 + 16 + 2) begin failures++; $display("latency %0d", cyc - t0); end
  endtask

  initial begin
    start = 0; a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    one(32'sh0003_0000, 32'sh0002_0000);     // 3 / 2 = 1.5
    one(-32'sh0003_0000, 32'sh0002_0000);
    one(32'sh0001_0000, 0);
    one(-32'sh0001_0000, 0);
    repeat (300) begin
      int x, y;
      x = int'($urandom % 32'h0100_0000) - 32'h0080_0000;
      y = int'($urandom % 32'h0010_0000) - 32'h0008_0000;
      if (y > -32'h0000_4000 && y < 32'h0000_4000) y = 32'h0001_0000;  // keep q in range
      one(x, y);
    end
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
