// tb_vadvc_pe: random diagonally dominant tridiagonal systems, one per
// column, solved by the PE and by the reference Thomas solve in the same
// fixed point; every solution word must match. Also checks that the
// solution satisfies the system to within rounding, and the cycle count.
module tb_vadvc_pe;
  import nma_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 16, NC = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, in_valid, in_ready, out_valid, out_ready;
  logic [31:0] n_items;
  logic [HBM_W-1:0] in_data, out_data;
  vadvc_pe #(.DEPTH(D)) dut (.*);

  int coef [NC][];
  int xr [NC][];
  int got = 0, cyc = 0, t0 = 0, t1 = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) out_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int w = 0; w < 8; w++) begin
      int col, k;
      col = got / D; k = got % D;
      checks++;
      if (int'(out_data[w*32 +: 32]) != xr[col][k]) begin
        failures++; $display("col %0d k %0d got %0d exp %0d", col, k, int'(out_data[w*32 +: 32]), xr[col][k]);
      end
      got++;
    end
  end

  task automatic send(logic [HBM_W-1:0] d);
    @(negedge clk); in_valid = 1; in_data = d;
    do @(posedge clk); while (!in_ready);
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_data = '0; start = 0;
    for (int c = 0; c < NC; c++) begin
      coef[c] = new[4*D];
      for (int k = 0; k < D; k++) begin
        coef[c][k]     = (k == 0)   ? 0 : int'($urandom % 32'h0001_0000) - 32'h8000;   // a
        coef[c][2*D+k] = (k == D-1) ? 0 : int'($urandom % 32'h0001_0000) - 32'h8000;   // c
        coef[c][D+k]   = 32'h0003_0000 + int'($urandom % 32'h0001_0000);              // b
        coef[c][3*D+k] = int'($urandom % 32'h0008_0000) - 32'h0004_0000;              // d
      end
      thomas_ref(coef[c], D, xr[c]);
      // the reference solution satisfies the system to within rounding
      for (int k = 0; k < D; k++) begin
        int lhs;
        lhs = fxm(coef[c][D+k], xr[c][k]);
        if (k > 0)   lhs += fxm(coef[c][k], xr[c][k-1]);
        if (k < D-1) lhs += fxm(coef[c][2*D+k], xr[c][k+1]);
        checks++;
        if (lhs - coef[c][3*D+k] > 64 || coef[c][3*D+k] - lhs > 64) begin
          failures++; $display("residual col %0d k %0d: %0d", c, k, lhs - coef[c][3*D+k]);
        end
      end
    end
    n_items = NC;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    t0 = cyc;
    for (int c = 0; c < NC; c++)
      for (int b = 0; b < 4*D/8; b++) begin
        logic [HBM_W-1:0] d;
        for (int w = 0; w < 8; w++) d[w*32 +: 32] = coef[c][b*8 + w];
        send(d);
      end
    while (!done) @(posedge clk);
    t1 = cyc;
    repeat (2) @(posedge clk);
    checks++; if (got != NC*D) begin failures++; $display("got %0d", got); end
    // per column: load (2 cycles per beat from this driver), D divisions of
    // 48+4 cycles, D backward steps, D/8 beats out (stalled about 1 in 3)
    checks++; if (t1 - t0 > NC * (2*4*D/8 + D*53 + D + 2*D/8) + 50) begin failures++; $display("cycles %0d", t1 - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
