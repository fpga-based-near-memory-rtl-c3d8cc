// tb_hdiff_pe: three random 12 x 16 planes through the PE; every output
// word is compared with the reference stencil. Also checks that edge
// points are copied and the cycle count of a plane (load + one point per
// cycle) when the output is never stalled.
module tb_hdiff_pe;
  import nma_pkg::*;
  import tb_ref_pkg::*;
  localparam int R = 12, C = 16, NPL = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, in_valid, in_ready, out_valid, out_ready;
  logic [31:0] n_items;
  fx_t coeff;
  logic [HBM_W-1:0] in_data, out_data;
  hdiff_pe #(.ROWS(R), .COLS(C)) dut (.*);

  int pl [NPL][];
  int got = 0, cyc = 0, t0 = 0, t1 = 0, changed = 0;
  bit stall = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) out_ready = stall ? ($urandom % 2) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int w = 0; w < 8; w++) begin
      int p, idx, e;
      p = got / (R*C); idx = got % (R*C);
      e = hdiff_ref(pl[p], R, C, idx / C, idx % C, int'(coeff));
      checks++;
      if (int'(out_data[w*32 +: 32]) != e) begin
        failures++; $display("plane %0d pt %0d got %0d exp %0d", p, idx, int'(out_data[w*32 +: 32]), e);
      end
      if (e != pl[p][idx]) changed++;
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
    coeff = 32'sh0000_4000;     // 0.25
    for (int p = 0; p < NPL; p++) begin
      pl[p] = new[R*C];
      foreach (pl[p][i]) pl[p][i] = int'($urandom % 32'h0004_0000) - 32'h0002_0000;
    end
    n_items = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    // one plane, output never stalled, input sent back to back
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    t0 = cyc;
    @(negedge clk); in_valid = 1;
    for (int b = 0; b < R*C/8; b++) begin
      for (int w = 0; w < 8; w++) in_data[w*32 +: 32] = pl[0][b*8 + w];
      @(negedge clk);
    end
    in_valid = 0;
    while (!done) @(posedge clk);
    t1 = cyc;
    // R*C/8 load + R*C compute + one emit cycle per beat
    checks++; if (t1 - t0 > R*C/8 + R*C + R*C/8 + 5) begin failures++; $display("cycles %0d", t1 - t0); end
    // two more planes with a stalling consumer
    stall = 1;
    n_items = 2;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    for (int p = 1; p < NPL; p++)
      for (int b = 0; b < R*C/8; b++) begin
        logic [HBM_W-1:0] d;
        for (int w = 0; w < 8; w++) d[w*32 +: 32] = pl[p][b*8 + w];
        send(d);
      end
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++; if (got != NPL*R*C) begin failures++; $display("got %0d", got); end
    checks++; if (changed == 0) failures++;
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
