// tb_sneaky_pe: runs the published example (3 obstacles, E = 3: passes)
// and random read/reference pairs with 0..12 edits through the PE and
// compares each result byte with the reference walk of the maze. Checks
// the packing of 32 results per beat, the partial last beat, and that a
// pair takes at most 3 + (E+1) cycles plus input and output handshakes.
module tb_sneaky_pe;
  import nma_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 100, ME = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, in_valid, in_ready, out_valid, out_ready;
  logic [31:0] n_items;
  logic [7:0] e_thr;
  logic [HBM_W-1:0] in_data, out_data;
  sneaky_pe #(.READ_LEN(L), .MAX_E(ME)) dut (.*);

  localparam int NP = 70;
  logic [255:0] rs [NP], qs [NP];
  logic [7:0] exp [NP];
  int got = 0, beats = 0, pass_cnt = 0, rej_cnt = 0, cyc = 0, t0 = 0, t1 = 0;
  always @(posedge clk) cyc++;

  function automatic logic [255:0] enc(string s);
    logic [255:0] v;
    v = '0;
    for (int j = 0; j < s.len(); j++)
      case (s[j])
        "A": v[2*j +: 2] = 2'd0;
        "C": v[2*j +: 2] = 2'd1;
        "G": v[2*j +: 2] = 2'd2;
        default: v[2*j +: 2] = 2'd3;
      endcase
    return v;
  endfunction

  always @(negedge clk) out_ready = ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int k = 0; k < 32; k++) begin
      logic [7:0] e;
      e = (beats*32 + k < NP) ? exp[beats*32 + k] : 8'h00;
      checks++;
      if (out_data[k*8 +: 8] != e) begin
        failures++; $display("pair %0d: got %h exp %h", beats*32 + k, out_data[k*8 +: 8], e);
      end
      if (beats*32 + k < NP) begin
        if (e[7]) pass_cnt++; else rej_cnt++;
      end
    end
    beats++;
  end

  task automatic send(logic [255:0] d);
    @(negedge clk); in_valid = 1; in_data = d;
    do @(posedge clk); while (!in_ready);
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_data = '0; start = 0;
    // Example pair of the chip-maze figure: 12 bases, E = 3.
    rs[0] = enc("GGTGCAGAGCTC") | (enc("ACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTAC") << 24);
    qs[0] = enc("GGTGAGAGTTGT") | (enc("ACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTACGTAC") << 24);
    for (int i = 1; i < NP; i++) begin
      rs[i] = rand_seq(L);
      qs[i] = mutate(rs[i], L, i % 13);
    end
    e_thr = 8'd5;
    for (int i = 0; i < NP; i++) exp[i] = snk_ref(rs[i], qs[i], 5, L);
    // The reference walk reproduces the figure: 3 obstacles, passes at E = 3.
    checks++; if (snk_ref(enc("GGTGCAGAGCTC"), enc("GGTGAGAGTTGT"), 3, 12) != 8'h83) failures++;
    n_items = NP;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    for (int i = 0; i < NP; i++) begin
      if (i == 1) t0 = cyc;
      send(rs[i]);
      send(qs[i]);
    end
    while (!done) @(posedge clk);
    t1 = cyc;
    checks++; if (beats != 3) begin failures++; $display("beats %0d", beats); end
    checks++; if (pass_cnt == 0 || rej_cnt == 0) begin failures++; $display("pass %0d rej %0d", pass_cnt, rej_cnt); end
    // cycle budget: per pair 2 input handshakes (2 cycles each from the driver)
    // + 1 build + at most E+1 = 6 iterations, plus stalled output beats.
    checks++; if (t1 - t0 > (NP - 1) * (4 + 1 + 6 + 1) + 40) begin failures++; $display("slow: %0d", t1 - t0); end
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
