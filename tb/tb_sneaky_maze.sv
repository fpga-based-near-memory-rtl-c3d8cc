// tb_sneaky_maze: checks the chip maze of the published example
// (R = GGTGCAGAGCTC, Q = GGTGAGAGTTGT, E = 3) cell by cell against the
// definition, and random pairs with a smaller run-time threshold, where the
// rows beyond the threshold must be solid obstacles.
module tb_sneaky_maze;
  import tb_ref_pkg::*;
  localparam int L = 12, ME = 3;
  int checks = 0, failures = 0;
  logic [2*L-1:0] ref_seq, qry_seq;
  logic [7:0] e_thr;
  logic [L-1:0] rows [2*ME+1];
  sneaky_maze #(.READ_LEN(L), .MAX_E(ME)) dut (.*);

  function automatic logic [2*L-1:0] enc(string s);
    logic [2*L-1:0] v;
    v = '0;
    for (int j = 0; j < L; j++)
      case (s[j])
        "A": v[2*j +: 2] = 2'd0;
        "C": v[2*j +: 2] = 2'd1;
        "G": v[2*j +: 2] = 2'd2;
        default: v[2*j +: 2] = 2'd3;
      endcase
    return v;
  endfunction

  task automatic check_all(int e);
    for (int i = 1; i <= 2*ME+1; i++)      // paper's row numbering, E = ME
      for (int j = 1; j <= L; j++) begin
        int qi, d;
        logic exp;
        d = (i <= ME) ? -i : i - ME - 1;
        if (i == ME+1) qi = j;
        else if (i <= ME) qi = j - i;
        else qi = j + i - ME - 1;
        exp = 1'b1;
        if (qi >= 1 && qi <= L && (d <= e) && (-d <= e))
          exp = (base(256'(qry_seq), qi-1) != base(256'(ref_seq), j-1));
        checks++;
        // paper row i holds shift d = i - ME - 1 for i > ME, -(i) for i <= ME
        if (rows[(i <= ME) ? ME - i : i - 1][j-1] != exp) begin
          failures++; $display("row %0d col %0d", i, j);
        end
      end
  endtask

  initial begin
    ref_seq = enc("GGTGCAGAGCTC");
    qry_seq = enc("GGTGAGAGTTGT");
    e_thr = 8'd3;
    #1 check_all(3);
    // the main diagonal starts with four matches, then an obstacle
    checks++; if (rows[ME][4:0] != 5'b10000) failures++;
    repeat (50) begin
      ref_seq = 24'(rand_seq(L));
      qry_seq = 24'(mutate(256'(ref_seq), L, 2));
      e_thr = 8'($urandom % 4);
      #1 check_all(int'(e_thr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
