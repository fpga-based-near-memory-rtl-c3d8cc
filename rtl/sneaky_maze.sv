// sneaky_maze: builds the SneakySnake chip maze for one sequence pair.
//
// The chip maze has one row per diagonal shift d = -E..+E between the
// query Q and the reference R. Entry j of row d is 0 (a free cell) when
// Q[j+d] equals R[j] and 1 (an obstacle) otherwise; a query index outside
// the sequence is an obstacle. Row d = 0 is the paper's row i = E+1,
// rows d = -1..-E its rows i = 1..E (Q[j-i] = R[j]) and rows d = 1..E its
// rows i = E+2..2E+1 (Q[j+i-E-1] = R[j]). Rows are built for the largest
// threshold MAX_E; the run-time threshold e_thr turns rows with |d| > e_thr
// into solid obstacles so that they never win. Purely combinational.
// Row r of `rows` holds shift d = r - MAX_E; bit j of a row is column j
// (0-based) of the maze. Bases are 2-bit codes, base j in bits 2j+1:2j.
// Following the paper: Eq. (1). This design's own choices: the 2-bit base
// code, the bit order and the run-time threshold.
// Cells whose query index lies outside the read are constant obstacles
// (the corners of the outer rows).
module sneaky_maze #(
  parameter int unsigned READ_LEN = 100,
  parameter int unsigned MAX_E    = 10
) (
  input  logic [2*READ_LEN-1:0]  ref_seq,
  input  logic [2*READ_LEN-1:0]  qry_seq,
  input  logic [7:0]             e_thr,
  output logic [READ_LEN-1:0]    rows [2*MAX_E+1]
);
  always_comb begin
    for (int r = 0; r < 2*MAX_E+1; r++) begin
      for (int j = 0; j < READ_LEN; j++) begin
        int d, q;
        d = r - int'(MAX_E);
        q = j + d;
        rows[r][j] = 1'b1;
        if (q >= 0 && q < int'(READ_LEN) && (d < 0 ? -d : d) <= int'(e_thr))
          rows[r][j] = (qry_seq[2*q +: 2] != ref_seq[2*j +: 2]);
      end
    end
  end
endmodule
