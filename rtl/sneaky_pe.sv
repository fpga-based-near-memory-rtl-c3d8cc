// sneaky_pe: SneakySnake pre-alignment filter processing element.
//
// The filter decides whether a read and a reference segment are similar
// enough (at most E edits) to be worth a full dynamic-programming
// alignment. It finds a route through the chip maze (see sneaky_maze) that
// crosses as few obstacles as possible; the number of obstacles is a lower
// bound on the edit distance. Every maze row is held in a register array of
// READ_LEN bits and all rows are examined at once: each iteration counts,
// in every row, the consecutive free cells from the current checkpoint,
// takes the longest run, and shifts all rows right by that run plus the
// obstacle that ends it, so the next checkpoint is always bit 0. This
// removes the irregular accesses of the software version. The search stops
// when the longest run reaches the end of the sequences (pass) or the
// obstacle count exceeds E (reject).
//
// Stream format (this design's choice): a pair is two 256-bit beats, the
// reference first and then the read, 2 bits per base in the low 2*READ_LEN
// bits. Each pair yields one result byte {pass, edits[6:0]}, where edits is
// the obstacle count (E+1 for a rejected pair). Thirty-two result bytes are
// packed into a 256-bit output beat, byte k of a beat holding pair k; the
// last beat of a job of n_items pairs is sent partly filled (unused bytes
// zero). `done` pulses when the last beat has been taken.
// Timing: 2 cycles to take a pair, 1 to build the maze, then one cycle per
// checkpoint, at most E+1; the beat is emitted after its last pair.
// Following the paper: Eq. (1), the per-row register arrays, the zero
// counting, the shift by the longest run and the threshold test. This
// design's own choices: the stream format, the run-time threshold e_thr
// (0..MAX_E) and the serial (one pair at a time) schedule.
module sneaky_pe
  import nma_pkg::*;
#(
  parameter int unsigned READ_LEN = 100,
  parameter int unsigned MAX_E    = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        n_items,
  input  logic [7:0]         e_thr,
  output logic               busy,
  output logic               done,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [HBM_W-1:0]   in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [HBM_W-1:0]   out_data
);
  localparam int unsigned NR = 2*MAX_E + 1;
  localparam int unsigned LW = $clog2(READ_LEN + 1);

  typedef enum logic [2:0] {IDLE, GET_REF, GET_QRY, BUILD, ITER, EMIT} state_e;
  state_e state;

  logic [2*READ_LEN-1:0] ref_q, qry_q;
  logic [READ_LEN-1:0]   maze   [NR];
  logic [READ_LEN-1:0]   rows_q [NR];
  logic [LW-1:0]         remaining;
  logic [6:0]            edits;
  logic [31:0]           pairs_done;
  logic [4:0]            slot;
  logic [HBM_W-1:0]      obuf;

  sneaky_maze #(.READ_LEN(READ_LEN), .MAX_E(MAX_E)) u_maze (
    .ref_seq(ref_q), .qry_seq(qry_q), .e_thr, .rows(maze)
  );

  // Consecutive free cells from bit 0 of every row, and the longest run.
  logic [LW-1:0] run   [NR];
  logic [LW-1:0] longest;
  always_comb begin
    longest = '0;
    for (int r = 0; r < NR; r++) begin
      run[r] = LW'(READ_LEN);
      for (int j = READ_LEN - 1; j >= 0; j--)
        if (rows_q[r][j]) run[r] = LW'(j);
      if (run[r] > longest) longest = run[r];
    end
  end

  logic reached_end, over_thr;
  assign reached_end = (longest >= remaining);
  assign over_thr    = (32'(edits) + 1 > 32'(e_thr));

  logic [7:0] result;
  always_comb begin
    if (reached_end) result = {1'b1, edits};
    else             result = {~over_thr, edits + 7'd1};
  end

  assign busy      = (state != IDLE);
  assign in_ready  = (state == GET_REF) || (state == GET_QRY);
  assign out_valid = (state == EMIT);
  assign out_data  = obuf;

  always_ff @(posedge clk) begin
    if (state == GET_REF && in_valid) ref_q <= in_data[2*READ_LEN-1:0];
    if (state == GET_QRY && in_valid) qry_q <= in_data[2*READ_LEN-1:0];
    if (state == BUILD) rows_q <= maze;
    if (state == ITER)
      for (int r = 0; r < NR; r++)
        rows_q[r] <= rows_q[r] >> (longest + 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      done       <= 1'b0;
      remaining  <= '0;
      edits      <= '0;
      pairs_done <= '0;
      slot       <= '0;
      obuf       <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          pairs_done <= '0;
          slot       <= '0;
          obuf       <= '0;
          if (n_items == 0) done <= 1'b1;
          else state <= GET_REF;
        end
        GET_REF: if (in_valid) state <= GET_QRY;
        GET_QRY: if (in_valid) state <= BUILD;
        BUILD: begin
          remaining <= LW'(READ_LEN);
          edits     <= '0;
          state     <= ITER;
        end
        ITER: begin
          if (reached_end || over_thr) begin
            obuf[slot*8 +: 8] <= result;
            slot       <= slot + 1'b1;
            pairs_done <= pairs_done + 1;
            if (slot == 5'd31 || pairs_done + 1 == n_items) state <= EMIT;
            else state <= GET_REF;
          end else begin
            edits     <= edits + 1'b1;
            remaining <= remaining - longest - 1'b1;
          end
        end
        EMIT: if (out_ready) begin
          obuf <= '0;
          slot <= '0;
          if (pairs_done == n_items) begin
            state <= IDLE;
            done  <= 1'b1;
          end else begin
            state <= GET_REF;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
