// vadvc_pe: vertical advection processing element (tridiagonal solver).
//
// Vertical advection couples the levels of each vertical grid column
// implicitly, which gives one tridiagonal system per column,
//   a[k] x[k-1] + b[k] x[k] + c[k] x[k+1] = d[k],  k = 0..DEPTH-1,
// solved with the Thomas algorithm: a forward sweep from the bottom level
// to the top,
//   m = b[k] - a[k] c'[k-1],  c'[k] = c[k] / m,
//   d'[k] = (d[k] - a[k] d'[k-1]) / m          (c'[-1] = d'[-1] = 0),
// followed by a backward sweep from the top level down,
//   x[DEPTH-1] = d'[DEPTH-1],  x[k] = d'[k] - c'[k] x[k+1].
// The sweeps carry a dependency from level to level, so the PE works on
// one column at a time; columns are independent and the n_items columns of
// the PE's grid block are processed one after the other.
//
// Stream format (this design's choice): a column arrives as 4*DEPTH/8
// beats holding a[0..DEPTH-1], then b, c and d, 8 words per beat, word 0 in
// bits 31:0. Its solution x leaves as DEPTH/8 beats. Values are signed
// Q16.16 fixed point (nma_pkg); the two divisions of a level run in
// parallel in two fx_div units.
// Timing per column: 4*DEPTH/8 cycles to load, DEPTH*(W+FRAC+3) cycles
// forward, DEPTH cycles backward, DEPTH/8 cycles out.
// Following the paper: the Thomas algorithm with a forward and a backward
// sweep along the vertical, one block of the grid per PE. Not in the
// paper and therefore this design's choice: how COSMO forms a, b, c and d
// from its wind and tracer fields (the PE takes them ready-made), fixed
// point instead of float32, and the schedule.
module vadvc_pe
  import nma_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        n_items,     // columns in this job
  output logic               busy,
  output logic               done,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [HBM_W-1:0]   in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [HBM_W-1:0]   out_data
);
  localparam int unsigned NIN  = 4 * DEPTH / WORDS_PER_BEAT;
  localparam int unsigned NOUT = DEPTH / WORDS_PER_BEAT;
  localparam int unsigned KW   = $clog2(DEPTH);
  localparam int unsigned IW   = $clog2(4 * DEPTH);

  typedef enum logic [2:0] {IDLE, LOAD, FWD_ISSUE, FWD_WAIT, BWD, EMIT} state_e;
  state_e state;

  fx_t coef [4*DEPTH];          // a | b | c | d
  fx_t cp [DEPTH], dp [DEPTH], x [DEPTH];
  logic [$clog2(NIN+1)-1:0] beat_cnt;
  logic [KW-1:0] k;
  logic [31:0]   cols_done;

  fx_t a_k, b_k, c_k, d_k, cp_prev, dp_prev, m_k, num_d;
  always_comb begin
    a_k = coef[IW'(k)];
    b_k = coef[IW'(DEPTH) + IW'(k)];
    c_k = coef[IW'(2*DEPTH) + IW'(k)];
    d_k = coef[IW'(3*DEPTH) + IW'(k)];
    cp_prev = (k == '0) ? '0 : cp[k - 1'b1];
    dp_prev = (k == '0) ? '0 : dp[k - 1'b1];
    m_k   = b_k - fx_mul(a_k, cp_prev);
    num_d = d_k - fx_mul(a_k, dp_prev);
  end

  logic div_start, c_busy, c_done, d_busy, d_done;
  fx_t  c_q, d_q;
  logic c_got, d_got;
  assign div_start = (state == FWD_ISSUE);

  fx_div #(.W(WORD_W), .FRAC(FRAC_W)) u_div_c (
    .clk, .rst_n, .start(div_start), .a(c_k), .b(m_k),
    .busy(c_busy), .done(c_done), .q(c_q));
  fx_div #(.W(WORD_W), .FRAC(FRAC_W)) u_div_d (
    .clk, .rst_n, .start(div_start), .a(num_d), .b(m_k),
    .busy(d_busy), .done(d_done), .q(d_q));

  fx_t x_next;
  assign x_next = (32'(k) == DEPTH - 1) ? dp[k] : dp[k] - fx_mul(cp[k], x[k + 1'b1]);

  assign busy      = (state != IDLE);
  assign in_ready  = (state == LOAD);
  assign out_valid = (state == EMIT);
  always_comb begin
    for (int w = 0; w < WORDS_PER_BEAT; w++)
      out_data[w*WORD_W +: WORD_W] = x[KW'(beat_cnt * WORDS_PER_BEAT + w)];
  end

  always_ff @(posedge clk) begin
    if (state == LOAD && in_valid)
      for (int w = 0; w < WORDS_PER_BEAT; w++)
        coef[IW'(beat_cnt * WORDS_PER_BEAT + w)] <= in_data[w*WORD_W +: WORD_W];
    if (state == FWD_WAIT && c_got && d_got) begin
      cp[k] <= c_q;
      dp[k] <= d_q;
    end
    if (state == BWD) x[k] <= x_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      done      <= 1'b0;
      beat_cnt  <= '0;
      k         <= '0;
      cols_done <= '0;
      c_got     <= 1'b0;
      d_got     <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          cols_done <= '0;
          beat_cnt  <= '0;
          if (n_items == 0) done <= 1'b1;
          else state <= LOAD;
        end
        LOAD: if (in_valid) begin
          if (32'(beat_cnt) + 1 == NIN) begin
            beat_cnt <= '0;
            k        <= '0;
            state    <= FWD_ISSUE;
          end else begin
            beat_cnt <= beat_cnt + 1'b1;
          end
        end
        FWD_ISSUE: begin
          c_got <= 1'b0;
          d_got <= 1'b0;
          state <= FWD_WAIT;
        end
        FWD_WAIT: begin
          if (c_done) c_got <= 1'b1;
          if (d_done) d_got <= 1'b1;
          if (c_got && d_got) begin
            if (32'(k) == DEPTH - 1) begin
              state <= BWD;           // k stays at the top level
            end else begin
              k     <= k + 1'b1;
              state <= FWD_ISSUE;
            end
          end
        end
        BWD: begin
          if (k == '0) begin
            beat_cnt <= '0;
            state    <= EMIT;
          end else begin
            k <= k - 1'b1;
          end
        end
        EMIT: if (out_ready) begin
          if (32'(beat_cnt) + 1 == NOUT) begin
            beat_cnt  <= '0;
            cols_done <= cols_done + 1;
            if (cols_done + 1 == n_items) begin
              state <= IDLE;
              done  <= 1'b1;
            end else begin
              state <= LOAD;
            end
          end else begin
            beat_cnt <= beat_cnt + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  wire unused_div = c_busy | d_busy;
endmodule
