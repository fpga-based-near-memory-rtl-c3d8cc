// fx_div: sequential signed fixed-point divider.
//
// Computes q = (a << FRAC) / b for signed W-bit fixed-point numbers with
// FRAC fraction bits, rounding toward zero, by restoring division on the
// magnitudes, one quotient bit per cycle (W+FRAC cycles), and fixing the
// sign at the end. `start` is taken while idle; `done` pulses with the
// quotient valid on q and held there until the next start. Division by
// zero returns the largest magnitude with the sign of a. A quotient that
// does not fit W bits wraps. The divider is this design's own: the paper
// names the Thomas algorithm, which needs division, but not how it is built.
module fx_div #(
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] q
);
  localparam int unsigned NW = W + FRAC;          // dividend width
  localparam int unsigned KW = $clog2(NW + 1);

  logic [NW-1:0] num;        // shifts out, quotient shifts in
  logic [W-1:0]  rem;
  logic [W-1:0]  den;
  logic          neg, by_zero;
  logic [KW-1:0] k;

  logic [W:0] trial;
  assign trial = {rem, num[NW-1]} - {1'b0, den};
  logic [W-1:0] a_mag, b_mag;
  assign a_mag = a[W-1] ? W'(-a) : W'(a);
  assign b_mag = b[W-1] ? W'(-b) : W'(b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
      num  <= '0;
      rem  <= '0;
      den  <= '0;
      neg  <= 1'b0;
      by_zero <= 1'b0;
      k    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        num  <= NW'(a_mag) << FRAC;
        den  <= b_mag;
        neg  <= a[W-1] ^ b[W-1];
        by_zero <= (b == '0);
        rem  <= '0;
        k    <= KW'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        if (k != '0) begin
          if (!trial[W]) begin
            rem <= trial[W-1:0];
            num <= {num[NW-2:0], 1'b1};
          end else begin
            rem <= {rem[W-2:0], num[NW-1]};
            num <= {num[NW-2:0], 1'b0};
          end
          k <= k - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          if (by_zero) q <= neg ? {1'b1, {(W-1){1'b0}}} + 1'b1 : {1'b0, {(W-1){1'b1}}};
          else         q <= neg ? -W'(num) : W'(num);
        end
      end
    end
  end
endmodule
