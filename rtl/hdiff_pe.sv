// hdiff_pe: horizontal diffusion processing element.
//
// Horizontal diffusion smooths each horizontal plane of a 3-D weather
// field. It is a compound stencil: a 5-point Laplacian is computed around
// the point and its four neighbours (13 input points in all), the
// Laplacians give flux terms in x and y through 2-point differences, each
// flux is set to zero where it would sharpen the field (flux and field
// gradient of the same sign), and the output is the input minus coeff
// times the divergence of the fluxes:
//   lap(r,c) = 4 in(r,c) - in(r-1,c) - in(r+1,c) - in(r,c-1) - in(r,c+1)
//   fx(r,c)  = lap(r,c+1) - lap(r,c),  0 if fx  * (in(r,c+1)-in(r,c)) > 0
//   fy(r,c)  = lap(r+1,c) - lap(r,c),  0 if fy  * (in(r+1,c)-in(r,c)) > 0
//   out(r,c) = in(r,c) - coeff * (fx(r,c) - fx(r,c-1) + fy(r,c) - fy(r-1,c))
// Points closer than 2 to the plane edge have no full stencil and are
// copied unchanged. Planes do not depend on one another, so a PE simply
// processes the n_items planes of its block one after the other.
//
// Implementation: a plane of ROWS x COLS words is loaded into an on-chip
// plane buffer (block/ultra RAM on an FPGA), 8 words per 256-bit input
// beat in raster order. The stencil then visits every point in raster order
// at one point per cycle, reading its 13-point neighbourhood from the
// buffer, and packs 8 results per 256-bit output beat (stalling while the
// output is not taken). Values are signed Q16.16 fixed point (nma_pkg).
// Timing per plane: ROWS*COLS/8 cycles to load, ROWS*COLS cycles to
// compute when the output is never stalled.
// Following the paper: the Laplacian-then-flux-then-output composition over
// 5 input offsets per Laplacian, no vertical dependency, a grid block per
// PE. This design's own choices: the flux limiter and update formula (the
// usual COSMO form, not printed in the paper), fixed point instead of
// float32, a scalar coefficient, edge handling and the load/compute
// schedule.
module hdiff_pe
  import nma_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        n_items,     // planes in this job
  input  fx_t                coeff,
  output logic               busy,
  output logic               done,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [HBM_W-1:0]   in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [HBM_W-1:0]   out_data
);
  localparam int unsigned NPTS   = ROWS * COLS;
  localparam int unsigned NBEATS = NPTS / WORDS_PER_BEAT;
  localparam int unsigned PW     = $clog2(NPTS);
  localparam int unsigned RW     = $clog2(ROWS);
  localparam int unsigned CW     = $clog2(COLS);

  typedef enum logic [1:0] {IDLE, LOAD, COMPUTE, EMIT} state_e;
  state_e state;

  fx_t plane [NPTS];
  logic [$clog2(NBEATS+1)-1:0] beat_cnt;
  logic [RW-1:0] r;
  logic [CW-1:0] c;
  logic [2:0]    slot;
  logic [31:0]   planes_done;
  logic [HBM_W-1:0] obuf;
  logic          plane_end;   // last beat of the plane is in obuf

  function automatic fx_t px(int rr, int cc);
    return plane[rr * int'(COLS) + cc];
  endfunction

  function automatic fx_t lap(int rr, int cc);
    return (px(rr, cc) <<< 2) - px(rr-1, cc) - px(rr+1, cc)
           - px(rr, cc-1) - px(rr, cc+1);
  endfunction

  // Flux limiter: zero when flux * gradient > 0.
  function automatic fx_t limit(fx_t f, fx_t grad);
    if (f != 0 && grad != 0 && (f[WORD_W-1] == grad[WORD_W-1])) return '0;
    return f;
  endfunction

  fx_t result;
  always_comb begin
    int ri, ci;
    fx_t l_c, l_n, l_s, l_w, l_e, fx_e, fx_w, fy_s, fy_n;
    ri = int'(r);
    ci = int'(c);
    result = px(ri, ci);
    l_c = '0; l_n = '0; l_s = '0; l_w = '0; l_e = '0;
    fx_e = '0; fx_w = '0; fy_s = '0; fy_n = '0;
    if (ri >= 2 && ri < int'(ROWS) - 2 && ci >= 2 && ci < int'(COLS) - 2) begin
      l_c  = lap(ri, ci);
      l_n  = lap(ri-1, ci);
      l_s  = lap(ri+1, ci);
      l_w  = lap(ri, ci-1);
      l_e  = lap(ri, ci+1);
      fx_e = limit(l_e - l_c, px(ri, ci+1) - px(ri, ci));
      fx_w = limit(l_c - l_w, px(ri, ci) - px(ri, ci-1));
      fy_s = limit(l_s - l_c, px(ri+1, ci) - px(ri, ci));
      fy_n = limit(l_c - l_n, px(ri, ci) - px(ri-1, ci));
      result = px(ri, ci) - fx_mul(coeff, fx_e - fx_w + fy_s - fy_n);
    end
  end

  assign busy      = (state != IDLE);
  assign in_ready  = (state == LOAD);
  assign out_valid = (state == EMIT);
  assign out_data  = obuf;

  always_ff @(posedge clk) begin
    if (state == LOAD && in_valid)
      for (int w = 0; w < WORDS_PER_BEAT; w++)
        plane[PW'(beat_cnt * WORDS_PER_BEAT + w)] <= in_data[w*WORD_W +: WORD_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= IDLE;
      done        <= 1'b0;
      beat_cnt    <= '0;
      r           <= '0;
      c           <= '0;
      slot        <= '0;
      planes_done <= '0;
      obuf        <= '0;
      plane_end   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          planes_done <= '0;
          beat_cnt    <= '0;
          if (n_items == 0) done <= 1'b1;
          else state <= LOAD;
        end
        LOAD: if (in_valid) begin
          if (32'(beat_cnt) + 1 == NBEATS) begin
            beat_cnt <= '0;
            r <= '0;
            c <= '0;
            slot <= '0;
            state <= COMPUTE;
          end else begin
            beat_cnt <= beat_cnt + 1'b1;
          end
        end
        COMPUTE: begin
          obuf[slot*WORD_W +: WORD_W] <= result;
          slot <= slot + 1'b1;
          if (32'(c) == COLS - 1) begin
            c <= '0;
            r <= (32'(r) == ROWS - 1) ? '0 : r + 1'b1;
            plane_end <= (32'(r) == ROWS - 1);
          end else begin
            c <= c + 1'b1;
          end
          if (slot == 3'd7) state <= EMIT;
        end
        EMIT: if (out_ready) begin
          if (plane_end) begin
            plane_end <= 1'b0;
            planes_done <= planes_done + 1;
            if (planes_done + 1 == n_items) begin
              state <= IDLE;
              done  <= 1'b1;
            end else begin
              state <= LOAD;
            end
          end else begin
            state <= COMPUTE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
