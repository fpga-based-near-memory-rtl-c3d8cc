// hbm_write_engine: writes a 256-bit stream into HBM pseudo channels.
//
// The engine maps a stream of beats onto the HBM memory and partitions it
// among N_CH channels so that each processing element later finds its own
// share in its own channel. After `start` it writes `beats_per_ch`
// consecutive beats to channel 0 at addresses base_addr, base_addr+1, ...,
// the next `beats_per_ch` beats to channel 1, and so on through channel
// n_ch-1; then it raises `done` for one cycle. One beat is written per
// cycle whenever the addressed channel accepts it. With N_CH = 1 the same
// engine stores a PE's results in the PE's own channel.
// Following the paper: the write engine, the partitioning of data among
// channels and one channel per PE. This design's own choices: blocked
// (rather than interleaved) partitioning and the single-beat request port.
// Every channel's request carries the input beat and a constant write
// flag; only req_valid selects the channel, so those request bits are
// plain copies by design.
module hbm_write_engine
  import nma_pkg::*;
#(
  parameter int unsigned N_CH = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [HBM_ADDR_W-1:0]  base_addr,
  input  logic [HBM_ADDR_W:0]    beats_per_ch,
  input  logic [$clog2(N_CH+1)-1:0] n_ch,
  output logic                   busy,
  output logic                   done,
  // input stream
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [HBM_W-1:0]       in_data,
  // channel request ports
  output logic     [N_CH-1:0]    req_valid,
  input  logic     [N_CH-1:0]    req_ready,
  output hbm_req_t [N_CH-1:0]    req
);
  localparam int unsigned CW = (N_CH > 1) ? $clog2(N_CH) : 1;
  logic [CW-1:0]         ch;
  logic [HBM_ADDR_W:0]   off;
  logic                  fire;

  always_comb begin
    req_valid = '0;
    for (int c = 0; c < N_CH; c++) begin
      req[c].we    = 1'b1;
      req[c].addr  = base_addr + off[HBM_ADDR_W-1:0];
      req[c].wdata = in_data;
    end
    if (busy) req_valid[ch] = in_valid;
  end
  assign in_ready = busy && req_ready[ch];
  assign fire     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      ch   <= '0;
      off  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= (beats_per_ch != '0) && (n_ch != '0);
        done <= (beats_per_ch == '0) || (n_ch == '0);
        ch   <= '0;
        off  <= '0;
      end else if (fire) begin
        if (off + 1'b1 == beats_per_ch) begin
          off <= '0;
          if (32'(ch) + 1 == 32'(n_ch)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            ch <= ch + 1'b1;
          end
        end else begin
          off <= off + 1'b1;
        end
      end
    end
  end
endmodule
