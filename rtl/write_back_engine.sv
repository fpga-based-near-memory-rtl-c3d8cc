// write_back_engine: collects every PE's results and returns them to the host.
//
// When the processing elements have stored their results in their own HBM
// channels, this engine reads `beats_per_ch` beats from base_addr of channel
// 0, then of channel 1, and so on through channel n_ch-1, through one
// hbm_read_engine whose port is switched to the channel being read. The
// 256-bit beats go through a stream_converter that packs four of them into
// each 1024-bit OpenCAPI line; after the last channel a partly filled line
// is flushed with zero padding. `done` pulses once the last line has been
// accepted by the host side.
// Following the paper: reading results from the HBM channels, the
// 256-to-1024 stream conversion and the transfer to the host. This
// design's own choices: channels are drained one after another, in order,
// and results of consecutive channels are packed without gaps.
// The channel requests are reads only, so their write flag and write data
// are constant zero.
module write_back_engine
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
  // channel ports
  output logic     [N_CH-1:0]    req_valid,
  input  logic     [N_CH-1:0]    req_ready,
  output hbm_req_t [N_CH-1:0]    req,
  input  logic     [N_CH-1:0]    rsp_valid,
  input  logic [N_CH-1:0][HBM_W-1:0] rsp_data,
  // host side
  output logic                   line_valid,
  input  logic                   line_ready,
  output logic [OCAPI_W-1:0]     line_data
);
  localparam int unsigned CW = (N_CH > 1) ? $clog2(N_CH) : 1;
  typedef enum logic [1:0] {IDLE, READ, FLUSH} state_e;
  state_e        state;
  logic [CW-1:0] ch;
  logic          rd_start, rd_busy, rd_done;
  logic          rd_req_valid;
  hbm_req_t      rd_req;
  logic          b_valid, b_ready;
  logic [HBM_W-1:0] b_data;
  logic          conv_idle;

  hbm_read_engine #(.FIFO_DEPTH(8)) u_rd (
    .clk, .rst_n, .start(rd_start), .base_addr, .n_beats(beats_per_ch),
    .busy(rd_busy), .done(rd_done),
    .req_valid(rd_req_valid), .req_ready(req_ready[ch]), .req(rd_req),
    .rsp_valid(rsp_valid[ch]), .rsp_data(rsp_data[ch]),
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data)
  );

  stream_converter u_conv (
    .clk, .rst_n, .flush(state == FLUSH),
    .beat_valid(b_valid), .beat_ready(b_ready), .beat_data(b_data),
    .line_valid, .line_ready, .line_data, .idle(conv_idle)
  );

  always_comb begin
    req_valid = '0;
    for (int c = 0; c < N_CH; c++) req[c] = rd_req;
    req_valid[ch] = rd_req_valid;
  end

  assign busy     = (state != IDLE);
  assign rd_start = (state == READ) && !rd_busy && !rd_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      ch    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          ch <= '0;
          if (n_ch == '0 || beats_per_ch == '0) done <= 1'b1;
          else state <= READ;
        end
        READ: if (rd_done) begin
          if (32'(ch) + 1 == 32'(n_ch)) state <= FLUSH;
          else ch <= ch + 1'b1;
        end
        FLUSH: if (conv_idle) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
