// data_fetch_engine: host cache lines in, HBM-width beats out.
//
// The host sends its input data (sequence pairs or weather grid fields) as
// 1024-bit POWER9 cache lines over OpenCAPI. This engine latches one line
// into a 1024-bit AXI register, unpacks it into a cache-line buffer of 32
// addresses holding one 32-bit (float32-sized) word each, and then emits
// the buffer as four 256-bit beats, lowest-addressed words first, to the
// HBM-write engine. One line is taken while the buffer is empty; a beat
// leaves whenever out_ready is high, so a line costs 1 cycle in and 4 out,
// and the next line is accepted in the cycle its predecessor's last beat
// leaves (4 cycles per line in steady state, one quarter of a line per
// cycle, which is the full bandwidth of one HBM channel).
// Following the paper: the 1024-bit register, the 32-address buffer of
// 32-bit words and the 1024-to-256 conversion. This design's own choices:
// the valid/ready handshakes and the word order inside a beat.
module data_fetch_engine
  import nma_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // OpenCAPI side: one cache line per transfer
  input  logic               line_valid,
  output logic               line_ready,
  input  logic [OCAPI_W-1:0] line_data,
  // HBM side: 256-bit beats
  output logic               beat_valid,
  input  logic               beat_ready,
  output logic [HBM_W-1:0]   beat_data
);
  logic [OCAPI_W-1:0] axi_reg;                       // "FPGA AXI register"
  logic               axi_full;
  logic [WORD_W-1:0]  buf_q [WORDS_PER_LINE];        // 32 addresses
  logic               buf_full;
  logic [1:0]         beat_idx;

  // The register hands its line to the buffer when the buffer is free or
  // is sending its last beat in this cycle.
  logic buf_free, move;
  assign buf_free   = !buf_full || (beat_ready && beat_idx == 2'd3);
  assign move       = axi_full && buf_free;
  assign line_ready = !axi_full || move;

  always_comb begin
    for (int w = 0; w < WORDS_PER_BEAT; w++)
      beat_data[w*WORD_W +: WORD_W] = buf_q[beat_idx*WORDS_PER_BEAT + w];
  end
  assign beat_valid = buf_full;

  always_ff @(posedge clk) begin
    if (line_valid && line_ready) axi_reg <= line_data;
    if (move)
      for (int w = 0; w < WORDS_PER_LINE; w++)
        buf_q[w] <= axi_reg[w*WORD_W +: WORD_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      axi_full <= 1'b0;
      buf_full <= 1'b0;
      beat_idx <= '0;
    end else begin
      if (line_valid && line_ready) axi_full <= 1'b1;
      else if (move)                axi_full <= 1'b0;
      if (beat_valid && beat_ready) beat_idx <= beat_idx + 1'b1;
      if (move) buf_full <= 1'b1;
      else if (beat_valid && beat_ready && beat_idx == 2'd3) buf_full <= 1'b0;
    end
  end
endmodule
