// stream_converter: 256-bit HBM stream to 1024-bit OpenCAPI stream.
//
// An HBM pseudo channel delivers 256 bits per beat, a quarter of the
// 1024-bit OpenCAPI width, so results on their way back to the host are
// gathered four beats to a line. The first beat fills bits 255:0, the
// fourth bits 1023:768. A line whose beats did not fill it is sent when
// `flush` is pulsed with the buffer partly filled; the missing words are
// zero. Beats are accepted one per cycle while no completed line waits,
// and a completed line is offered from the cycle after its fourth beat.
// The width conversion follows the paper; the beat order, the handshake and
// the flush of a partial line are this design's choices.
module stream_converter
  import nma_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  input  logic               beat_valid,
  output logic               beat_ready,
  input  logic [HBM_W-1:0]   beat_data,
  output logic               line_valid,
  input  logic               line_ready,
  output logic [OCAPI_W-1:0] line_data,
  output logic               idle        // nothing held
);
  logic [2:0] fill;           // beats held, 0..4

  assign beat_ready = !line_valid;
  assign idle       = (fill == 3'd0) && !line_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill       <= '0;
      line_valid <= 1'b0;
      line_data  <= '0;
    end else if (line_valid) begin
      if (line_ready) begin
        line_valid <= 1'b0;
        fill       <= '0;
        line_data  <= '0;
      end
    end else if (beat_valid) begin
      line_data[fill[1:0]*HBM_W +: HBM_W] <= beat_data;
      fill <= fill + 1'b1;
      if (fill == 3'd3) line_valid <= 1'b1;
    end else if (flush && fill != 3'd0) begin
      line_valid <= 1'b1;
    end
  end
endmodule
