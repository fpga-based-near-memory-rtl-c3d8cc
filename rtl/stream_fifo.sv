// stream_fifo: first-in first-out buffer that joins two dataflow stages.
//
// The accelerator connects its engines and processing elements with
// streams so that a consumer can start before its producer has finished;
// each stream is a FIFO. This one is a circular buffer of DEPTH words with
// valid/ready handshakes on both sides: a word is written when in_valid &&
// in_ready and read when out_valid && out_ready. The output is the head of
// the buffer (first-word fall-through), so a word written in cycle t can be
// read in cycle t+1. A full FIFO drops in_ready, which stalls the producer.
// The depth and the handshake are this design's choices; the text only says
// that streams are FIFOs held in block RAM.
module stream_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic push, pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= nxt(wr_ptr);
      if (pop)  rd_ptr <= nxt(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

`ifndef SYNTHESIS
  // The producer must hold a word until it is taken.
  no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                count <= ($clog2(DEPTH+1))'(DEPTH));
`endif
endmodule
