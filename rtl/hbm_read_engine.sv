// hbm_read_engine: streams a range of beats out of one HBM channel.
//
// Each processing element has a dedicated HBM pseudo channel, and this
// engine feeds it: after `start` it reads n_beats consecutive 256-bit beats
// from base_addr upward and delivers them, in order, on a valid/ready
// stream. Reads are issued one per cycle as long as the responses still
// outstanding fit into the engine's own FIFO (FIFO_DEPTH beats), so the
// channel's latency is hidden and a slow consumer never loses data. `done`
// pulses for one cycle when the last beat has been taken by the consumer.
// Following the paper: one engine per PE reading a dedicated channel. This
// design's own choices: the credit scheme, the FIFO depth and the
// single-beat request port with in-order responses.
// The request's write flag and write data are constant zero: this engine
// only reads.
module hbm_read_engine
  import nma_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [HBM_ADDR_W-1:0] base_addr,
  input  logic [HBM_ADDR_W:0]   n_beats,
  output logic                  busy,
  output logic                  done,
  // channel port
  output logic                  req_valid,
  input  logic                  req_ready,
  output hbm_req_t              req,
  input  logic                  rsp_valid,
  input  logic [HBM_W-1:0]      rsp_data,
  // output stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [HBM_W-1:0]      out_data
);
  localparam int unsigned CNTW = $clog2(FIFO_DEPTH + 1);
  logic [HBM_ADDR_W:0] issued, delivered;
  logic [CNTW-1:0]     outstanding, fifo_count;
  logic                issue, fifo_in_ready;

  // A read may be issued while (words queued + words in flight) < depth.
  assign req_valid = busy && (issued != n_beats) &&
                     (32'(outstanding) + 32'(fifo_count) < FIFO_DEPTH);
  assign req.we    = 1'b0;
  assign req.addr  = base_addr + issued[HBM_ADDR_W-1:0];
  assign req.wdata = '0;
  assign issue     = req_valid && req_ready;

  stream_fifo #(.WIDTH(HBM_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(rsp_valid), .in_ready(fifo_in_ready), .in_data(rsp_data),
    .out_valid, .out_ready, .out_data, .count(fifo_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      issued      <= '0;
      delivered   <= '0;
      outstanding <= '0;
    end else begin
      done <= 1'b0;
      case ({issue, rsp_valid})
        2'b10:   outstanding <= outstanding + 1'b1;
        2'b01:   outstanding <= outstanding - 1'b1;
        default: outstanding <= outstanding;
      endcase
      if (start && !busy) begin
        busy      <= (n_beats != '0);
        done      <= (n_beats == '0);
        issued    <= '0;
        delivered <= '0;
      end else begin
        if (issue) issued <= issued + 1'b1;
        if (out_valid && out_ready) begin
          delivered <= delivered + 1'b1;
          if (delivered + 1'b1 == n_beats) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

`ifndef SYNTHESIS
  // The credit scheme guarantees room for every response.
  rsp_has_room: assert property (@(posedge clk) disable iff (!rst_n)
                                 rsp_valid |-> fifo_in_ready);
`endif
endmodule
