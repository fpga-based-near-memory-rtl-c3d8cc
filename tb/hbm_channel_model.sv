// hbm_channel_model: behavioural model of one HBM pseudo channel.
//
// Behavioural only, not synthesizable. It stands in for an HBM2 pseudo
// channel behind the vendor's memory controller: a sparse array of 256-bit
// beats with a single-beat request port. A request is accepted when
// req_valid && req_ready; req_ready drops at random (about one cycle in
// STALL_PCT percent) to imitate controller back-pressure. Writes update the
// array at once; reads return the beat LATENCY cycles after acceptance, in
// order, on rsp_valid/rsp_data. Unwritten addresses read as zero.
module hbm_channel_model
  import nma_pkg::*;
#(
  parameter int unsigned LATENCY   = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic             clk,
  input  logic             req_valid,
  output logic             req_ready,
  input  hbm_req_t         req,
  output logic             rsp_valid,
  output logic [HBM_W-1:0] rsp_data
);
  logic [HBM_W-1:0] mem [logic [HBM_ADDR_W-1:0]];
  logic             pv [LATENCY];
  logic [HBM_W-1:0] pd [LATENCY];
  int unsigned      reads, writes;

  initial begin
    req_ready = 1'b1;
    reads = 0;
    writes = 0;
    for (int i = 0; i < LATENCY; i++) begin
      pv[i] = 1'b0;
      pd[i] = '0;
    end
  end

  assign rsp_valid = pv[LATENCY-1];
  assign rsp_data  = pd[LATENCY-1];

  always @(posedge clk) begin
    for (int i = LATENCY - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (req.we) begin
        mem[req.addr] = req.wdata;
        writes++;
      end else begin
        pv[0] <= 1'b1;
        pd[0] <= mem.exists(req.addr) ? mem[req.addr] : '0;
        reads++;
      end
    end
    req_ready <= ($urandom % 100) >= STALL_PCT;
  end

  // Test access to the stored beats.
  function automatic logic [HBM_W-1:0] peek(logic [HBM_ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
  function automatic void poke(logic [HBM_ADDR_W-1:0] a, logic [HBM_W-1:0] d);
    mem[a] = d;
  endfunction
endmodule
