// nma_afu: near-memory accelerator functional unit (top level).
//
// The AFU sits on an HBM FPGA next to the memory and is fed by a POWER9
// host over a 1024-bit OpenCAPI link. It holds N_PE processing elements of
// one kernel (SneakySnake, vadvc or hdiff, chosen by KERNEL), and every PE
// owns one HBM pseudo channel, so the PEs never compete for memory
// bandwidth. One job runs in three phases:
//  LOAD      host cache lines enter the data-fetch engine, which converts
//            them to 256-bit beats; the HBM-write engine stores the first
//            in_beats beats in channel 0, the next in_beats in channel 1, and
//            so on (each PE receives an equal share of the work items).
//            Beats of the last line beyond the job are dropped.
//  COMPUTE   per PE, an HBM-read engine streams the PE's input from its
//            channel through a FIFO into the PE; the PE's results go through
//            a FIFO to a one-channel HBM-write engine that stores them from
//            RES_BASE upward in the same channel. When a channel is asked
//            for a read and a write in the same cycle the write goes first.
//  WRITEBACK the write-back engine reads out_beats result beats from each
//            channel in order, packs them four to a 1024-bit line and sends
//            them to the host.
// `done` pulses when the last result line has been accepted. `start` is
// taken only while idle.
// The HBM stacks and the vendor's HBM controller, and the OpenCAPI
// transaction and link layers, are outside this module: each channel is a
// single-beat request port with in-order read responses, and the host link
// is a pair of 1024-bit valid/ready streams.
// Following the paper: the data-fetch, HBM-write, HBM-read, stream
// converter and write-back engines, stream FIFOs between them, one channel
// per PE and the equal split of the work among PEs. This design's own
// choices: the phased (rather than overlapped) schedule, the channel
// address map (inputs from 0, results from RES_BASE), the write-over-read
// priority and the request/response port.
module nma_afu
  import nma_pkg::*;
#(
  parameter kernel_e     KERNEL   = K_SNEAKY,
  parameter int unsigned N_PE     = 12,       // 12 SneakySnake, 14 vadvc, 16 hdiff
  parameter int unsigned READ_LEN = 100,
  parameter int unsigned MAX_E    = 10,
  parameter int unsigned ROWS     = 256,
  parameter int unsigned COLS     = 256,
  parameter int unsigned DEPTH    = 64,
  parameter int unsigned RES_BASE = 1 << (HBM_ADDR_W - 1),
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // job control
  input  logic                 start,
  input  logic [31:0]          n_items,    // work items per PE
  input  logic [7:0]           e_thr,      // SneakySnake edit threshold
  input  fx_t                  coeff,      // hdiff diffusion coefficient
  output logic                 busy,
  output logic                 done,
  // host -> FPGA cache lines
  input  logic                 h2f_valid,
  output logic                 h2f_ready,
  input  logic [OCAPI_W-1:0]   h2f_data,
  // FPGA -> host cache lines
  output logic                 f2h_valid,
  input  logic                 f2h_ready,
  output logic [OCAPI_W-1:0]   f2h_data,
  // one HBM pseudo channel per PE
  output logic     [N_PE-1:0]  ch_req_valid,
  input  logic     [N_PE-1:0]  ch_req_ready,
  output hbm_req_t [N_PE-1:0]  ch_req,
  input  logic     [N_PE-1:0]  ch_rsp_valid,
  input  logic [N_PE-1:0][HBM_W-1:0] ch_rsp_data
);
  localparam int unsigned NW = $clog2(N_PE + 1);
  localparam logic [NW-1:0] NPE_W = NW'(N_PE);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_DRAIN, S_COMPUTE, S_WB} phase_e;
  phase_e phase;

  logic [HBM_ADDR_W:0] ib, ob;   // input / output beats per PE
  assign ib = (HBM_ADDR_W+1)'(in_beats (KERNEL, n_items, ROWS, COLS, DEPTH));
  assign ob = (HBM_ADDR_W+1)'(out_beats(KERNEL, n_items, ROWS, COLS, DEPTH));

  // ---------------- LOAD: data-fetch engine -> HBM-write engine ----------
  logic             fb_valid, fb_ready;
  logic [HBM_W-1:0] fb_data;
  logic             ld_start, ld_busy, ld_done;
  logic     [N_PE-1:0] ld_req_valid;
  hbm_req_t [N_PE-1:0] ld_req;
  logic             ld_in_ready;

  data_fetch_engine u_fetch (
    .clk, .rst_n,
    .line_valid(h2f_valid), .line_ready(h2f_ready), .line_data(h2f_data),
    .beat_valid(fb_valid), .beat_ready(fb_ready), .beat_data(fb_data)
  );

  hbm_write_engine #(.N_CH(N_PE)) u_load (
    .clk, .rst_n, .start(ld_start), .base_addr('0), .beats_per_ch(ib),
    .n_ch(NPE_W), .busy(ld_busy), .done(ld_done),
    .in_valid(fb_valid && phase == S_LOAD), .in_ready(ld_in_ready), .in_data(fb_data),
    .req_valid(ld_req_valid), .req_ready(ch_req_ready), .req(ld_req)
  );
  // In DRAIN the unused tail of the last cache line is discarded.
  assign fb_ready = (phase == S_LOAD) ? ld_in_ready : (phase == S_DRAIN);

  // ---------------- COMPUTE: per-PE read engine -> PE -> write engine ----
  logic [N_PE-1:0] pe_done_seen, cmp_start;
  logic [N_PE-1:0] rd_req_valid, wr_req_valid;
  hbm_req_t [N_PE-1:0] rd_req, wr_req;
  logic [N_PE-1:0] wr_done;

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    logic             rd_busy, rd_done, rd_ready;
    logic             rs_valid, rs_ready;
    logic [HBM_W-1:0] rs_data;
    logic             pi_valid, pi_ready;
    logic [HBM_W-1:0] pi_data;
    logic             po_valid, po_ready;
    logic [HBM_W-1:0] po_data;
    logic             wi_valid, wi_ready;
    logic [HBM_W-1:0] wi_data;
    logic             pe_busy, pe_done, wr_busy;
    logic             wr_grant;
    logic [$clog2(FIFO_DEPTH+1)-1:0] cnt_in, cnt_out;

    // Write has priority over read on the shared channel.
    assign wr_grant = wr_req_valid[p];
    assign rd_ready = ch_req_ready[p] && !wr_grant;

    hbm_read_engine #(.FIFO_DEPTH(8)) u_rd (
      .clk, .rst_n, .start(cmp_start[p]), .base_addr('0), .n_beats(ib),
      .busy(rd_busy), .done(rd_done),
      .req_valid(rd_req_valid[p]), .req_ready(rd_ready), .req(rd_req[p]),
      .rsp_valid(ch_rsp_valid[p] && phase == S_COMPUTE), .rsp_data(ch_rsp_data[p]),
      .out_valid(rs_valid), .out_ready(rs_ready), .out_data(rs_data)
    );

    stream_fifo #(.WIDTH(HBM_W), .DEPTH(FIFO_DEPTH)) u_fin (
      .clk, .rst_n, .in_valid(rs_valid), .in_ready(rs_ready), .in_data(rs_data),
      .out_valid(pi_valid), .out_ready(pi_ready), .out_data(pi_data), .count(cnt_in)
    );

    if (KERNEL == K_SNEAKY) begin : g_k
      sneaky_pe #(.READ_LEN(READ_LEN), .MAX_E(MAX_E)) u_pe (
        .clk, .rst_n, .start(cmp_start[p]), .n_items, .e_thr,
        .busy(pe_busy), .done(pe_done),
        .in_valid(pi_valid), .in_ready(pi_ready), .in_data(pi_data),
        .out_valid(po_valid), .out_ready(po_ready), .out_data(po_data));
    end else if (KERNEL == K_HDIFF) begin : g_k
      hdiff_pe #(.ROWS(ROWS), .COLS(COLS)) u_pe (
        .clk, .rst_n, .start(cmp_start[p]), .n_items, .coeff,
        .busy(pe_busy), .done(pe_done),
        .in_valid(pi_valid), .in_ready(pi_ready), .in_data(pi_data),
        .out_valid(po_valid), .out_ready(po_ready), .out_data(po_data));
    end else begin : g_k
      vadvc_pe #(.DEPTH(DEPTH)) u_pe (
        .clk, .rst_n, .start(cmp_start[p]), .n_items,
        .busy(pe_busy), .done(pe_done),
        .in_valid(pi_valid), .in_ready(pi_ready), .in_data(pi_data),
        .out_valid(po_valid), .out_ready(po_ready), .out_data(po_data));
    end

    stream_fifo #(.WIDTH(HBM_W), .DEPTH(FIFO_DEPTH)) u_fout (
      .clk, .rst_n, .in_valid(po_valid), .in_ready(po_ready), .in_data(po_data),
      .out_valid(wi_valid), .out_ready(wi_ready), .out_data(wi_data), .count(cnt_out)
    );

    hbm_write_engine #(.N_CH(1)) u_wr (
      .clk, .rst_n, .start(cmp_start[p]), .base_addr(HBM_ADDR_W'(RES_BASE)),
      .beats_per_ch(ob), .n_ch(1'b1), .busy(wr_busy), .done(wr_done[p]),
      .in_valid(wi_valid), .in_ready(wi_ready), .in_data(wi_data),
      .req_valid(wr_req_valid[p +: 1]), .req_ready(ch_req_ready[p +: 1]),
      .req(wr_req[p +: 1])
    );

    wire unused_pe = rd_busy | rd_done | pe_busy | pe_done | wr_busy
                   | (|cnt_in) | (|cnt_out);
  end

  // ---------------- WRITEBACK ---------------------------------------------
  logic                wb_start, wb_busy, wb_done;
  logic     [N_PE-1:0] wb_req_valid;
  hbm_req_t [N_PE-1:0] wb_req;

  write_back_engine #(.N_CH(N_PE)) u_wb (
    .clk, .rst_n, .start(wb_start), .base_addr(HBM_ADDR_W'(RES_BASE)),
    .beats_per_ch(ob), .n_ch(NPE_W), .busy(wb_busy), .done(wb_done),
    .req_valid(wb_req_valid), .req_ready(ch_req_ready), .req(wb_req),
    .rsp_valid(ch_rsp_valid & {N_PE{phase == S_WB}}), .rsp_data(ch_rsp_data),
    .line_valid(f2h_valid), .line_ready(f2h_ready), .line_data(f2h_data)
  );

  // ---------------- channel multiplexing by phase -------------------------
  always_comb begin
    for (int p = 0; p < N_PE; p++) begin
      case (phase)
        S_LOAD: begin
          ch_req_valid[p] = ld_req_valid[p];
          ch_req[p]       = ld_req[p];
        end
        S_COMPUTE: begin
          ch_req_valid[p] = wr_req_valid[p] || rd_req_valid[p];
          ch_req[p]       = wr_req_valid[p] ? wr_req[p] : rd_req[p];
        end
        S_WB: begin
          ch_req_valid[p] = wb_req_valid[p];
          ch_req[p]       = wb_req[p];
        end
        default: begin
          ch_req_valid[p] = 1'b0;
          ch_req[p]       = ld_req[p];
        end
      endcase
    end
  end

  // ---------------- phase controller --------------------------------------
  assign ld_start  = (phase == S_IDLE) && start;
  assign cmp_start = {N_PE{phase == S_DRAIN && !fb_valid}};
  assign wb_start  = (phase == S_COMPUTE) && (&(pe_done_seen | wr_done));
  assign busy      = (phase != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= S_IDLE;
      done         <= 1'b0;
      pe_done_seen <= '0;
    end else begin
      done <= 1'b0;
      case (phase)
        S_IDLE:    if (start) phase <= S_LOAD;
        S_LOAD:    if (ld_done) phase <= S_DRAIN;
        S_DRAIN:   if (!fb_valid) begin
          phase        <= S_COMPUTE;
          pe_done_seen <= '0;
        end
        S_COMPUTE: begin
          pe_done_seen <= pe_done_seen | wr_done;
          if (wb_start) phase <= S_WB;
        end
        S_WB:      if (wb_done) begin
          phase <= S_IDLE;
          done  <= 1'b1;
        end
        default:   phase <= S_IDLE;
      endcase
    end
  end

  wire unused_top = ld_busy | wb_busy;
endmodule
