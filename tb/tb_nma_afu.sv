// tb_nma_afu: end-to-end test of the accelerator with each of its three
// kernels, at reduced sizes: SneakySnake with 3 PEs and 41 pairs per PE,
// hdiff with 3 PEs and 2 planes of 8 x 16 per PE, vadvc with 3 PEs and 3
// columns of depth 16 per PE. Every result beat returned to the host is
// compared with the reference models (see afu_env). Also counts, and
// requires at least once, each mechanism of the design: host stalls on the
// result stream, HBM back-pressure, a read and a result write meeting on
// one channel (write first), dropping the unused tail of the last input
// line, a zero-padded last result line, and filter passes and rejects.
module tb_nma_afu;
  import nma_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  `define AFU_PORTS(s) \
    logic rst_n_``s, start_``s, busy_``s, done_``s, h2f_valid_``s, h2f_ready_``s, f2h_valid_``s, f2h_ready_``s; \
    logic [31:0] n_items_``s; logic [7:0] e_thr_``s; fx_t coeff_``s; \
    logic [OCAPI_W-1:0] h2f_data_``s, f2h_data_``s; \
    logic fin_``s; int chk_``s, fail_``s, hst_``s, mst_``s, pas_``s, rej_``s;

  `AFU_PORTS(s)
  `AFU_PORTS(h)
  `AFU_PORTS(v)

  localparam int NS = 3, NH = 3, NV = 3;
  logic [NS-1:0] s_rv, s_rr, s_sv; hbm_req_t [NS-1:0] s_rq; logic [NS-1:0][HBM_W-1:0] s_sd;
  logic [NH-1:0] h_rv, h_rr, h_sv; hbm_req_t [NH-1:0] h_rq; logic [NH-1:0][HBM_W-1:0] h_sd;
  logic [NV-1:0] v_rv, v_rr, v_sv; hbm_req_t [NV-1:0] v_rq; logic [NV-1:0][HBM_W-1:0] v_sd;

  nma_afu #(.KERNEL(K_SNEAKY), .N_PE(NS)) dut_s (
    .clk, .rst_n(rst_n_s), .start(start_s), .n_items(n_items_s), .e_thr(e_thr_s), .coeff(coeff_s),
    .busy(busy_s), .done(done_s), .h2f_valid(h2f_valid_s), .h2f_ready(h2f_ready_s), .h2f_data(h2f_data_s),
    .f2h_valid(f2h_valid_s), .f2h_ready(f2h_ready_s), .f2h_data(f2h_data_s),
    .ch_req_valid(s_rv), .ch_req_ready(s_rr), .ch_req(s_rq), .ch_rsp_valid(s_sv), .ch_rsp_data(s_sd));
  afu_env #(.KERNEL(K_SNEAKY), .N_PE(NS), .N_ITEMS(41)) env_s (
    .clk, .rst_n(rst_n_s), .start(start_s), .n_items(n_items_s), .e_thr(e_thr_s), .coeff(coeff_s),
    .busy(busy_s), .done(done_s), .h2f_valid(h2f_valid_s), .h2f_ready(h2f_ready_s), .h2f_data(h2f_data_s),
    .f2h_valid(f2h_valid_s), .f2h_ready(f2h_ready_s), .f2h_data(f2h_data_s),
    .ch_req_valid(s_rv), .ch_req_ready(s_rr), .ch_req(s_rq), .ch_rsp_valid(s_sv), .ch_rsp_data(s_sd),
    .finished(fin_s), .checks(chk_s), .failures(fail_s), .host_stalls(hst_s), .hbm_stalls(mst_s),
    .passed(pas_s), .rejected(rej_s));

  nma_afu #(.KERNEL(K_HDIFF), .N_PE(NH), .ROWS(8), .COLS(16)) dut_h (
    .clk, .rst_n(rst_n_h), .start(start_h), .n_items(n_items_h), .e_thr(e_thr_h), .coeff(coeff_h),
    .busy(busy_h), .done(done_h), .h2f_valid(h2f_valid_h), .h2f_ready(h2f_ready_h), .h2f_data(h2f_data_h),
    .f2h_valid(f2h_valid_h), .f2h_ready(f2h_ready_h), .f2h_data(f2h_data_h),
    .ch_req_valid(h_rv), .ch_req_ready(h_rr), .ch_req(h_rq), .ch_rsp_valid(h_sv), .ch_rsp_data(h_sd));
  afu_env #(.KERNEL(K_HDIFF), .N_PE(NH), .ROWS(8), .COLS(16), .N_ITEMS(2)) env_h (
    .clk, .rst_n(rst_n_h), .start(start_h), .n_items(n_items_h), .e_thr(e_thr_h), .coeff(coeff_h),
    .busy(busy_h), .done(done_h), .h2f_valid(h2f_valid_h), .h2f_ready(h2f_ready_h), .h2f_data(h2f_data_h),
    .f2h_valid(f2h_valid_h), .f2h_ready(f2h_ready_h), .f2h_data(f2h_data_h),
    .ch_req_valid(h_rv), .ch_req_ready(h_rr), .ch_req(h_rq), .ch_rsp_valid(h_sv), .ch_rsp_data(h_sd),
    .finished(fin_h), .checks(chk_h), .failures(fail_h), .host_stalls(hst_h), .hbm_stalls(mst_h),
    .passed(pas_h), .rejected(rej_h));

  nma_afu #(.KERNEL(K_VADVC), .N_PE(NV), .DEPTH(16)) dut_v (
    .clk, .rst_n(rst_n_v), .start(start_v), .n_items(n_items_v), .e_thr(e_thr_v), .coeff(coeff_v),
    .busy(busy_v), .done(done_v), .h2f_valid(h2f_valid_v), .h2f_ready(h2f_ready_v), .h2f_data(h2f_data_v),
    .f2h_valid(f2h_valid_v), .f2h_ready(f2h_ready_v), .f2h_data(f2h_data_v),
    .ch_req_valid(v_rv), .ch_req_ready(v_rr), .ch_req(v_rq), .ch_rsp_valid(v_sv), .ch_rsp_data(v_sd));
  afu_env #(.KERNEL(K_VADVC), .N_PE(NV), .DEPTH(16), .N_ITEMS(3)) env_v (
    .clk, .rst_n(rst_n_v), .start(start_v), .n_items(n_items_v), .e_thr(e_thr_v), .coeff(coeff_v),
    .busy(busy_v), .done(done_v), .h2f_valid(h2f_valid_v), .h2f_ready(h2f_ready_v), .h2f_data(h2f_data_v),
    .f2h_valid(f2h_valid_v), .f2h_ready(f2h_ready_v), .f2h_data(f2h_data_v),
    .ch_req_valid(v_rv), .ch_req_ready(v_rr), .ch_req(v_rq), .ch_rsp_valid(v_sv), .ch_rsp_data(v_sd),
    .finished(fin_v), .checks(chk_v), .failures(fail_v), .host_stalls(hst_v), .hbm_stalls(mst_v),
    .passed(pas_v), .rejected(rej_v));

  // mechanisms seen inside the accelerators
  int conflicts = 0, drained = 0;
  always @(posedge clk) begin
    if (|(dut_s.wr_req_valid & dut_s.rd_req_valid)) conflicts++;
    if (|(dut_h.wr_req_valid & dut_h.rd_req_valid)) conflicts++;
    if (|(dut_v.wr_req_valid & dut_v.rd_req_valid)) conflicts++;
    if (dut_s.phase == 3'd2 && dut_s.fb_valid) drained++;
    if (dut_v.phase == 3'd2 && dut_v.fb_valid) drained++;
  end

  int checks, failures;
  task automatic need(string what, int n);
    checks++;
    $display("%-32s %0d", what, n);
    if (n == 0) begin failures++; $display("  never happened: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    wait (fin_s && fin_h && fin_v);
    checks   = chk_s + chk_h + chk_v;
    failures = fail_s + fail_h + fail_v;
    need("host result stalls", hst_s + hst_h + hst_v);
    need("HBM back-pressure cycles", mst_s + mst_h + mst_v);
    need("read/write meetings on a channel", conflicts);
    need("input tail beats dropped", drained);
    need("filter passes", pas_s);
    need("filter rejects", rej_s);
    // vadvc returns 3 PEs x 3 columns x 2 beats = 18 beats: the last line is half padding
    need("padded last result line", (NV*3*16/8) % 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 0, failures + 1);
    $finish;
  end
endmodule
