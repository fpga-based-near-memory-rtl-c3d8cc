// tb_nma_afu_weather: the two weather accelerators at their published PE
// counts and full plane and column sizes.
//
// hdiff: 16 PEs, each filtering one 256 x 256 plane (16 of the 64 planes of
// a 256 x 256 x 64 grid). vadvc: 14 PEs with 64-level columns, 4 columns
// per PE. Each accelerator runs under its own host and memory environment,
// which compares every result beat with the reference model, so the
// number of checks is the number of result beats plus one per
// environment. The cycle counts are
// reported against the per-plane and per-column costs of the PEs: one
// point per cycle for hdiff, and one divider latency per level for the
// vadvc forward sweep.
module tb_nma_afu_weather;
  import nma_pkg::*;
  localparam int NH = 16, NV = 14, VCOL = 4;
  logic clk = 0;
  always #5 clk = ~clk;

  // ---------------- hdiff ----------------
  logic h_rst_n, h_start, h_busy, h_done, h_h2f_valid, h_h2f_ready, h_f2h_valid, h_f2h_ready;
  logic [31:0] h_n_items;
  logic [7:0] h_e_thr;
  fx_t h_coeff;
  logic [OCAPI_W-1:0] h_h2f_data, h_f2h_data;
  logic [NH-1:0] h_req_valid, h_req_ready, h_rsp_valid;
  hbm_req_t [NH-1:0] h_req;
  logic [NH-1:0][HBM_W-1:0] h_rsp_data;
  logic h_fin;
  int h_checks, h_fail, h_hs, h_bs, h_pass, h_rej;

  nma_afu #(.KERNEL(K_HDIFF), .N_PE(NH)) u_hdiff (
    .clk, .rst_n(h_rst_n), .start(h_start), .n_items(h_n_items), .e_thr(h_e_thr),
    .coeff(h_coeff), .busy(h_busy), .done(h_done),
    .h2f_valid(h_h2f_valid), .h2f_ready(h_h2f_ready), .h2f_data(h_h2f_data),
    .f2h_valid(h_f2h_valid), .f2h_ready(h_f2h_ready), .f2h_data(h_f2h_data),
    .ch_req_valid(h_req_valid), .ch_req_ready(h_req_ready), .ch_req(h_req),
    .ch_rsp_valid(h_rsp_valid), .ch_rsp_data(h_rsp_data));
  afu_env #(.KERNEL(K_HDIFF), .N_PE(NH), .ROWS(256), .COLS(256), .N_ITEMS(1),
            .LIMIT(3000000)) u_henv (
    .clk, .rst_n(h_rst_n), .start(h_start), .n_items(h_n_items), .e_thr(h_e_thr),
    .coeff(h_coeff), .busy(h_busy), .done(h_done),
    .h2f_valid(h_h2f_valid), .h2f_ready(h_h2f_ready), .h2f_data(h_h2f_data),
    .f2h_valid(h_f2h_valid), .f2h_ready(h_f2h_ready), .f2h_data(h_f2h_data),
    .ch_req_valid(h_req_valid), .ch_req_ready(h_req_ready), .ch_req(h_req),
    .ch_rsp_valid(h_rsp_valid), .ch_rsp_data(h_rsp_data),
    .finished(h_fin), .checks(h_checks), .failures(h_fail), .host_stalls(h_hs),
    .hbm_stalls(h_bs), .passed(h_pass), .rejected(h_rej));

  // ---------------- vadvc ----------------
  logic v_rst_n, v_start, v_busy, v_done, v_h2f_valid, v_h2f_ready, v_f2h_valid, v_f2h_ready;
  logic [31:0] v_n_items;
  logic [7:0] v_e_thr;
  fx_t v_coeff;
  logic [OCAPI_W-1:0] v_h2f_data, v_f2h_data;
  logic [NV-1:0] v_req_valid, v_req_ready, v_rsp_valid;
  hbm_req_t [NV-1:0] v_req;
  logic [NV-1:0][HBM_W-1:0] v_rsp_data;
  logic v_fin;
  int v_checks, v_fail, v_hs, v_bs, v_pass, v_rej;

  nma_afu #(.KERNEL(K_VADVC), .N_PE(NV)) u_vadvc (
    .clk, .rst_n(v_rst_n), .start(v_start), .n_items(v_n_items), .e_thr(v_e_thr),
    .coeff(v_coeff), .busy(v_busy), .done(v_done),
    .h2f_valid(v_h2f_valid), .h2f_ready(v_h2f_ready), .h2f_data(v_h2f_data),
    .f2h_valid(v_f2h_valid), .f2h_ready(v_f2h_ready), .f2h_data(v_f2h_data),
    .ch_req_valid(v_req_valid), .ch_req_ready(v_req_ready), .ch_req(v_req),
    .ch_rsp_valid(v_rsp_valid), .ch_rsp_data(v_rsp_data));
  afu_env #(.KERNEL(K_VADVC), .N_PE(NV), .DEPTH(64), .N_ITEMS(VCOL),
            .LIMIT(3000000)) u_venv (
    .clk, .rst_n(v_rst_n), .start(v_start), .n_items(v_n_items), .e_thr(v_e_thr),
    .coeff(v_coeff), .busy(v_busy), .done(v_done),
    .h2f_valid(v_h2f_valid), .h2f_ready(v_h2f_ready), .h2f_data(v_h2f_data),
    .f2h_valid(v_f2h_valid), .f2h_ready(v_f2h_ready), .f2h_data(v_f2h_data),
    .ch_req_valid(v_req_valid), .ch_req_ready(v_req_ready), .ch_req(v_req),
    .ch_rsp_valid(v_rsp_valid), .ch_rsp_data(v_rsp_data),
    .finished(v_fin), .checks(v_checks), .failures(v_fail), .host_stalls(v_hs),
    .hbm_stalls(v_bs), .passed(v_pass), .rejected(v_rej));

  // Cycles each accelerator spends in its compute phase.
  int cyc = 0, h_comp = 0, v_comp = 0;
  always @(posedge clk) begin
    cyc++;
    if (u_hdiff.phase == 3'd3) h_comp++;
    if (u_vadvc.phase == 3'd3) v_comp++;
  end

  initial begin
    int c, f;
    repeat (2) @(posedge clk);
    wait (h_fin && v_fin);
    c = h_checks + v_checks;
    f = h_fail + v_fail;
    $display("hdiff: %0d PEs x 1 plane 256x256, %0d result beats checked, compute phase %0d cycles",
             NH, h_checks, h_comp);
    $display("vadvc: %0d PEs x %0d columns of 64, %0d result beats checked, compute phase %0d cycles",
             NV, VCOL, v_checks, v_comp);
    // Every result beat of every PE must have been compared (each
    // environment adds one check of the total beat count).
    c++; if (h_checks != NH * 256 * 256 / 8 + 1) f++;
    c++; if (v_checks != NV * VCOL * 64 / 8 + 1) f++;
    // hdiff computes one point per cycle after loading the plane (8 points
    // per beat), so a plane costs at least 65,536 + 8,192 cycles.
    c++; if (h_comp < 256 * 256 + 256 * 256 / 8) f++;
    // The vadvc forward sweep waits for a divider at every level.
    c++; if (v_comp < VCOL * 64 * 48) f++;
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
  initial begin
    repeat (4000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", h_checks + v_checks, h_fail + v_fail + 1);
    $finish;
  end
endmodule
