// afu_env: host and HBM environment for end-to-end tests of nma_afu.
//
// Plays the host and the memory around one accelerator: it builds a job of
// N_ITEMS work items per PE for the chosen kernel (random sequence pairs
// with 0..12 edits, random planes, or random diagonally dominant
// tridiagonal columns), works out every expected result beat with the
// reference models, sends the inputs as 1024-bit lines with random gaps,
// takes result lines with random host stalls, and compares every beat.
// Each PE's channel is a behavioural HBM channel model with random
// back-pressure. Counts, for the test to check, how often the host stalled
// the result stream, how often a channel refused a request, and how many
// pairs passed or were rejected by the filter. `finished` rises when the
// job is over (or the cycle limit LIMIT is reached, which counts as a
// failure).
module afu_env
  import nma_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter kernel_e     KERNEL  = K_SNEAKY,
  parameter int unsigned N_PE    = 4,
  parameter int unsigned READ_LEN = 100,
  parameter int unsigned ROWS    = 8,
  parameter int unsigned COLS    = 8,
  parameter int unsigned DEPTH   = 8,
  parameter int unsigned N_ITEMS = 40,
  parameter int unsigned E_THR   = 5,
  parameter int unsigned LIMIT   = 2000000
) (
  input  logic                 clk,
  output logic                 rst_n,
  output logic                 start,
  output logic [31:0]          n_items,
  output logic [7:0]           e_thr,
  output fx_t                  coeff,
  input  logic                 busy,
  input  logic                 done,
  output logic                 h2f_valid,
  input  logic                 h2f_ready,
  output logic [OCAPI_W-1:0]   h2f_data,
  input  logic                 f2h_valid,
  output logic                 f2h_ready,
  input  logic [OCAPI_W-1:0]   f2h_data,
  input  logic     [N_PE-1:0]  ch_req_valid,
  output logic     [N_PE-1:0]  ch_req_ready,
  input  hbm_req_t [N_PE-1:0]  ch_req,
  output logic     [N_PE-1:0]  ch_rsp_valid,
  output logic [N_PE-1:0][HBM_W-1:0] ch_rsp_data,
  output logic                 finished,
  output int                   checks,
  output int                   failures,
  output int                   host_stalls,
  output int                   hbm_stalls,
  output int                   passed,
  output int                   rejected
);
  for (genvar c = 0; c < N_PE; c++) begin : g_ch
    hbm_channel_model #(.LATENCY(8), .STALL_PCT(10)) u_ch (.clk,
      .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]), .req(ch_req[c]),
      .rsp_valid(ch_rsp_valid[c]), .rsp_data(ch_rsp_data[c]));
  end

  logic [HBM_W-1:0] in_q [$];    // all input beats, PE 0 first
  logic [HBM_W-1:0] exp_q [$];   // all expected result beats, PE 0 first
  int out_beats_seen = 0;

  task automatic build_job();
    for (int p = 0; p < int'(N_PE); p++) begin
      if (KERNEL == K_SNEAKY) begin
        logic [HBM_W-1:0] ob;
        ob = '0;
        for (int i = 0; i < int'(N_ITEMS); i++) begin
          logic [255:0] r, q;
          logic [7:0] res;
          r = rand_seq(READ_LEN);
          q = mutate(r, READ_LEN, int'($urandom % 13));
          in_q.push_back(r);
          in_q.push_back(q);
          res = snk_ref(r, q, int'(E_THR), READ_LEN);
          if (res[7]) passed++; else rejected++;
          ob[(i % 32)*8 +: 8] = res;
          if (i % 32 == 31 || i == int'(N_ITEMS) - 1) begin
            exp_q.push_back(ob);
            ob = '0;
          end
        end
      end else if (KERNEL == K_HDIFF) begin
        for (int i = 0; i < int'(N_ITEMS); i++) begin
          int pl[];
          pl = new[ROWS*COLS];
          foreach (pl[k]) pl[k] = int'($urandom % 32'h0004_0000) - 32'h0002_0000;
          for (int b = 0; b < int'(ROWS*COLS/8); b++) begin
            logic [HBM_W-1:0] d, e;
            for (int w = 0; w < 8; w++) begin
              int k;
              k = b*8 + w;
              d[w*32 +: 32] = pl[k];
              e[w*32 +: 32] = hdiff_ref(pl, ROWS, COLS, k / COLS, k % COLS, 32'sh4000);
            end
            in_q.push_back(d);
            exp_q.push_back(e);
          end
        end
      end else begin
        for (int i = 0; i < int'(N_ITEMS); i++) begin
          int cf[], x[];
          cf = new[4*DEPTH];
          for (int k = 0; k < int'(DEPTH); k++) begin
            cf[k]         = (k == 0) ? 0 : int'($urandom % 32'h0001_0000) - 32'h8000;
            cf[2*DEPTH+k] = (k == DEPTH-1) ? 0 : int'($urandom % 32'h0001_0000) - 32'h8000;
            cf[DEPTH+k]   = 32'h0003_0000 + int'($urandom % 32'h0001_0000);
            cf[3*DEPTH+k] = int'($urandom % 32'h0008_0000) - 32'h0004_0000;
          end
          thomas_ref(cf, DEPTH, x);
          for (int b = 0; b < int'(4*DEPTH/8); b++) begin
            logic [HBM_W-1:0] d;
            for (int w = 0; w < 8; w++) d[w*32 +: 32] = cf[b*8 + w];
            in_q.push_back(d);
          end
          for (int b = 0; b < int'(DEPTH/8); b++) begin
            logic [HBM_W-1:0] e;
            for (int w = 0; w < 8; w++) e[w*32 +: 32] = x[b*8 + w];
            exp_q.push_back(e);
          end
        end
      end
    end
  endtask

  // host receive side
  always @(negedge clk) f2h_ready = ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n) begin
    if (f2h_valid && !f2h_ready) host_stalls++;
    for (int c = 0; c < int'(N_PE); c++) if (ch_req_valid[c] && !ch_req_ready[c]) hbm_stalls++;
    if (f2h_valid && f2h_ready) begin
      for (int k = 0; k < 4; k++) begin
        logic [HBM_W-1:0] e;
        e = (out_beats_seen < exp_q.size()) ? exp_q[out_beats_seen] : '0;
        checks++;
        if (f2h_data[k*HBM_W +: HBM_W] != e) begin
          failures++;
          if (failures < 10) $display("kernel %0d: result beat %0d differs", KERNEL, out_beats_seen);
        end
        out_beats_seen++;
      end
    end
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    checks = 0; failures = 0; host_stalls = 0; hbm_stalls = 0;
    passed = 0; rejected = 0; finished = 0;
    rst_n = 0; start = 0; h2f_valid = 0; h2f_data = '0;
    n_items = N_ITEMS; e_thr = 8'(E_THR); coeff = 32'sh4000;
    build_job();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    // send the input, four beats per line, the last line zero-padded
    for (int b = 0; b < in_q.size(); b += 4) begin
      logic [OCAPI_W-1:0] line;
      for (int k = 0; k < 4; k++)
        line[k*HBM_W +: HBM_W] = (b + k < in_q.size()) ? in_q[b + k] : '0;
      while ($urandom % 4 == 0) @(negedge clk);
      h2f_valid = 1; h2f_data = line;
      do @(posedge clk); while (!h2f_ready);
      @(negedge clk) h2f_valid = 0;
    end
    while (!done && cyc < int'(LIMIT)) @(posedge clk);
    if (!done) begin failures++; $display("kernel %0d: job did not finish", KERNEL); end
    repeat (2) @(posedge clk);
    // every expected beat was seen, in whole lines
    checks++;
    if (out_beats_seen != ((exp_q.size() + 3) / 4) * 4) begin
      failures++;
      $display("kernel %0d: %0d result beats, expected %0d", KERNEL, out_beats_seen, exp_q.size());
    end
    finished = 1;
  end
endmodule
