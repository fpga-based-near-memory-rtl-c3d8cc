// tb_nma_afu_full: the accelerator at its default configuration (12
// SneakySnake PEs, 100-base reads, thresholds up to 10) filtering 30,000
// random read/reference pairs, 2,500 per PE, at threshold E = 5. Every
// result byte returned to the host is compared with the reference walk of
// the chip maze; passes and rejects must both occur, and the cycle count is
// reported against the input transfer time (4 cycles per 1024-bit line).
module tb_nma_afu_full;
  import nma_pkg::*;
  localparam int NPE = 12, NIT = 2500;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, h2f_valid, h2f_ready, f2h_valid, f2h_ready;
  logic [31:0] n_items;
  logic [7:0] e_thr;
  fx_t coeff;
  logic [OCAPI_W-1:0] h2f_data, f2h_data;
  logic [NPE-1:0] ch_req_valid, ch_req_ready, ch_rsp_valid;
  hbm_req_t [NPE-1:0] ch_req;
  logic [NPE-1:0][HBM_W-1:0] ch_rsp_data;
  logic finished;
  int checks, failures, host_stalls, hbm_stalls, passed, rejected;

  nma_afu dut (.*);
  afu_env #(.KERNEL(K_SNEAKY), .N_PE(NPE), .READ_LEN(100), .N_ITEMS(NIT),
            .E_THR(5), .LIMIT(3000000)) env (.*);

  int cyc = 0, t_start = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (start) t_start = cyc;

  initial begin
    int c, f;
    repeat (2) @(posedge clk);
    wait (finished);
    c = checks; f = failures;
    $display("pairs %0d  passed %0d  rejected %0d  cycles %0d  (input alone: %0d lines x 4)",
             NPE*NIT, passed, rejected, cyc - t_start, NPE*NIT*2/4);
    c++; if (passed == 0 || rejected == 0) f++;
    c++; if (passed + rejected != NPE*NIT) f++;
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
  initial begin
    repeat (4000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
