// nma_pkg: types and constants shared by the near-memory accelerator.
//
// The accelerator sits between a 1024-bit OpenCAPI host link and 256-bit HBM
// pseudo channels. Those two widths, the 32 pseudo channels of the two HBM2
// stacks and the 8 GiB of HBM are the published platform numbers; everything
// else here (the request/response structs of a channel port, the fixed-point
// number format, the packing of work items into beats) is this design's own
// choice and is documented next to each item.
package nma_pkg;

  // ---- platform widths --------------------------------------------------
  localparam int unsigned OCAPI_W   = 1024;  // one POWER9 cache line (128 B)
  localparam int unsigned HBM_W     = 256;   // one HBM pseudo channel beat
  localparam int unsigned WORD_W    = 32;    // float32-sized grid element
  localparam int unsigned WORDS_PER_BEAT = HBM_W / WORD_W;     // 8
  localparam int unsigned WORDS_PER_LINE = OCAPI_W / WORD_W;   // 32
  localparam int unsigned BEATS_PER_LINE = OCAPI_W / HBM_W;    // 4
  localparam int unsigned HBM_CHANNELS   = 32;  // 2 stacks x 16 pseudo channels
  // 8 GiB / 32 channels = 256 MiB per channel = 2^23 beats of 32 bytes.
  localparam int unsigned HBM_ADDR_W     = 23;

  // ---- kernels ----------------------------------------------------------
  typedef enum logic [1:0] {
    K_SNEAKY = 2'd0,   // SneakySnake pre-alignment filter
    K_VADVC  = 2'd1,   // vertical advection (Thomas solver per column)
    K_HDIFF  = 2'd2    // horizontal diffusion (Laplacian + flux stencils)
  } kernel_e;

  // ---- one HBM channel port (simplified AXI3: one beat per request) -----
  // Requests are accepted when req_valid && req_ready; reads return exactly
  // one response per request, in order, after any latency.
  typedef struct packed {
    logic                  we;
    logic [HBM_ADDR_W-1:0] addr;
    logic [HBM_W-1:0]      wdata;
  } hbm_req_t;

  // ---- fixed-point arithmetic for the weather kernels -------------------
  // Signed Q16.16 in a 32-bit word stands in for float32.
  localparam int unsigned FRAC_W = 16;
  typedef logic signed [WORD_W-1:0] fx_t;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*WORD_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FRAC_W);
  endfunction

  // ---- SneakySnake sizes --------------------------------------------------
  // Bases are 2-bit codes; the pair of sequences and the result byte layout
  // are described in sneaky_pe.
  localparam int unsigned SNK_RESULTS_PER_BEAT = HBM_W / 8;  // 32

  // Input / output beats one PE moves for `items` work items of a kernel.
  // SneakySnake item = one sequence pair (2 beats in, one result byte out).
  // hdiff item      = one plane of rows x cols words (8 words per beat).
  // vadvc item      = one column of depth levels: 4 coefficient arrays in,
  //                   one solution array out.
  function automatic int unsigned in_beats(kernel_e k, int unsigned items,
                                           int unsigned rows, int unsigned cols,
                                           int unsigned depth);
    case (k)
      K_SNEAKY: return 2 * items;
      K_HDIFF:  return items * ((rows * cols) / WORDS_PER_BEAT);
      default:  return items * ((4 * depth) / WORDS_PER_BEAT);
    endcase
  endfunction

  function automatic int unsigned out_beats(kernel_e k, int unsigned items,
                                            int unsigned rows, int unsigned cols,
                                            int unsigned depth);
    case (k)
      K_SNEAKY: return (items + SNK_RESULTS_PER_BEAT - 1) / SNK_RESULTS_PER_BEAT;
      K_HDIFF:  return items * ((rows * cols) / WORDS_PER_BEAT);
      default:  return items * (depth / WORDS_PER_BEAT);
    endcase
  endfunction

endpackage
