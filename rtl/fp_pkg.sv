// fp_pkg: sizes, types and shared arithmetic of the sparse-attention prefill
// accelerator.
//
// Sizes follow the design's main configuration: 128-token blocks (the chunk
// and sparse-attention block size), 32x32 systolic arrays, six DSP arrays and
// six bit-plane arrays, a 128K-token context (1024 blocks). The head counts
// and head dimension are those of a Llama-3.2-3B layer (24 query heads,
// 8 KV heads, d = 128); they are this design's choice, the paper names the
// model but not its shape.
//
// exp2_p8() is the one exponential used by both the index generator and the
// attention unit: a score s is scaled to t = s >>> shift, read as a log2-domain
// value with 4 fraction bits, and turned into p = floor(16 * 2^(t/16)) clamped
// to 0..127 so that p is a valid INT8 operand for the matrix unit. The 16-entry
// table holds floor(2^(f/16) * 2^15).
package fp_pkg;

  localparam int unsigned BLK      = 128;   // tokens per block / chunk
  localparam int unsigned HEAD_DIM = 128;   // d
  localparam int unsigned ARR_N    = 32;    // systolic array edge
  localparam int unsigned NA_DSP   = 6;     // DSP-based arrays
  localparam int unsigned NA_LUT   = 6;     // bit-plane arrays
  localparam int unsigned N_HEADS  = 24;    // query heads per layer
  localparam int unsigned N_KVH    = 8;     // KV heads (GQA)
  localparam int unsigned NB_MAX   = 1024;  // blocks in the longest context (128K)
  localparam int unsigned KMAX     = 64;    // top-k candidate list length
  // job-list entries for the worst case: every head keeps KMAX vertical and
  // KMAX slash indices, so each query block has at most 2*KMAX key blocks
  localparam int unsigned JOB_MAX  = N_HEADS * NB_MAX * 2 * KMAX;

  typedef logic signed [7:0]  i8_t;
  typedef logic signed [31:0] i32_t;

  // selection kinds emitted by the index generator
  typedef enum logic [1:0] {SEL_VERT = 2'd0, SEL_SLASH = 2'd1, SEL_QA = 2'd2} sel_kind_e;
  // per-head pattern decided by the divergence test
  typedef enum logic {PAT_VS = 1'b0, PAT_QA = 1'b1} pattern_e;

  // floor(2^(f/16) * 32768), f = 0..15
  function automatic logic [15:0] exp2_frac(input logic [3:0] f);
    logic [15:0] t [16];
    t = '{16'd32768, 16'd34218, 16'd35733, 16'd37315, 16'd38967, 16'd40693,
          16'd42494, 16'd44376, 16'd46340, 16'd48392, 16'd50535, 16'd52772,
          16'd55108, 16'd57548, 16'd60096, 16'd62757};
    return t[f];
  endfunction

  // p = floor(16 * 2^(t/16)), t = s >>> shift, clamped to [0,127]
  function automatic logic [7:0] exp2_p8(input logic signed [31:0] s, input int unsigned shift);
    logic signed [31:0] t;
    logic signed [31:0] n;
    logic [22:0] m;
    t = s >>> shift;
    if (t > 32'sd47) return 8'd127;
    if (t < -32'sd64) return 8'd0;
    n = (t >>> 4) + 32'sd4;                 // 0..6
    m = 23'(exp2_frac(t[3:0])) << n[2:0];
    return 8'(m >> 15);
  endfunction

endpackage
