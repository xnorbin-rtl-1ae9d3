// xnorbin_pkg: constants and types shared by the binary CNN accelerator.
//
// The array sizes (7 BPUs of 7 xnor_sum units on 16-bit vectors, 7 row banks of
// 256 x 16 bit, two single-port 32-bit image memories of 4096 and 8192 lines and a
// 512 x 32 bit parameter buffer) are the published ones. The layer descriptor layout
// and the DMA command encoding are this design's own choices.
package xnorbin_pkg;

  localparam int unsigned VEC      = 16;   // feature maps per packed word
  localparam int unsigned KMAX     = 7;    // largest kernel size, = BPUs = xnor_sum per BPU
  localparam int unsigned XS_W     = 6;    // signed xnor_sum result width
  localparam int unsigned BPU_W    = 8;    // signed BPU row sum width
  localparam int unsigned OUT_W    = 16;   // signed cluster output / partial sum width
  localparam int unsigned BANK_DEPTH = 256;
  localparam int unsigned MEM1_DEPTH = 4096;
  localparam int unsigned MEM2_DEPTH = 8192;
  localparam int unsigned PARAM_DEPTH = 512;
  localparam int unsigned MEM_W    = 32;
  localparam int unsigned LINE_AW  = 13;   // line address width covering both image memories
  localparam int unsigned PARAM_AW = 9;
  localparam int unsigned DESC_LINES  = 8; // parameter-buffer lines reserved per layer descriptor

  typedef logic [VEC-1:0] word_t;

  // One layer as the scheduler reads it from the parameter buffer (6 used lines of 32 bit).
  //   line 0: W[15:0]  H[31:16]        input width / height in pixels
  //   line 1: K[3:0] pool[4] last[5]   NS[31:16] number of 16-map input slices
  //   line 2: NOG[15:0]                number of 16-map output groups
  //           WGT[31:16]               weight base, 16-bit half index in the parameter buffer
  //   line 3: THR[15:0]                threshold base, 16-bit half index in the parameter buffer
  //           IN[31:16]                input base, 16-bit half index in the source memory
  //   line 4: OUT[15:0]                binary output base, half index in the sink memory
  //           PSUM[31:16]              partial-sum base, line index in the sink memory
  //   line 5: POOL[15:0]               pooled output base, half index in the sink memory
  typedef struct packed {
    logic [15:0] w;
    logic [15:0] h;
    logic [3:0]  k;
    logic        pool;
    logic        last;
    logic [15:0] ns;
    logic [15:0] nog;
    logic [15:0] wgt_base;
    logic [15:0] thr_base;
    logic [15:0] in_base;
    logic [15:0] out_base;
    logic [15:0] psum_base;
    logic [15:0] pool_base;
  } layer_desc_t;

  typedef enum logic [2:0] {
    CMD_NONE     = 3'd0,
    CMD_LOAD_ROW = 3'd1,  // copy one input row of one slice into a row bank
    CMD_LOAD_WGT = 3'd2,  // shift K x K weights of one output map / slice into the weight CSRs
    CMD_BINARIZE = 3'd3,  // threshold 16 partial-sum maps and pack them into binary words
    CMD_POOL     = 3'd4   // 2x2 / stride 2 OR pooling of one 16-map binary output group
  } dma_cmd_e;

  // Result of bipolar XNOR-popcount over n bits: 2*popcount(xnor) - n.
  function automatic int bipolar_dot(input word_t a, input word_t b);
    int pc = 0;
    for (int i = 0; i < VEC; i++) pc += (a[i] ~^ b[i]) ? 1 : 0;
    return 2 * pc - VEC;
  endfunction

endpackage
