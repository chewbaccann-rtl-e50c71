// chewbacca_pkg: constants, types and the layer descriptor format shared by the
// binary CNN accelerator.
//
// The datapath dimensions follow the published architecture: 7 BPUs of 7 xnor_sum
// units, 16 input channels per xnor_sum, SCM banks of 256 x 32 bit, 7 row banks,
// 73 banks per feature map memory block, 2 parameter buffer banks of
// 1.75 kB (3.5 kB together). Everything about
// data layout (how 16-bit activation words are packed into 32-bit memory words, the
// layer descriptor, the NMCU command set) is this design's own choice.
package chewbacca_pkg;

  // ---------------------------------------------------------------- datapath
  localparam int unsigned CH      = 16;  // channels per xnor_sum (input chunk c_i hat)
  localparam int unsigned KMAX    = 7;   // xnor_sum units per BPU, BPUs per array
  localparam int unsigned KCENTER = 3;   // CSR position / BPU index of the kernel centre
  localparam int unsigned XS_W    = 6;   // xnor_sum output width (Fig. 1b prints 6)
  localparam int unsigned BPU_W   = 8;   // BPU output width (Fig. 1b prints 8)
  localparam int unsigned ARR_W   = 10;  // array output: 7 x 112 = 784 < 1024
  localparam int unsigned PSUM_W  = 16;  // partial sums and thresholds, two's complement,
                                         // two partial sums per memory word

  // ---------------------------------------------------------------- memories
  localparam int unsigned WORD_W     = 32;  // SCM word width
  localparam int unsigned BANK_WORDS = 256; // SCM words per bank
  localparam int unsigned BANK_AW    = 8;
  localparam int unsigned RB_WREG    = 128; // row bank word where the weight region starts
  localparam int unsigned FMM_AW     = 16;  // word address inside one FMM block
  localparam int unsigned PB_WORDS   = 448; // words per parameter buffer bank (1.75 kB)
  localparam int unsigned PB_AW      = 9;   // word address inside the core's PB bank

  // Cycles from a CSR shift strobe to the array result being valid: the CSR
  // register, the BPU output register and the array output register.
  localparam int unsigned ARR_LAT = 3;

  // ---------------------------------------------------------------- layer descriptor
  typedef enum logic [1:0] {
    OP_CONV = 2'd0,
    OP_POOL = 2'd1
  } layer_op_e;

  // Five 32-bit words in the parameter buffer, at desc_base + 5*layer.
  typedef struct packed {
    logic                last;       // word0[31]  last layer of the network
    logic                res_en;     // word0[30]  add residual map before binarization
    logic                acc_in;     // word0[29]  first input chunk adds onto the partial
                                     //            sums already in the sink (continues a
                                     //            layer split over several runs)
    logic                no_bin;     // word0[28]  leave the partial sums, no binarization
    logic [1:0]          rsv0;       // word0[27:26]
    layer_op_e           op;         // word0[25:24]
    logic [2:0]          k_h;        // word0[23:21] kernel height (odd, 1..7) or pool size
    logic [2:0]          k_w;        // word0[20:18] kernel width  (odd, 1..7) or pool size
    logic [8:0]          i_h;        // word0[17:9]
    logic [8:0]          i_w;        // word0[8:0]
  } desc_w0_t;

  typedef struct packed {
    logic [3:0]  rsv1;               // word1[31:28]
    logic [2:0]  avg_s;              // word1[27:25] conv: average pooling s x s before
                                     //              binarization (0, 1: none)
    logic [8:0]  wbase;              // word1[24:16] weights, PB word address
    logic [7:0]  n_co;               // word1[15:8]  output channel tiles of 16
    logic [7:0]  n_ci;               // word1[7:0]   input channel chunks of 16
  } desc_w1_t;

  typedef struct packed {
    desc_w0_t            w0;
    desc_w1_t            w1;
    logic [15:0]         out_base;   // word2[31:16] output FM, sink block word address
    logic [15:0]         in_base;    // word2[15:0]  input FM, source block word address
    logic [15:0]         res_base;   // word3[31:16] residual map, sink block word address
    logic [15:0]         psum_base;  // word3[15:0]  partial sums, sink block word address
    logic [8:0]          thr_base;   // word4[8:0]   thresholds, PB word address
  } layer_cfg_t;

  // ---------------------------------------------------------------- NMCU commands
  typedef enum logic [2:0] {
    NM_NOP      = 3'd0,
    NM_ACC_INIT = 3'd1,  // psum[waddr] = bpu_sum   (psum = one 16-bit half of a word)
    NM_ACC      = 3'd2,  // psum[waddr] = psum[raddr] + bpu_sum   (read-add-write)
    NM_RES_LOAD = 3'd3,  // residual register = mem[raddr]
    NM_RES_ADD  = 3'd4,  // psum[waddr] = psum[raddr] + residual register
    NM_BIN      = 3'd5,  // bit = psum[raddr] >= thr[ch]; shift into pack register
    NM_POOL     = 3'd6,  // mem16[waddr,half] = pooled word from the BPU array
    NM_AVG      = 3'd7   // window sum = (acc_en ? window sum : 0) + psum[raddr]
  } nm_op_e;

  typedef struct packed {
    nm_op_e                 op;
    logic [FMM_AW-1:0]      raddr;
    logic [FMM_AW-1:0]      waddr;
    logic                   rhalf;   // 16-bit half of the word read
    logic                   whalf;   // 16-bit half of the word written
    logic [3:0]             ch;      // threshold index (BIN)
    logic                   wlast;   // BIN: 16th channel, write the packed word
    logic                   acc_en;  // AVG, BIN: add the window sum of the previous AVGs
  } nm_cmd_t;

  // Memory selector of a DMA transfer.
  typedef enum logic {
    SRC_FMM = 1'b0,
    SRC_PB  = 1'b1
  } dma_src_e;

  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
