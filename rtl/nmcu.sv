// nmcu: Near-Memory Compute Unit, the on-the-fly arithmetic between the BPU array
// and the sink block of the feature map memory.
//
// It executes one command per cycle (nm_cmd_t, see chewbacca_pkg):
//   ACC_INIT  psum[waddr] = bpu_sum                      first input chunk
//             (psum[a] is the 16-bit half whalf/rhalf of word a)
//   ACC       psum[waddr] = psum[raddr] + bpu_sum        read-add-write
//   RES_LOAD  residual register = mem[raddr]
//   RES_ADD   psum[waddr] = psum[raddr] + residual       residual path from the FMM
//   BIN       bit = psum[raddr] >= thr[ch], shifted into a 16-bit pack register;
//             with `wlast` the packed word (channel c in bit c) is written to the
//             16-bit half `whalf` of word waddr
//   POOL      the pooled 16-channel word from the BPU array is written to a half
//   AVG       window sum = (acc_en ? window sum : 0) + psum[raddr]
//             With acc_en a BIN compares psum[raddr] + window sum instead: s*s - 1
//             AVGs and one BIN give the average pooling of an s x s window before
//             binarization, against a threshold that the host has multiplied by
//             s*s (mean >= t exactly when sum >= s*s*t, so no division is needed).
// Partial sums are 16-bit two's complement values, two per 32-bit word: every
// command that reads picks the half `rhalf`, every write goes to the half `whalf`
// through the half-word strobes, so neighbouring sums never disturb each other.
// 16 bits hold sums up to 7 x 7 x 16 x 41 = 32,144, i.e. 41 input chunks of a 7 x 7
// kernel; there is no saturation. Thresholds come from a 16-entry register file loaded by the scheduler from
// the parameter buffer (thr_we), one per output channel of the current tile.
//
// Timing: a command is accepted in the cycle in which its BPU result (bpu_sum,
// bpu_pool) is present. The read is issued in that cycle, the memory answers one
// cycle later and the write happens in that second cycle, so a command occupies
// two pipeline stages and a new one can start every cycle. RES_LOAD directly
// followed by RES_ADD is allowed. The read address goes to the memory unchanged
// in the accepting cycle, so the second stage's copy of raddr is left unused.
//
// The operations (read-add-write accumulation, residual accumulation from the
// FMM, binarization by thresholds, packing 16 activations) follow the paper and its
// NMCU figure; the command encoding, widths and the two-stage pipeline are this
// design's choices.
module nmcu
  import chewbacca_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  nm_cmd_t              cmd,
  input  logic [ARR_W-1:0]     bpu_sum,
  input  logic [CH-1:0]        bpu_pool,
  input  logic                 thr_we,
  input  logic [3:0]           thr_idx,
  input  logic [PSUM_W-1:0]    thr_data,
  // sink block port
  output logic                 mem_re,
  output logic [FMM_AW-1:0]    mem_raddr,
  input  logic [WORD_W-1:0]    mem_rdata,
  output logic                 mem_we,
  output logic [FMM_AW-1:0]    mem_waddr,
  output logic [WORD_W-1:0]    mem_wdata,
  output logic [1:0]           mem_wstrb
);

  logic [CH-1:0][PSUM_W-1:0] thr;
  // window sum of up to 7 x 7 partial sums
  localparam int unsigned WSUM_W = PSUM_W + 6;

  nm_cmd_t                   s1;
  logic [ARR_W-1:0]          s1_sum;
  logic [CH-1:0]             s1_pool;
  logic signed [PSUM_W-1:0]  res_q;
  logic [CH-1:0]             pack_q;
  logic signed [PSUM_W-1:0]  rd_psum;
  logic signed [PSUM_W-1:0]  add_out;
  logic signed [WSUM_W-1:0]  wsum_q, wsum_d;
  logic                      bin_bit;
  logic [CH-1:0]             pack_d;

  // stage 0: issue the read
  always_comb begin
    mem_raddr = cmd.raddr;
    unique case (cmd.op)
      NM_ACC, NM_RES_LOAD, NM_RES_ADD, NM_BIN, NM_AVG: mem_re = 1'b1;
      default:                                 mem_re = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1      <= '0;
      s1_sum  <= '0;
      s1_pool <= '0;
      thr     <= '0;
    end else begin
      s1      <= cmd;
      s1_sum  <= bpu_sum;
      s1_pool <= bpu_pool;
      if (thr_we) thr[thr_idx] <= thr_data;
    end
  end

  // stage 1: compute and write
  always_comb begin
    rd_psum   = s1.rhalf ? mem_rdata[WORD_W-1:PSUM_W] : mem_rdata[PSUM_W-1:0];
    add_out   = rd_psum + ((s1.op == NM_RES_ADD) ? res_q : PSUM_W'(s1_sum));
    wsum_d    = WSUM_W'(rd_psum) + (s1.acc_en ? wsum_q : '0);
    bin_bit   = wsum_d >= WSUM_W'($signed(thr[s1.ch]));
    pack_d    = {bin_bit, pack_q[CH-1:1]};
    mem_we    = 1'b0;
    mem_waddr = s1.waddr;
    mem_wdata = '0;
    mem_wstrb = 2'b11;
    unique case (s1.op)
      NM_ACC_INIT: begin
        mem_we    = 1'b1;
        mem_wdata = {PSUM_W'(s1_sum), PSUM_W'(s1_sum)};
        mem_wstrb = s1.whalf ? 2'b10 : 2'b01;
      end
      NM_ACC, NM_RES_ADD: begin
        mem_we    = 1'b1;
        mem_wdata = {add_out, add_out};
        mem_wstrb = s1.whalf ? 2'b10 : 2'b01;
      end
      NM_BIN: begin
        mem_we    = s1.wlast;
        mem_wdata = {pack_d, pack_d};
        mem_wstrb = s1.whalf ? 2'b10 : 2'b01;
      end
      NM_POOL: begin
        mem_we    = 1'b1;
        mem_wdata = {s1_pool, s1_pool};
        mem_wstrb = s1.whalf ? 2'b10 : 2'b01;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_q  <= '0;
      pack_q <= '0;
      wsum_q <= '0;
    end else begin
      if (s1.op == NM_AVG)      wsum_q <= wsum_d;
      if (s1.op == NM_RES_LOAD) res_q  <= rd_psum;
      if (s1.op == NM_BIN)      pack_q <= pack_d;
    end
  end

endmodule
