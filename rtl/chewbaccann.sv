// chewbaccann: top level of the binary CNN accelerator.
//
// A host loads the input feature map into the feature map memory (FMM) and the
// weights, thresholds and layer descriptors into the parameter buffer (PB), then
// starts the core through the I/O registers. The scheduler runs the network layer
// by layer: the DMA copies filter rows and image rows into the seven row banks,
// the crossbar feeds them to the 7 x 7 BPU array, which produces one 2D binary
// inner product (or one pooled word) per cycle, and the near-memory compute unit
// accumulates, adds residuals, binarizes and packs the results into the sink
// block of the FMM. Source and sink blocks swap after every layer; `done` pulses
// when the last layer has been written and the host reads the result back.
//
// Ports: the host bus of io_ctrl, a `done` pulse and `busy`, and the per-bank
// power enables of both FMM blocks (`fmm_pwr`), which would drive the power
// switches of the memory banks outside this logic.
//
// The block structure and connections follow the paper's top-level figure; all
// protocols between the blocks are this design's own.
module chewbaccann
  import chewbacca_pkg::*;
#(
  parameter int unsigned NBANK = 73
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    req,
  input  logic                    we,
  input  logic [17:0]             addr,
  input  logic [WORD_W-1:0]       wdata,
  output logic                    rvalid,
  output logic [WORD_W-1:0]       rdata,
  output logic                    busy,
  output logic                    done,
  output logic [1:0][NBANK-1:0]   fmm_pwr
);

  // control
  logic               start, src_init, src_sel;
  logic [PB_AW-1:0]   desc_base;
  // FMM
  logic [1:0]                 f_re, f_we;
  logic [1:0][FMM_AW-1:0]     f_raddr, f_waddr;
  logic [1:0][WORD_W-1:0]     f_rdata, f_wdata;
  logic [1:0][1:0]            f_wstrb;
  // I/O side memory ports
  logic               io_fmm_blk, io_fmm_re, io_fmm_we;
  logic [FMM_AW-1:0]  io_fmm_addr;
  logic [WORD_W-1:0]  io_fmm_wdata, io_fmm_rdata;
  logic               pb_swap, pb_core_bank, io_pb_re, io_pb_we;
  logic [PB_AW-1:0]   io_pb_raddr, io_pb_waddr;
  logic [WORD_W-1:0]  io_pb_rdata, io_pb_wdata;
  // PB core port
  logic               pb_re;
  logic [PB_AW-1:0]   pb_raddr;
  logic [WORD_W-1:0]  pb_core_rdata, pb_rdata;
  // scheduler <-> DMA
  logic               dma_start, dma_busy;
  dma_src_e           dma_src;
  logic [FMM_AW-1:0]  dma_saddr;
  logic [2:0]         dma_bank;
  logic [BANK_AW-1:0] dma_daddr;
  logic [7:0]         dma_len;
  logic               dma_fmm_re, dma_pb_re;
  logic [FMM_AW-1:0]  dma_fmm_raddr;
  logic [PB_AW-1:0]   dma_pb_raddr;
  logic [WORD_W-1:0]  dma_fmm_rdata;
  logic               sch_pb_re;
  logic [PB_AW-1:0]   sch_pb_raddr;
  // row banks, crossbar, BPU array
  logic                       rb_we, rb_re;
  logic [2:0]                 rb_wbank;
  logic [BANK_AW-1:0]         rb_waddr, rb_raddr;
  logic [WORD_W-1:0]          rb_wdata;
  logic [KMAX-1:0][WORD_W-1:0] rb_rdata;
  logic [KMAX-1:0][2:0]       xb_sel;
  logic                       xb_half;
  logic [KMAX-1:0][CH-1:0]    img, wgt;
  logic                       img_clr, img_shift, img_valid, wgt_shift, emit;
  logic [KMAX-1:0]            tap_mask, row_en;
  logic                       arr_valid;
  logic [ARR_W-1:0]           arr_sum;
  logic [CH-1:0]              arr_pool;
  // NMCU
  nm_cmd_t                    nm_cmd;
  logic                       thr_we;
  logic [3:0]                 thr_idx;
  logic [PSUM_W-1:0]          thr_data;
  logic                       nm_re, nm_we;
  logic [FMM_AW-1:0]          nm_raddr, nm_waddr;
  logic [WORD_W-1:0]          nm_rdata, nm_wdata;
  logic [1:0]                 nm_wstrb;

  io_ctrl #(.NBANK(NBANK)) u_io (
    .clk, .rst_n, .req, .we, .addr, .wdata, .rvalid, .rdata,
    .start, .desc_base, .src_init, .busy, .done, .fmm_pwr,
    .fmm_blk(io_fmm_blk), .fmm_re(io_fmm_re), .fmm_we(io_fmm_we), .fmm_addr(io_fmm_addr),
    .fmm_wdata(io_fmm_wdata), .fmm_rdata(io_fmm_rdata),
    .pb_swap, .pb_core_bank, .pb_re(io_pb_re), .pb_raddr(io_pb_raddr), .pb_rdata(io_pb_rdata),
    .pb_we(io_pb_we), .pb_waddr(io_pb_waddr), .pb_wdata(io_pb_wdata)
  );

  fmm #(.NBANK(NBANK)) u_fmm (
    .clk, .pwr(fmm_pwr), .re(f_re), .raddr(f_raddr), .rdata(f_rdata),
    .we(f_we), .waddr(f_waddr), .wdata(f_wdata), .wstrb(f_wstrb)
  );

  param_buffer u_pb (
    .clk, .rst_n, .swap(pb_swap), .core_bank(pb_core_bank),
    .core_re(pb_re), .core_raddr(pb_raddr), .core_rdata(pb_core_rdata),
    .ld_re(io_pb_re), .ld_raddr(io_pb_raddr), .ld_rdata(io_pb_rdata),
    .ld_we(io_pb_we), .ld_waddr(io_pb_waddr), .ld_wdata(io_pb_wdata)
  );

  mem_interconnect u_ic (
    .clk, .rst_n, .src_sel, .core_busy(busy),
    .dma_fmm_re, .dma_fmm_raddr, .dma_fmm_rdata, .dma_pb_re, .dma_pb_raddr,
    .sch_pb_re, .sch_pb_raddr, .pb_rdata,
    .nm_re, .nm_raddr, .nm_rdata, .nm_we, .nm_waddr, .nm_wdata, .nm_wstrb,
    .io_blk(io_fmm_blk), .io_fmm_re, .io_fmm_we, .io_fmm_addr, .io_fmm_wdata, .io_fmm_rdata,
    .fmm_re(f_re), .fmm_raddr(f_raddr), .fmm_rdata(f_rdata), .fmm_we(f_we),
    .fmm_waddr(f_waddr), .fmm_wdata(f_wdata), .fmm_wstrb(f_wstrb),
    .pb_re, .pb_raddr, .pb_core_rdata
  );

  scheduler u_sched (
    .clk, .rst_n, .start, .desc_base, .src_init, .busy, .done, .src_sel,
    .pb_re(sch_pb_re), .pb_raddr(sch_pb_raddr), .pb_rdata,
    .dma_start, .dma_src, .dma_saddr, .dma_bank, .dma_daddr, .dma_len, .dma_busy,
    .rb_re, .rb_raddr, .xb_sel, .xb_half,
    .img_clr, .img_shift, .img_valid, .wgt_shift, .tap_mask, .row_en, .emit,
    .nm_cmd, .thr_we, .thr_idx, .thr_data
  );

  dma u_dma (
    .clk, .rst_n, .start(dma_start), .src(dma_src), .saddr(dma_saddr), .dbank(dma_bank),
    .daddr(dma_daddr), .len(dma_len), .busy(dma_busy),
    .fmm_re(dma_fmm_re), .fmm_raddr(dma_fmm_raddr), .fmm_rdata(dma_fmm_rdata),
    .pb_re(dma_pb_re), .pb_raddr(dma_pb_raddr), .pb_rdata,
    .rb_we, .rb_wbank, .rb_waddr, .rb_wdata
  );

  row_banks u_rb (
    .clk, .we(rb_we), .wbank(rb_wbank), .waddr(rb_waddr), .wdata(rb_wdata),
    .re(rb_re), .raddr(rb_raddr), .rdata(rb_rdata)
  );

  crossbar u_xbar (
    .bank_data(rb_rdata), .sel(xb_sel), .half(xb_half), .img, .wgt
  );

  bpu_array u_arr (
    .clk, .rst_n, .img_clr, .img_shift, .img_in(img), .img_valid,
    .wgt_shift, .wgt_in(wgt), .tap_mask, .row_en, .emit,
    .valid(arr_valid), .sum(arr_sum), .pool(arr_pool)
  );

  nmcu u_nmcu (
    .clk, .rst_n, .cmd(nm_cmd), .bpu_sum(arr_sum), .bpu_pool(arr_pool),
    .thr_we, .thr_idx, .thr_data,
    .mem_re(nm_re), .mem_raddr(nm_raddr), .mem_rdata(nm_rdata),
    .mem_we(nm_we), .mem_waddr(nm_waddr), .mem_wdata(nm_wdata), .mem_wstrb(nm_wstrb)
  );

  // Every command that consumes an array result meets a valid result.
  a_cmd_meets_result: assert property (@(posedge clk) disable iff (!rst_n)
    (nm_cmd.op inside {NM_ACC_INIT, NM_ACC, NM_POOL}) |-> arr_valid);

endmodule
