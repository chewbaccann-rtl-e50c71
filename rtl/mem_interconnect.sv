// mem_interconnect: routes the memory ports of the DMA, NMCU, scheduler and host
// I/O to the two feature map memory blocks and the parameter buffer.
//
// Feature map memory: block `src_sel` is the source of the running layer and
// serves the DMA's reads; the other block is the sink and serves the NMCU's reads
// and writes. Swapping the roles after each layer is only a change of `src_sel`.
// While the core is idle (`core_busy` low) the host port reaches either block
// (`io_blk`) instead; host requests during a run are dropped.
// Parameter buffer: its core read port is shared by the scheduler (descriptors,
// thresholds) and the DMA (weights); the scheduler never reads while a DMA runs,
// which is asserted. The host always reaches the load bank.
//
// Timing: combinational request routing; read data return one cycle after the
// request and are steered with the block selects registered at request time.
// Read data of the parameter buffer's core bank go unchanged to both readers.
//
// The paper names the memory interconnect and shows what it connects; the
// routing rules and the host's access policy are this design's choices.
module mem_interconnect
  import chewbacca_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     src_sel,
  input  logic                     core_busy,
  // DMA
  input  logic                     dma_fmm_re,
  input  logic [FMM_AW-1:0]        dma_fmm_raddr,
  output logic [WORD_W-1:0]        dma_fmm_rdata,
  input  logic                     dma_pb_re,
  input  logic [PB_AW-1:0]         dma_pb_raddr,
  // scheduler
  input  logic                     sch_pb_re,
  input  logic [PB_AW-1:0]         sch_pb_raddr,
  output logic [WORD_W-1:0]        pb_rdata,     // to the DMA and the scheduler
  // NMCU (sink block)
  input  logic                     nm_re,
  input  logic [FMM_AW-1:0]        nm_raddr,
  output logic [WORD_W-1:0]        nm_rdata,
  input  logic                     nm_we,
  input  logic [FMM_AW-1:0]        nm_waddr,
  input  logic [WORD_W-1:0]        nm_wdata,
  input  logic [1:0]               nm_wstrb,
  // host I/O
  input  logic                     io_blk,
  input  logic                     io_fmm_re,
  input  logic                     io_fmm_we,
  input  logic [FMM_AW-1:0]        io_fmm_addr,
  input  logic [WORD_W-1:0]        io_fmm_wdata,
  output logic [WORD_W-1:0]        io_fmm_rdata,
  // FMM block ports
  output logic [1:0]               fmm_re,
  output logic [1:0][FMM_AW-1:0]   fmm_raddr,
  input  logic [1:0][WORD_W-1:0]   fmm_rdata,
  output logic [1:0]               fmm_we,
  output logic [1:0][FMM_AW-1:0]   fmm_waddr,
  output logic [1:0][WORD_W-1:0]   fmm_wdata,
  output logic [1:0][1:0]          fmm_wstrb,
  // parameter buffer core port
  output logic                     pb_re,
  output logic [PB_AW-1:0]         pb_raddr,
  input  logic [WORD_W-1:0]        pb_core_rdata
);

  logic src_q, io_blk_q;

  always_ff @(posedge clk) begin
    src_q    <= src_sel;
    io_blk_q <= io_blk;
  end

  always_comb begin
    for (int unsigned b = 0; b < 2; b++) begin
      if (!core_busy) begin
        fmm_re[b]    = io_fmm_re && (io_blk == 1'(b));
        fmm_raddr[b] = io_fmm_addr;
        fmm_we[b]    = io_fmm_we && (io_blk == 1'(b));
        fmm_waddr[b] = io_fmm_addr;
        fmm_wdata[b] = io_fmm_wdata;
        fmm_wstrb[b] = 2'b11;
      end else if (src_sel == 1'(b)) begin
        fmm_re[b]    = dma_fmm_re;
        fmm_raddr[b] = dma_fmm_raddr;
        fmm_we[b]    = 1'b0;
        fmm_waddr[b] = '0;
        fmm_wdata[b] = '0;
        fmm_wstrb[b] = 2'b00;
      end else begin
        fmm_re[b]    = nm_re;
        fmm_raddr[b] = nm_raddr;
        fmm_we[b]    = nm_we;
        fmm_waddr[b] = nm_waddr;
        fmm_wdata[b] = nm_wdata;
        fmm_wstrb[b] = nm_wstrb;
      end
    end
  end

  assign dma_fmm_rdata = fmm_rdata[src_q];
  assign nm_rdata      = fmm_rdata[~src_q];
  assign io_fmm_rdata  = fmm_rdata[io_blk_q];

  assign pb_re    = dma_pb_re | sch_pb_re;
  assign pb_raddr = dma_pb_re ? dma_pb_raddr : sch_pb_raddr;
  assign pb_rdata = pb_core_rdata;

  a_pb_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(dma_pb_re && sch_pb_re));

endmodule
