// dma: moves a block of 32-bit words from the feature map memory (source block)
// or the parameter buffer into one of the row banks.
//
// A transfer is started with a one-cycle `start` carrying source memory, source
// word address, destination bank, destination word address and length (1..255
// words). The DMA then issues one read per cycle and writes each word into the row
// bank the cycle after, when the memory returns it, so a transfer of n words
// takes n+1 cycles. `busy` is high from the cycle after `start` until the last
// write; a `start` while busy is a protocol error (asserted).
//
// The paper names the DMA and says what it moves; the transfer format and timing
// are this design's choices. Moving results out of the BPU array is done by the
// NMCU's write port here, not by this engine.
module dma
  import chewbacca_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  dma_src_e            src,
  input  logic [FMM_AW-1:0]   saddr,
  input  logic [2:0]          dbank,
  input  logic [BANK_AW-1:0]  daddr,
  input  logic [7:0]          len,
  output logic                busy,
  // source ports
  output logic                fmm_re,
  output logic [FMM_AW-1:0]   fmm_raddr,
  input  logic [WORD_W-1:0]   fmm_rdata,
  output logic                pb_re,
  output logic [PB_AW-1:0]    pb_raddr,
  input  logic [WORD_W-1:0]   pb_rdata,
  // row bank write port
  output logic                rb_we,
  output logic [2:0]          rb_wbank,
  output logic [BANK_AW-1:0]  rb_waddr,
  output logic [WORD_W-1:0]   rb_wdata
);

  dma_src_e           src_q;
  logic [FMM_AW-1:0]  rptr;
  logic [BANK_AW-1:0] wptr;
  logic [7:0]         left;
  logic               rd_active;
  logic               wr_pend;
  logic [BANK_AW-1:0] wr_addr;
  logic [2:0]         bank_q;

  assign rd_active = (left != 0);
  assign busy      = rd_active || wr_pend;

  assign fmm_re    = rd_active && (src_q == SRC_FMM);
  assign pb_re     = rd_active && (src_q == SRC_PB);
  assign fmm_raddr = rptr;
  assign pb_raddr  = rptr[PB_AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_q   <= SRC_FMM;
      rptr    <= '0;
      wptr    <= '0;
      left    <= '0;
      wr_pend <= 1'b0;
      wr_addr <= '0;
      bank_q  <= '0;
    end else begin
      wr_pend <= rd_active;
      wr_addr <= wptr;
      if (start) begin
        src_q  <= src;
        rptr   <= saddr;
        wptr   <= daddr;
        left   <= len;
        bank_q <= dbank;
      end else if (rd_active) begin
        rptr <= rptr + 1'b1;
        wptr <= wptr + 1'b1;
        left <= left - 1'b1;
      end
    end
  end

  assign rb_we    = wr_pend;
  assign rb_wbank = bank_q;
  assign rb_waddr = wr_addr;
  assign rb_wdata = (src_q == SRC_PB) ? pb_rdata : fmm_rdata;

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
