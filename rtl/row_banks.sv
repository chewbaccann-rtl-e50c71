// row_banks: the seven row bank memories between the FMM/parameter buffer and the
// BPU array, one SCM bank (256 x 32 bit) each.
//
// Each bank holds one input feature map row of the current 16-channel chunk in
// words 0..127 (two 16-bit pixel words per 32-bit word, pixel x in word x/2, half
// x%2) and, from word RB_WREG = 128 on, the weights of one kernel row for the 16
// filters of the current output tile (item b*k_w + kc, packed the same way).
// Image row y lives in bank y mod 7, so moving the window down one row replaces
// just one bank; weights of kernel row kr live in the bank of BPU kr+3-k_h/2.
//
// Writes come from the DMA, one word per cycle into the selected bank. All banks
// are read with one shared address, because every BPU needs the same column at
// the same time; `rdata[k]` is valid the cycle after `re`.
//
// Seven banks of one SCM bank each and their content follow the paper; the layout
// inside a bank and the shared read address are this design's choices.
module row_banks
  import chewbacca_pkg::*;
(
  input  logic                          clk,
  input  logic                          we,
  input  logic [2:0]                    wbank,
  input  logic [BANK_AW-1:0]            waddr,
  input  logic [WORD_W-1:0]             wdata,
  input  logic                          re,
  input  logic [BANK_AW-1:0]            raddr,
  output logic [KMAX-1:0][WORD_W-1:0]   rdata
);

  for (genvar k = 0; k < KMAX; k++) begin : g_bank
    scm_bank u_bank (
      .clk,
      .pwr   (1'b1),
      .re,
      .raddr,
      .rdata (rdata[k]),
      .we    (we && (wbank == 3'(k))),
      .waddr,
      .wdata,
      .wstrb (2'b11)
    );
  end

endmodule
