// fmm: Feature Map Memory, two blocks of NBANK SCM banks each.
//
// One block is the source of a layer (its input feature map) and the other the
// sink (partial sums and the output feature map); the memory interconnect swaps
// the two roles after each layer, so this module only exposes one read and one
// write port per block. A word address is {bank, word}: bits [15:8] pick one of
// NBANK banks, bits [7:0] the word inside it. Only the addressed bank is enabled,
// the others stay silent. `pwr[b]` holds the power enable of every bank of block
// b: a bank that is switched off reads as zero and loses its contents.
//
// Timing: `rdata[b]` is valid the cycle after `re[b]`. Writes take effect on the
// edge at which `we[b]` is high.
//
// The two blocks of 73 banks (2 x 73 kB = 146 kB), the source/sink roles and
// bank-level power gating follow the paper. Address mapping, ports and the
// behaviour of a gated bank are this design's choices.
module fmm
  import chewbacca_pkg::*;
#(
  parameter int unsigned NBANK = 73
) (
  input  logic                           clk,
  input  logic [1:0][NBANK-1:0]          pwr,
  input  logic [1:0]                     re,
  input  logic [1:0][FMM_AW-1:0]         raddr,
  output logic [1:0][WORD_W-1:0]         rdata,
  input  logic [1:0]                     we,
  input  logic [1:0][FMM_AW-1:0]         waddr,
  input  logic [1:0][WORD_W-1:0]         wdata,
  input  logic [1:0][1:0]                wstrb
);

  localparam int unsigned BW = FMM_AW - BANK_AW;

  for (genvar b = 0; b < 2; b++) begin : g_blk
    logic [NBANK-1:0][WORD_W-1:0] bank_rdata;
    logic [BW-1:0]                rbank_q;

    for (genvar k = 0; k < NBANK; k++) begin : g_bank
      scm_bank u_bank (
        .clk,
        .pwr   (pwr[b][k]),
        .re    (re[b] && (raddr[b][FMM_AW-1:BANK_AW] == BW'(k))),
        .raddr (raddr[b][BANK_AW-1:0]),
        .rdata (bank_rdata[k]),
        .we    (we[b] && (waddr[b][FMM_AW-1:BANK_AW] == BW'(k))),
        .waddr (waddr[b][BANK_AW-1:0]),
        .wdata (wdata[b]),
        .wstrb (wstrb[b])
      );
    end

    always_ff @(posedge clk) begin
      if (re[b]) rbank_q <= raddr[b][FMM_AW-1:BANK_AW];
    end

    always_comb begin
      rdata[b] = '0;
      for (int unsigned k = 0; k < NBANK; k++) begin
        if (rbank_q == BW'(k)) rdata[b] = bank_rdata[k];
      end
    end
  end

endmodule
