// scm_bank: one standard-cell memory bank of 256 words x 32 bit (1 kB).
//
// The bank has one read and one write port. Both ports are silenced when not
// enabled: the array and the read register only change when `re`/`we` is high,
// which in a latch array with clock gating means no dynamic power while idle.
// Writes take a 2-bit strobe, one bit per 16-bit half, because packed activation
// words are 16 bits wide. The read is synchronous: `rdata` holds mem[raddr] from
// the edge after `re`.
//
// `pwr` is the bank's power enable. A gated bank ignores writes and reads as zero;
// its contents are cleared on gating, as a powered-down latch array loses them.
//
// The 256 x 32 organisation and the idle silencing follow the paper. The silicon
// bank is a latch array with hierarchical clock gating; here it is an array of
// flip-flops with enables, which is equivalent at the cycle level. The read
// latency, the strobes and the power-gating behaviour are this design's choices.
module scm_bank
  import chewbacca_pkg::*;
#(
  parameter int unsigned WORDS = BANK_WORDS,
  parameter int unsigned W     = WORD_W,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          pwr,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [1:0]    wstrb
);

  logic [W-1:0] mem [WORDS];
  logic         pwr_q;

  always_ff @(posedge clk) begin
    pwr_q <= pwr;
    if (pwr && !pwr_q) begin
      for (int unsigned i = 0; i < WORDS; i++) mem[i] <= '0;
    end else if (pwr && we) begin
      if (wstrb[0]) mem[waddr][W/2-1:0] <= wdata[W/2-1:0];
      if (wstrb[1]) mem[waddr][W-1:W/2] <= wdata[W-1:W/2];
    end
  end

  always_ff @(posedge clk) begin
    if (!pwr)    rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

endmodule
