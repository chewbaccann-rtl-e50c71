// param_buffer: Parameter Buffer holding weights, binarization thresholds and the
// layer descriptors, built from two 448-word SCM banks used as a double buffer.
//
// At any time one bank is the core bank, read by the scheduler and the DMA, and
// the other is the load bank, written (and read back) by the host through the I/O
// port. A pulse on `swap` exchanges the roles, so the parameters of the next
// network part can be loaded while the current one runs, hiding the load latency.
// `core_bank` tells which bank the core currently reads.
//
// Timing: both read ports return data the cycle after their enable.
//
// The two banks, their 3.5 kB total and the double buffering follow the paper
// (which also calls a bank 1 kB; 3.5 kB is used so that one bank holds a whole
// 7 x 7 x 16 x 16 weight tile, 392 words). The split into a core
// and a load port and the swap pulse are this design's choices.
module param_buffer
  import chewbacca_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               swap,
  output logic               core_bank,
  // core side: read only
  input  logic               core_re,
  input  logic [PB_AW-1:0]   core_raddr,
  output logic [WORD_W-1:0]  core_rdata,
  // load side: host
  input  logic               ld_re,
  input  logic [PB_AW-1:0]   ld_raddr,
  output logic [WORD_W-1:0]  ld_rdata,
  input  logic               ld_we,
  input  logic [PB_AW-1:0]   ld_waddr,
  input  logic [WORD_W-1:0]  ld_wdata
);

  logic [1:0][WORD_W-1:0] rdata;
  logic                   core_bank_rd;  // core bank at the time of the read

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) core_bank <= 1'b0;
    else if (swap) core_bank <= ~core_bank;
  end

  always_ff @(posedge clk) core_bank_rd <= core_bank;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic is_core;
    assign is_core = (core_bank == 1'(b));
    scm_bank #(.WORDS(PB_WORDS)) u_bank (
      .clk,
      .pwr   (1'b1),
      .re    (is_core ? core_re : ld_re),
      .raddr (is_core ? core_raddr : ld_raddr),
      .rdata (rdata[b]),
      .we    (!is_core && ld_we),
      .waddr (ld_waddr),
      .wdata (ld_wdata),
      .wstrb (2'b11)
    );
  end

  assign core_rdata = rdata[core_bank_rd];
  assign ld_rdata   = rdata[~core_bank_rd];

endmodule
