// tb_dma: transfers from FMM and parameter buffer models (one-cycle read latency)
// into the row bank write port. Checks every written word, its bank and address,
// and that a transfer of n words takes n+1 cycles of busy.
module tb_dma;
  import chewbacca_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  dma_src_e src = SRC_FMM;
  logic [FMM_AW-1:0] saddr = '0;
  logic [2:0] dbank = '0;
  logic [BANK_AW-1:0] daddr = '0;
  logic [7:0] len = '0;
  logic busy, fmm_re, pb_re, rb_we;
  logic [FMM_AW-1:0] fmm_raddr;
  logic [PB_AW-1:0] pb_raddr;
  logic [WORD_W-1:0] fmm_rdata, pb_rdata, rb_wdata;
  logic [2:0] rb_wbank;
  logic [BANK_AW-1:0] rb_waddr;
  int checks = 0, failures = 0, writes = 0, busy_cyc = 0;
  logic [2:0] exp_bank;
  int exp_daddr, exp_saddr;
  logic exp_pb;

  dma dut (.*);
  always #5 clk = ~clk;

  // memory models: word = f(address)
  always @(posedge clk) begin
    if (fmm_re) fmm_rdata <= {16'hF000, fmm_raddr};
    if (pb_re)  pb_rdata  <= {23'h0B0B0B, pb_raddr};
  end

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cyc++;
    if (rb_we) begin
      logic [31:0] e;
      e = exp_pb ? {23'h0B0B0B, 9'(exp_saddr + writes)} : {16'hF000, 16'(exp_saddr + writes)};
      checks++;
      if (rb_wbank !== exp_bank || int'(rb_waddr) != exp_daddr + writes || rb_wdata !== e) begin
        failures++;
        $display("write %0d: bank %0d addr %0d data %h, exp %0d %0d %h", writes, rb_wbank,
                 rb_waddr, rb_wdata, exp_bank, exp_daddr + writes, e);
      end
      writes++;
    end
  end

  task automatic xfer(input dma_src_e s, input int sa, input int b, input int da, input int n);
    exp_pb = (s == SRC_PB); exp_saddr = sa; exp_bank = 3'(b); exp_daddr = da;
    writes = 0; busy_cyc = 0;
    @(negedge clk); start = 1; src = s; saddr = FMM_AW'(sa); dbank = 3'(b);
    daddr = BANK_AW'(da); len = 8'(n);
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    checks++;
    if (writes != n) begin failures++; $display("wrote %0d of %0d", writes, n); end
    checks++;
    if (busy_cyc != n + 1) begin failures++; $display("busy %0d cycles for %0d words", busy_cyc, n); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    xfer(SRC_FMM, 16'h1230, 3, 0, 5);
    xfer(SRC_PB, 9'h100, 6, 128, 56);
    xfer(SRC_FMM, 16'h4800, 0, 10, 1);
    for (int i = 0; i < 10; i++)
      xfer(dma_src_e'($urandom % 2), $urandom % 400, $urandom % 7, $urandom % 100, 1 + $urandom % 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
