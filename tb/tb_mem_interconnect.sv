// tb_mem_interconnect: drives the interconnect together with a real fmm and
// param_buffer. While busy, the DMA must read the source block and the NMCU must
// read and write the sink block, for both values of src_sel; while idle the host
// reaches either block; the parameter buffer port serves the scheduler and the DMA.
module tb_mem_interconnect;
  import chewbacca_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0, src_sel = 0, core_busy = 0;
  logic dma_fmm_re = 0, dma_pb_re = 0, sch_pb_re = 0, nm_re = 0, nm_we = 0;
  logic [FMM_AW-1:0] dma_fmm_raddr = '0, nm_raddr = '0, nm_waddr = '0, io_fmm_addr = '0;
  logic [PB_AW-1:0] dma_pb_raddr = '0, sch_pb_raddr = '0;
  logic [WORD_W-1:0] dma_fmm_rdata, pb_rdata, nm_rdata, nm_wdata = '0, io_fmm_wdata = '0, io_fmm_rdata;
  logic [1:0] nm_wstrb = 2'b11;
  logic io_blk = 0, io_fmm_re = 0, io_fmm_we = 0;
  logic [1:0] fmm_re, fmm_we;
  logic [1:0][FMM_AW-1:0] fmm_raddr, fmm_waddr;
  logic [1:0][WORD_W-1:0] fmm_rdata, fmm_wdata;
  logic [1:0][1:0] fmm_wstrb;
  logic pb_re;
  logic [PB_AW-1:0] pb_raddr;
  logic [WORD_W-1:0] pb_core_rdata;
  logic pb_swap = 0, pb_core_bank, ld_we = 0;
  logic [PB_AW-1:0] ld_waddr = '0;
  logic [WORD_W-1:0] ld_wdata = '0, ld_rdata;
  int checks = 0, failures = 0;

  mem_interconnect dut (.*);
  fmm #(.NBANK(NB)) u_fmm (.clk, .pwr('1), .re(fmm_re), .raddr(fmm_raddr), .rdata(fmm_rdata),
    .we(fmm_we), .waddr(fmm_waddr), .wdata(fmm_wdata), .wstrb(fmm_wstrb));
  param_buffer u_pb (.clk, .rst_n, .swap(pb_swap), .core_bank(pb_core_bank),
    .core_re(pb_re), .core_raddr(pb_raddr), .core_rdata(pb_core_rdata),
    .ld_re(1'b0), .ld_raddr('0), .ld_rdata, .ld_we, .ld_waddr, .ld_wdata);
  always #5 clk = ~clk;

  task automatic io_wr(input logic blk, input int a, input logic [31:0] d);
    @(negedge clk); io_blk = blk; io_fmm_we = 1; io_fmm_addr = FMM_AW'(a); io_fmm_wdata = d;
    @(negedge clk); io_fmm_we = 0;
  endtask

  task automatic chk(input string what, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // host fills both blocks while idle
    io_wr(0, 16'h0010, 32'hA0A0_0010);
    io_wr(1, 16'h0010, 32'hB1B1_0010);
    io_wr(0, 16'h0120, 32'hA0A0_0120);
    io_wr(1, 16'h0120, 32'hB1B1_0120);
    // PB load bank (1) then swap so the core sees it
    @(negedge clk); ld_we = 1; ld_waddr = 9'd3; ld_wdata = 32'h5EED_0003;
    @(negedge clk); ld_waddr = 9'd4; ld_wdata = 32'h5EED_0004;
    @(negedge clk); ld_we = 0; pb_swap = 1;
    @(negedge clk); pb_swap = 0;
    for (int s = 0; s < 2; s++) begin
      @(negedge clk); core_busy = 1; src_sel = 1'(s);
      // DMA reads the source block
      @(negedge clk); dma_fmm_re = 1; dma_fmm_raddr = 16'h0010;
      @(negedge clk); dma_fmm_re = 0;
      chk("dma src read", dma_fmm_rdata, s ? 32'hB1B1_0010 : 32'hA0A0_0010);
      // NMCU reads the sink block and writes it
      @(negedge clk); nm_re = 1; nm_raddr = 16'h0120;
      @(negedge clk); nm_re = 0;
      chk("nmcu sink read", nm_rdata, s ? 32'hA0A0_0120 : 32'hB1B1_0120);
      @(negedge clk); nm_we = 1; nm_waddr = 16'h0200; nm_wdata = 32'(s + 100);
      // the host is locked out while busy
      io_blk = 1'(s); io_fmm_we = 1; io_fmm_addr = 16'h0201; io_fmm_wdata = 32'hFFFF_FFFF;
      @(negedge clk); nm_we = 0; io_fmm_we = 0;
      // scheduler and DMA reads of the parameter buffer
      @(negedge clk); sch_pb_re = 1; sch_pb_raddr = 9'd3;
      @(negedge clk); sch_pb_re = 0; dma_pb_re = 1; dma_pb_raddr = 9'd4;
      chk("scheduler pb read", pb_rdata, 32'h5EED_0003);
      @(negedge clk); dma_pb_re = 0;
      chk("dma pb read", pb_rdata, 32'h5EED_0004);
      @(negedge clk); core_busy = 0;
    end
    // idle: host reads what the NMCU wrote into each sink
    for (int b = 0; b < 2; b++) begin
      @(negedge clk); io_blk = 1'(b); io_fmm_re = 1; io_fmm_addr = 16'h0200;
      @(negedge clk); io_fmm_re = 0;
      chk("host readback", io_fmm_rdata, (b == 1) ? 32'd100 : 32'd101);
      @(negedge clk); io_fmm_re = 1; io_fmm_addr = 16'h0201;
      @(negedge clk); io_fmm_re = 0;
      checks++;
      if (io_fmm_rdata === 32'hFFFF_FFFF) begin failures++; $display("host write while busy landed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
