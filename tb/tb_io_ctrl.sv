// tb_io_ctrl: host bus decode and control registers. Checks that FMM, parameter
// buffer and register regions are routed to the right strobes, that read data
// return one cycle later from the region that was addressed, that start is refused
// while busy, the sticky done bit, the pb_swap strobe and the power mask registers.
module tb_io_ctrl;
  import chewbacca_pkg::*;
  localparam int NB = 40;
  logic clk = 0, rst_n = 0, req = 0, we = 0;
  logic [17:0] addr = '0;
  logic [WORD_W-1:0] wdata = '0, rdata;
  logic rvalid, start, src_init, busy = 0, done = 0;
  logic [PB_AW-1:0] desc_base;
  logic [1:0][NB-1:0] fmm_pwr;
  logic fmm_blk, fmm_re, fmm_we, pb_swap, pb_core_bank = 0, pb_re, pb_we;
  logic [FMM_AW-1:0] fmm_addr;
  logic [WORD_W-1:0] fmm_wdata, fmm_rdata, pb_rdata, pb_wdata;
  logic [PB_AW-1:0] pb_raddr, pb_waddr;
  int checks = 0, failures = 0, n_start = 0, n_swap = 0;

  io_ctrl #(.NBANK(NB)) dut (.*);
  always #5 clk = ~clk;

  // memory models returning address-derived data one cycle after a read
  always @(posedge clk) begin
    if (fmm_re) fmm_rdata <= {15'h0AB, fmm_blk, fmm_addr};
    if (pb_re)  pb_rdata  <= {23'h0CDCDC, pb_raddr};
  end
  always @(posedge clk) if (rst_n) begin
    if (start) n_start++;
    if (pb_swap) n_swap++;
  end

  task automatic chk(input string what, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s got %h exp %h", what, got, exp); end
  endtask

  task automatic wr(input logic [17:0] a, input logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wdata = d;
    #1;
    // combinational decode of the write
    chk("fmm_we", 32'(fmm_we), 32'(a[17:16] < 2));
    chk("pb_we", 32'(pb_we), 32'(a[17:16] == 2));
    if (a[17:16] < 2) begin
      chk("fmm_blk", 32'(fmm_blk), 32'(a[16]));
      chk("fmm_addr", 32'(fmm_addr), 32'(a[15:0]));
    end
    if (a[17:16] == 2) chk("pb_waddr", 32'(pb_waddr), 32'(a[8:0]));
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic rd(input logic [17:0] a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = a;
    @(negedge clk); req = 0;
    chk("rvalid", 32'(rvalid), 1);
    d = rdata;
  endtask

  initial begin
    logic [31:0] d;
    logic [17:0] a;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // power masks reset to all on
    chk("pwr reset", 32'(fmm_pwr[0] == '1 && fmm_pwr[1] == '1), 1);
    // random memory region reads and writes
    for (int i = 0; i < 200; i++) begin
      a = 18'($urandom % (3 * 65536));
      if ($urandom % 2) wr(a, $urandom);
      else begin
        rd(a, d);
        if (a[17:16] < 2) chk("fmm read", d, {15'h0AB, a[16], a[15:0]});
        else chk("pb read", d, {23'h0CDCDC, a[8:0]});
      end
    end
    // registers
    wr(18'h30001, 32'd77);
    rd(18'h30001, d); chk("desc_base", d, 77); chk("desc_base port", 32'(desc_base), 77);
    wr(18'h30002, 32'd1);
    rd(18'h30002, d); chk("src", d, 1); chk("src port", 32'(src_init), 1);
    wr(18'h30010, 32'hFFFF_0F0F);
    wr(18'h30011, 32'h0000_00A5);
    wr(18'h30014, 32'h1234_5678);
    chk("pwr0 lo", 32'(fmm_pwr[0][31:0]), 32'hFFFF_0F0F);
    chk("pwr0 hi", 32'(fmm_pwr[0][NB-1:32]), 32'hA5);
    chk("pwr1 lo", 32'(fmm_pwr[1][31:0]), 32'h1234_5678);
    rd(18'h30011, d); chk("pwr readback", d, 32'hA5);
    // start while idle, done sticky, start refused while busy
    wr(18'h30000, 32'h1);
    chk("one start", n_start, 1);
    @(negedge clk); busy = 1;
    wr(18'h30000, 32'h1);
    chk("start refused while busy", n_start, 1);
    rd(18'h30000, d); chk("status busy", d, 32'b001);
    @(negedge clk); busy = 0; done = 1;
    @(negedge clk); done = 0;
    rd(18'h30000, d); chk("status done", d, 32'b010);
    wr(18'h30000, 32'h2);
    chk("swap", n_swap, 1);
    chk("swap is no start", n_start, 1);
    pb_core_bank = 1;
    rd(18'h30000, d); chk("status bank", d, 32'b110);
    wr(18'h30000, 32'h1);
    rd(18'h30000, d); chk("start clears done", d, 32'b100);
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
