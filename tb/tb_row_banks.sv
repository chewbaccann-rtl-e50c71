// tb_row_banks: writes a different random row into each of the seven banks and
// reads all banks with one shared address, checking every bank's word.
module tb_row_banks;
  import chewbacca_pkg::*;
  logic clk = 0, we = 0, re = 0;
  logic [2:0] wbank = '0;
  logic [BANK_AW-1:0] waddr = '0, raddr = '0;
  logic [WORD_W-1:0] wdata = '0;
  logic [KMAX-1:0][WORD_W-1:0] rdata;
  logic [31:0] m [KMAX][256];
  int checks = 0, failures = 0;

  row_banks dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    for (int k = 0; k < KMAX; k++)
      for (int a = 0; a < 256; a++) begin
        @(negedge clk); we = 1; wbank = 3'(k); waddr = 8'(a); wdata = $urandom; m[k][a] = wdata;
      end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      int a;
      a = $urandom % 256;
      @(negedge clk); re = 1; raddr = 8'(a);
      @(negedge clk); re = 0;
      for (int k = 0; k < KMAX; k++) begin
        checks++;
        if (rdata[k] !== m[k][a]) begin failures++; $display("bank %0d addr %0d", k, a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
