// tb_fmm: writes random words across all banks of both blocks, reads them back
// through both block ports at once, and checks bank power gating of one block.
module tb_fmm;
  import chewbacca_pkg::*;
  localparam int NB = 73;
  logic clk = 0;
  logic [1:0][NB-1:0] pwr = '1;
  logic [1:0] re = '0, we = '0;
  logic [1:0][FMM_AW-1:0] raddr = '0, waddr = '0;
  logic [1:0][WORD_W-1:0] rdata, wdata = '0;
  logic [1:0][1:0] wstrb = '1;
  logic [31:0] model [2][int];
  int checks = 0, failures = 0;

  fmm dut (.*);
  always #5 clk = ~clk;

  initial begin
    int addrs [$];
    repeat (2) @(negedge clk);
    for (int i = 0; i < 300; i++) addrs.push_back((($urandom % NB) << 8) | ($urandom % 256));
    addrs.push_back(0); addrs.push_back(NB*256 - 1);
    foreach (addrs[i]) begin
      @(negedge clk);
      we = 2'b11;
      for (int b = 0; b < 2; b++) begin
        waddr[b] = FMM_AW'(addrs[i]); wdata[b] = $urandom; model[b][addrs[i]] = wdata[b];
      end
    end
    @(negedge clk); we = '0;
    foreach (addrs[i]) begin
      @(negedge clk);
      re = 2'b11; raddr[0] = FMM_AW'(addrs[i]); raddr[1] = FMM_AW'(addrs[addrs.size()-1-i]);
      @(negedge clk);
      re = '0;
      checks += 2;
      if (rdata[0] !== model[0][addrs[i]]) begin failures++; $display("blk0 %h", addrs[i]); end
      if (rdata[1] !== model[1][addrs[addrs.size()-1-i]]) begin failures++; $display("blk1"); end
    end
    // gate bank 5 of block 1: reads zero there, block 0 unaffected
    pwr[1][5] = 1'b0;
    @(negedge clk);
    re = 2'b11; raddr[0] = 16'h0510; raddr[1] = 16'h0510;
    @(negedge clk); re = '0;
    checks += 2;
    if (rdata[1] !== 32'h0) begin failures++; $display("gated bank read %h", rdata[1]); end
    if (model[0].exists(16'h0510) && rdata[0] !== model[0][16'h0510]) begin
      failures++; $display("other block disturbed");
    end
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
