// tb_param_buffer: double buffering. The host fills the load bank while the core
// reads the other one; after a swap the core sees the new contents and the old
// bank becomes writable. Checks that loads never disturb the core bank.
module tb_param_buffer;
  import chewbacca_pkg::*;
  logic clk = 0, rst_n = 0, swap = 0, core_bank;
  logic core_re = 0, ld_re = 0, ld_we = 0;
  logic [PB_AW-1:0] core_raddr = '0, ld_raddr = '0, ld_waddr = '0;
  logic [WORD_W-1:0] core_rdata, ld_rdata, ld_wdata = '0;
  logic [31:0] m [2][PB_WORDS];
  int checks = 0, failures = 0;

  param_buffer dut (.*);
  always #5 clk = ~clk;

  task automatic load(input int bank, input int seed);
    for (int i = 0; i < PB_WORDS; i++) begin
      @(negedge clk); ld_we = 1; ld_waddr = PB_AW'(i); ld_wdata = 32'(i * 7919 + seed);
      // a core read in the same cycle must see the core bank
      core_re = 1; core_raddr = PB_AW'((i * 5) % PB_WORDS);
      m[bank][i] = ld_wdata;
      @(negedge clk); ld_we = 0; core_re = 0;
      checks++;
      if (core_rdata !== m[1-bank][(i * 5) % PB_WORDS]) begin
        failures++; $display("core read disturbed at %0d", i);
      end
    end
  endtask

  task automatic check_core(input int bank);
    for (int i = 0; i < PB_WORDS; i += 3) begin
      @(negedge clk); core_re = 1; core_raddr = PB_AW'(i);
      @(negedge clk); core_re = 0;
      checks++;
      if (core_rdata !== m[bank][i]) begin failures++; $display("core %0d", i); end
    end
    @(negedge clk); ld_re = 1; ld_raddr = 9'd4;
    @(negedge clk); ld_re = 0;
    checks++;
    if (ld_rdata !== m[1-bank][4]) begin failures++; $display("load-side readback"); end
  endtask

  initial begin
    foreach (m[b, i]) m[b][i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (core_bank !== 1'b0) begin failures++; $display("reset bank"); end
    // fill both banks through swaps
    load(1, 11);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    check_core(1);
    load(0, 99);
    check_core(1);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    check_core(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
