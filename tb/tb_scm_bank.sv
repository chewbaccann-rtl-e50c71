// tb_scm_bank: random reads and writes with half-word strobes against an array
// model, one-cycle read latency, read silencing (rdata holds without re), and
// power gating (gated bank reads zero, ignores writes, loses its contents).
module tb_scm_bank;
  logic clk = 0, pwr = 1, re = 0, we = 0;
  logic [7:0] raddr = '0, waddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [1:0] wstrb = '0;
  logic [31:0] model [256];
  int checks = 0, failures = 0;

  scm_bank dut (.*);
  always #5 clk = ~clk;

  task automatic write(input logic [7:0] a, input logic [31:0] d, input logic [1:0] s);
    @(negedge clk); we = 1; waddr = a; wdata = d; wstrb = s;
    @(negedge clk); we = 0;
    if (pwr) begin
      if (s[0]) model[a][15:0] = d[15:0];
      if (s[1]) model[a][31:16] = d[31:16];
    end
  endtask

  task automatic read_check(input logic [7:0] a);
    @(negedge clk); re = 1; raddr = a;
    @(negedge clk); re = 0;
    checks++;
    if (rdata !== (pwr ? model[a] : 32'h0)) begin
      failures++; $display("addr %0d got %h exp %h", a, rdata, model[a]);
    end
  endtask

  initial begin
    pwr = 0;
    repeat (2) @(negedge clk);
    pwr = 1;
    @(negedge clk);
    foreach (model[i]) model[i] = '0;
    for (int i = 0; i < 256; i++) write(8'(i), $urandom, 2'b11);
    for (int i = 0; i < 400; i++) begin
      if ($urandom % 2) write(8'($urandom), $urandom, 2'($urandom));
      else read_check(8'($urandom));
    end
    // silencing: without re the output keeps the last word
    read_check(8'd7);
    write(8'd7, 32'h0BADF00D, 2'b11);
    repeat (3) @(negedge clk);
    checks++;
    if (rdata !== model[7] && rdata === 32'h0BADF00D) begin failures++; $display("read not silenced"); end
    // power gating
    pwr = 0;
    @(negedge clk);
    read_check(8'd3);
    write(8'd3, 32'h12345678, 2'b11);
    pwr = 1;
    @(negedge clk);
    foreach (model[i]) model[i] = '0;
    for (int i = 0; i < 20; i++) read_check(8'($urandom));
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
