// tb_bpu: streams random activations and weights through one BPU with random tap
// masks and padding tags, and checks the registered row inner product and
// pooling term one cycle after each window, against shadow copies of the two
// shift registers kept in the testbench.
module tb_bpu;
  import chewbacca_pkg::*;
  logic clk = 0, rst_n = 0;
  logic img_clr = 0, img_shift = 0, img_valid = 0, wgt_shift = 0;
  logic [CH-1:0] img_in = '0, wgt_in = '0;
  logic [KMAX-1:0] tap_mask = '0;
  logic [BPU_W-1:0] sum_q;
  logic [CH-1:0] pool_n_q;
  logic [CH-1:0] si [KMAX], sw [KMAX];
  logic sv [KMAX];
  int checks = 0, failures = 0;

  bpu dut (.*);
  always #5 clk = ~clk;

  initial begin
    foreach (si[i]) begin si[i] = '0; sw[i] = '0; sv[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      int es; logic [CH-1:0] ep;
      @(negedge clk);
      img_shift = $urandom % 4 != 0; wgt_shift = $urandom % 3 == 0;
      img_in = CH'($urandom); wgt_in = CH'($urandom); img_valid = $urandom % 8 != 0;
      tap_mask = KMAX'($urandom);
      img_clr = 0;
      @(posedge clk);
      if (img_shift) begin
        for (int i = KMAX-1; i > 0; i--) begin si[i] = si[i-1]; sv[i] = sv[i-1]; end
        si[0] = img_in; sv[0] = img_valid;
      end
      if (wgt_shift) begin
        for (int i = KMAX-1; i > 0; i--) sw[i] = sw[i-1];
        sw[0] = wgt_in;
      end
      // result of the new window is registered on the next edge
      @(negedge clk);
      img_shift = 0; wgt_shift = 0;
      @(posedge clk); #1;
      es = 0; ep = '1;
      for (int j = 0; j < KMAX; j++)
        if (tap_mask[j] && sv[j]) begin
          for (int b = 0; b < CH; b++) es += (si[j][b] == sw[j][b]);
          ep &= ~si[j];
        end
      checks++;
      if (int'(sum_q) != es) begin failures++; $display("sum %0d exp %0d", sum_q, es); end
      checks++;
      if (pool_n_q !== ep) begin failures++; $display("pool %h exp %h", pool_n_q, ep); end
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
