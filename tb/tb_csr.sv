// tb_csr: random shift/clear/data sequence against a queue model of the
// controlled shift register (newest word at position 0).
module tb_csr;
  localparam int W = 16, D = 7;
  logic clk = 0, rst_n = 0, clr = 0, shift = 0, din_valid = 0;
  logic [W-1:0] din = '0;
  logic [D-1:0][W-1:0] q;
  logic [D-1:0] v;
  logic [W-1:0] mq [D];
  logic mv [D];
  int checks = 0, failures = 0;

  csr #(.W(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    foreach (mq[i]) begin mq[i] = '0; mv[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      clr = ($urandom % 20) == 0; shift = $urandom % 2; din = W'($urandom);
      din_valid = $urandom % 2;
      @(posedge clk); #1;
      if (clr) foreach (mv[i]) mv[i] = 0;
      else if (shift) begin
        for (int i = D-1; i > 0; i--) begin mq[i] = mq[i-1]; mv[i] = mv[i-1]; end
        mq[0] = din; mv[0] = din_valid;
      end
      for (int i = 0; i < D; i++) begin
        checks++;
        if (v[i] !== mv[i] || (mv[i] && q[i] !== mq[i])) begin
          failures++; $display("pos %0d q %h/%b exp %h/%b", i, q[i], v[i], mq[i], mv[i]);
        end
      end
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
