// tb_xnor_sum: random activation/weight pairs against a bit-by-bit reference of
// the match count and the pooling term, with the lane enabled and disabled.
module tb_xnor_sum;
  import chewbacca_pkg::*;
  logic [CH-1:0] img, wgt, pool_n;
  logic en;
  logic [XS_W-1:0] cnt;
  int checks = 0, failures = 0;

  xnor_sum dut (.*);

  initial begin
    for (int it = 0; it < 500; it++) begin
      int exp_cnt;
      img = 16'($urandom); wgt = 16'($urandom); en = (it % 5) != 0;
      if (it == 1) begin img = 16'hA5A5; wgt = 16'hA5A5; end   // all 16 match
      if (it == 2) begin img = 16'h00FF; wgt = 16'hFF00; end   // none match
      #1;
      exp_cnt = 0;
      for (int i = 0; i < 16; i++) if (img[i] == wgt[i]) exp_cnt++;
      if (!en) exp_cnt = 0;
      checks++;
      if (int'(cnt) != exp_cnt) begin
        failures++; $display("cnt %0d exp %0d img %h wgt %h en %b", cnt, exp_cnt, img, wgt, en);
      end
      checks++;
      if (pool_n !== (en ? ~img : 16'hFFFF)) begin failures++; $display("pool_n wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
