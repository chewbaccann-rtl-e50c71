// tb_crossbar: random bank words, selections and half selects; every BPU must get
// the selected half of its selected bank (image) and of its own bank (weights).
module tb_crossbar;
  import chewbacca_pkg::*;
  logic [KMAX-1:0][WORD_W-1:0] bank_data;
  logic [KMAX-1:0][2:0] sel;
  logic half;
  logic [KMAX-1:0][CH-1:0] img, wgt;
  int checks = 0, failures = 0;

  crossbar dut (.*);

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int k = 0; k < KMAX; k++) begin
        bank_data[k] = $urandom;
        sel[k] = 3'((k + it) % KMAX);
        if (it % 3 == 0) sel[k] = 3'($urandom % KMAX);
      end
      half = $urandom % 2;
      #1;
      for (int r = 0; r < KMAX; r++) begin
        logic [31:0] w, ww;
        w  = bank_data[sel[r]];
        ww = bank_data[r];
        checks += 2;
        if (img[r] !== (half ? w[31:16] : w[15:0])) begin failures++; $display("img %0d", r); end
        if (wgt[r] !== (half ? ww[31:16] : ww[15:0])) begin failures++; $display("wgt %0d", r); end
      end
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
