// tb_bpu_array: loads random 7x7 kernels (16 channels per tap) into the seven
// BPUs, streams seven random image rows with padding at both ends and checks
// every emitted 2D inner product against a direct 7x7 (or smaller, via the masks)
// correlation computed here. Then checks 2x2 max pooling. Also checks the
// latency: `valid` must follow the emitting shift by exactly ARR_LAT cycles, one
// result per cycle.
module tb_bpu_array;
  import chewbacca_pkg::*;
  localparam int IW = 12;
  logic clk = 0, rst_n = 0;
  logic img_clr = 0, img_shift = 0, img_valid = 0, wgt_shift = 0, emit = 0;
  logic [KMAX-1:0][CH-1:0] img_in = '0, wgt_in = '0;
  logic [KMAX-1:0] tap_mask = '0, row_en = '0;
  logic valid;
  logic [ARR_W-1:0] sum;
  logic [CH-1:0] pool;
  logic [CH-1:0] pix [KMAX][IW];
  logic [CH-1:0] w [KMAX][KMAX];     // [row][kernel column]
  int checks = 0, failures = 0;
  int exp_q[$];
  logic [CH-1:0] exp_pool_q[$];
  int emit_cyc[$];
  int cyc = 0;

  bpu_array dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic int popc(input logic [15:0] v);
    int n = 0;
    for (int i = 0; i < 16; i++) n += v[i];
    return n;
  endfunction

  always @(posedge clk) if (rst_n && valid) begin
    int e, c;
    e = exp_q.pop_front();
    c = emit_cyc.pop_front();
    checks++;
    if (int'(sum) != e) begin failures++; $display("sum %0d exp %0d", sum, e); end
    checks++;
    if (cyc - c != ARR_LAT) begin failures++; $display("latency %0d", cyc - c); end
    if (exp_pool_q.size() != 0) begin
      logic [CH-1:0] p;
      p = exp_pool_q.pop_front();
      checks++;
      if (pool !== p) begin failures++; $display("pool %h exp %h", pool, p); end
    end
  end

  task automatic run_conv(input int k, input logic [KMAX-1:0] ren);
    // weights: shift k columns then 3-k/2 fillers; BPU r gets w[r][kc]
    tap_mask = '0;
    for (int j = 0; j < KMAX; j++) tap_mask[j] = (j >= 3 - k/2) && (j <= 3 + k/2);
    row_en = ren;
    for (int s = 0; s < k + 3 - k/2; s++) begin
      @(negedge clk);
      wgt_shift = 1;
      for (int r = 0; r < KMAX; r++) wgt_in[r] = (s < k) ? w[r][s] : 16'hDEAD;
    end
    @(negedge clk); wgt_shift = 0; img_clr = 1;
    @(negedge clk); img_clr = 0;
    for (int t = 0; t < IW + 3; t++) begin
      @(negedge clk);
      img_shift = 1; img_valid = t < IW; emit = t >= 3;
      for (int r = 0; r < KMAX; r++) img_in[r] = (t < IW) ? pix[r][t] : 16'h0;
      if (t >= 3) begin
        int e = 0;
        int x = t - 3;
        for (int r = 0; r < KMAX; r++) if (ren[r])
          for (int kc = 0; kc < k; kc++) begin
            int xx = x + kc - k/2;
            if (xx >= 0 && xx < IW) e += popc(~(pix[r][xx] ^ w[r][kc]));
          end
        exp_q.push_back(e);
        emit_cyc.push_back(cyc + 1);
      end
    end
    @(negedge clk); img_shift = 0; emit = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    foreach (pix[r, x]) pix[r][x] = CH'($urandom);
    foreach (w[r, c]) w[r][c] = CH'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_conv(7, 7'h7F);
    run_conv(3, 7'b0011100);
    run_conv(5, 7'b0111110);
    run_conv(1, 7'b0001000);
    run_conv(7, 7'b1110000);   // image bottom: only some rows valid
    // 2x2 pooling over rows 0,1: window at CSR positions 0,1
    tap_mask = 7'b0000011; row_en = 7'b0000011;
    for (int t = 0; t < IW; t++) begin
      @(negedge clk);
      img_shift = 1; img_valid = 1; emit = (t % 2) == 1;
      for (int r = 0; r < KMAX; r++) img_in[r] = pix[r][t];
      if (t % 2 == 1) begin
        // the pool path ORs the 2x2 window; the sum path still adds xnor counts
        exp_pool_q.push_back(pix[0][t] | pix[0][t-1] | pix[1][t] | pix[1][t-1]);
        begin
          int s2;
          s2 = 0;
          for (int r = 0; r < 2; r++) for (int j = 0; j < 2; j++)
            s2 += popc(~(pix[r][t-j] ^ w_csr(r, j)));
          exp_q.push_back(s2);
        end
        emit_cyc.push_back(cyc + 1);
      end
    end
    @(negedge clk); img_shift = 0; emit = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weight held at CSR position j of BPU r after the last run_conv(7, ...)
  function automatic logic [CH-1:0] w_csr(input int r, input int j);
    return w[r][6 - j];
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
