// tb_chewbaccann: end-to-end test of the accelerator at its default size.
//
// A host model loads a four-layer binary network and its input through the I/O
// port, runs it in two parts and compares every feature map the layers leave in
// the feature map memory with a reference computed here from the same random
// inputs, independently of the RTL:
//   run A (parameter bank 0)  L0 conv 3x3, 10x9 pixels, 32 -> 32 channels
//                             L1 max pool 2x2 -> 5x4, 32 channels
//   run B (parameter bank 1, loaded while run A executes, then swapped in)
//                             L2 conv 7x7, 16 -> 16 channels, plus a residual map
//                                 (the partial sums L0 left in the same FMM block)
//                             L3 conv 1x1, 16 -> 16 channels
//   run C (parameter bank 1)  L3 again, with 2x2 average pooling of the partial
//                                 sums before binarization -> 2x2 pixels
// Mechanisms counted (each must occur): row-bank rotation (image taller than 7
// rows), accumulation over input chunks, several output tiles, residual add,
// binarization, max and average pooling, kernel sizes 1/3/7, source/sink swap, parameter buffer
// double buffering, access to a power-gated bank. Throughput: every conv row
// stream must deliver i_w results on consecutive cycles.
`timescale 1ns/1ps
module tb_chewbaccann;
  import chewbacca_pkg::*;

  localparam int unsigned NBANK = 73;

  logic clk = 0, rst_n = 0;
  logic req = 0, we = 0;
  logic [17:0] addr = '0;
  logic [31:0] wdata = '0;
  logic rvalid, busy, done;
  logic [31:0] rdata;
  logic [1:0][NBANK-1:0] fmm_pwr;

  int checks = 0, failures = 0;
  int cnt_rot = 0, cnt_acc = 0, cnt_tiles = 0, cnt_res = 0, cnt_bin = 0, cnt_pool = 0;
  int cnt_avg = 0;
  int cnt_k1 = 0, cnt_k3 = 0, cnt_k7 = 0, cnt_swap = 0, cnt_pbswap = 0, cnt_gated = 0;
  int run_len = 0, bad_runs = 0, runs = 0;

  chewbaccann dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- host bus
  task automatic wr(input logic [17:0] a, input logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic rd(input logic [17:0] a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = a;
    @(negedge clk); req = 0;
    d = rdata;
  endtask

  function automatic logic [17:0] fa(input int blk, input int w);
    return 18'((blk << 16) | w);
  endfunction

  localparam logic [17:0] PB  = 18'h20000;
  localparam logic [17:0] REG = 18'h30000;

  // ---------------------------------------------------------------- reference model
  function automatic int popc(input logic [15:0] v);
    int n = 0;
    for (int i = 0; i < 16; i++) n += v[i];
    return n;
  endfunction

  // fin: (ci*ih + y)*iw + x, wt: (((no*nci+ni)*kh + kr)*16 + b)*kw + kc
  // psum: (o*ih + y)*iw + x for o < 16*nco
  task automatic conv_ref(input int iw, ih, kw, kh, nci, nco,
                          ref logic [15:0] fin[], ref logic [15:0] wt[], ref int psum[]);
    psum = new[16*nco*ih*iw];
    for (int o = 0; o < 16*nco; o++)
      for (int y = 0; y < ih; y++)
        for (int x = 0; x < iw; x++) begin
          int s = 0;
          for (int ni = 0; ni < nci; ni++)
            for (int kr = 0; kr < kh; kr++)
              for (int kc = 0; kc < kw; kc++) begin
                int yy = y + kr - kh/2, xx = x + kc - kw/2;
                if (yy >= 0 && yy < ih && xx >= 0 && xx < iw)
                  s += popc(~(fin[(ni*ih + yy)*iw + xx] ^
                              wt[((((o/16)*nci + ni)*kh + kr)*16 + (o%16))*kw + kc]));
              end
          psum[(o*ih + y)*iw + x] = s;
        end
  endtask

  task automatic bin_ref(input int iw, ih, nco, ref int psum[], ref int thr[],
                         ref logic [15:0] fout[]);
    fout = new[nco*ih*iw];
    for (int no = 0; no < nco; no++)
      for (int y = 0; y < ih; y++)
        for (int x = 0; x < iw; x++) begin
          logic [15:0] v = '0;
          for (int b = 0; b < 16; b++)
            v[b] = (psum[((no*16 + b)*ih + y)*iw + x] >= thr[no*16 + b]);
          fout[(no*ih + y)*iw + x] = v;
        end
  endtask

  task automatic pool_ref(input int iw, ih, p, nc, ref logic [15:0] fin[],
                          ref logic [15:0] fout[]);
    int ow = iw / p, oh = ih / p;
    fout = new[nc*oh*ow];
    for (int c = 0; c < nc; c++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          logic [15:0] v = '0;
          for (int m = 0; m < p; m++)
            for (int n = 0; n < p; n++) v |= fin[(c*ih + y*p + m)*iw + x*p + n];
          fout[(c*oh + y)*ow + x] = v;
        end
  endtask

  // thresholds: the reference sum of one pixel per channel, so outputs are mixed
  // average pooling of the partial sums over p x p windows; thresholds are
  // already multiplied by p*p (mean >= t exactly when window sum >= p*p*t)
  task automatic avg_ref(input int iw, ih, p, nco, ref int psum[], ref int thr[],
                         ref logic [15:0] fout[]);
    int ow = iw / p, oh = ih / p;
    fout = new[nco*oh*ow];
    for (int no = 0; no < nco; no++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          logic [15:0] v = '0;
          for (int b = 0; b < 16; b++) begin
            int s = 0;
            for (int m = 0; m < p; m++)
              for (int n = 0; n < p; n++)
                s += psum[((no*16 + b)*ih + y*p + m)*iw + x*p + n];
            v[b] = (s >= thr[no*16 + b]);
          end
          fout[(no*oh + y)*ow + x] = v;
        end
  endtask

  task automatic pick_thr(input int iw, ih, nco, ref int psum[], ref int thr[]);
    thr = new[16*nco];
    for (int o = 0; o < 16*nco; o++)
      thr[o] = psum[(o*ih + (o % ih))*iw + ((3*o) % iw)];
  endtask

  // ---------------------------------------------------------------- loaders
  task automatic load_fm(input int blk, input int base, input int iw, ih, nc,
                         ref logic [15:0] fm[]);
    int rw = (iw + 1) / 2;
    for (int c = 0; c < nc; c++)
      for (int y = 0; y < ih; y++)
        for (int w = 0; w < rw; w++) begin
          logic [15:0] lo, hi;
          lo = fm[(c*ih + y)*iw + 2*w];
          hi = (2*w + 1 < iw) ? fm[(c*ih + y)*iw + 2*w + 1] : 16'h0;
          wr(fa(blk, base + (c*ih + y)*rw + w), {hi, lo});
        end
  endtask

  task automatic load_w(input int base, ref logic [15:0] wt[]);
    for (int i = 0; i < wt.size(); i += 2) wr(PB | 18'(base + i/2), {wt[i+1], wt[i]});
  endtask

  task automatic load_thr(input int base, ref int thr[]);
    for (int i = 0; i < thr.size(); i++) wr(PB | 18'(base + i), 32'(thr[i]));
  endtask

  task automatic load_desc(input int a, input layer_cfg_t c);
    wr(PB | 18'(a + 0), 32'(c.w0));
    wr(PB | 18'(a + 1), 32'(c.w1));
    wr(PB | 18'(a + 2), {c.out_base, c.in_base});
    wr(PB | 18'(a + 3), {c.res_base, c.psum_base});
    wr(PB | 18'(a + 4), 32'(c.thr_base));
  endtask

  task automatic check_fm(input string name, input int blk, input int base,
                          input int iw, ih, nc, ref logic [15:0] fm[]);
    int rw = (iw + 1) / 2;
    int bad = 0;
    for (int c = 0; c < nc; c++)
      for (int y = 0; y < ih; y++)
        for (int x = 0; x < iw; x++) begin
          logic [31:0] d;
          logic [15:0] got;
          rd(fa(blk, base + (c*ih + y)*rw + x/2), d);
          got = x[0] ? d[31:16] : d[15:0];
          checks++;
          if (got !== fm[(c*ih + y)*iw + x]) begin
            failures++;
            if (bad++ < 5)
              $display("%s mismatch c=%0d y=%0d x=%0d got %h exp %h", name, c, y, x, got,
                       fm[(c*ih + y)*iw + x]);
          end
        end
    $display("%s: %0d pixels checked, %0d wrong", name, nc*ih*iw, bad);
  endtask

  task automatic run_and_wait(input int desc, input int src);
    logic [31:0] d;
    wr(REG | 18'h1, 32'(desc));
    wr(REG | 18'h2, 32'(src));
    wr(REG | 18'h0, 32'h1);
  endtask

  task automatic wait_done();
    logic [31:0] d;
    do rd(REG | 18'h0, d); while (!d[1]);
  endtask

  // ---------------------------------------------------------------- monitors
  always @(posedge clk) if (rst_n) begin
    // result stream of the array: conv streams must be gap-free
    if (dut.u_arr.valid) run_len++;
    else if (run_len != 0) begin
      if (dut.u_sched.cfg.w0.op == OP_CONV) begin
        runs++;
        if (run_len != int'(dut.u_sched.cfg.w0.i_w)) bad_runs++;
      end
      run_len = 0;
    end
    if (dut.u_nmcu.s1.op == NM_ACC)      cnt_acc++;
    if (dut.u_nmcu.s1.op == NM_RES_ADD)  cnt_res++;
    if (dut.u_nmcu.s1.op == NM_BIN && dut.u_nmcu.s1.wlast) cnt_bin++;
    if (dut.u_nmcu.s1.op == NM_POOL)     cnt_pool++;
    if (dut.u_nmcu.s1.op == NM_AVG)      cnt_avg++;
    if (dut.dma_start && dut.dma_src == SRC_FMM && dut.u_sched.next_row >= 7) cnt_rot++;
    if (dut.u_sched.state == dut.u_sched.S_THR && dut.u_sched.thr_cnt == 0 && dut.u_sched.n_o != 0)
      cnt_tiles++;
    if (dut.img_shift && dut.u_sched.cfg.w0.op == OP_CONV) begin
      if (dut.u_sched.cfg.w0.k_w == 1) cnt_k1++;
      if (dut.u_sched.cfg.w0.k_w == 3) cnt_k3++;
      if (dut.u_sched.cfg.w0.k_w == 7) cnt_k7++;
    end
    if (dut.u_sched.state == dut.u_sched.S_NEXT_LAYER && !dut.u_sched.cfg.w0.last) cnt_swap++;
  end

  // ---------------------------------------------------------------- test
  logic [15:0] in0[], w0[], o0[], o1[], w2[], o2[], w3[], o3[], o4[];
  int p0[], p2[], p3[], t0[], t2[], t3[], t4[], res2[];
  layer_cfg_t c0, c1, c2, c3, c4;

  initial begin
    logic [31:0] d;
    int cyc0, cyc1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- stimulus and reference
    in0 = new[2*9*10];
    foreach (in0[i]) in0[i] = 16'($urandom);
    w0 = new[2*2*3*16*3];
    foreach (w0[i]) w0[i] = 16'($urandom);
    conv_ref(10, 9, 3, 3, 2, 2, in0, w0, p0);
    pick_thr(10, 9, 2, p0, t0);
    bin_ref(10, 9, 2, p0, t0, o0);
    pool_ref(10, 9, 2, 2, o0, o1);
    // L2 reads chunk 0 of L1's output; residual = L0's last-tile partial sums
    w2 = new[1*1*7*16*7];
    foreach (w2[i]) w2[i] = 16'($urandom);
    begin
      logic [15:0] in2[];
      in2 = new[20];
      foreach (in2[i]) in2[i] = o1[i];
      conv_ref(5, 4, 7, 7, 1, 1, in2, w2, p2);
    end
    res2 = new[320];
    foreach (res2[e]) begin
      res2[e] = p0[(16 + e/90)*90 + e%90];   // tile 1 of L0 (channels 16..31)
      p2[e] += res2[e];
    end
    pick_thr(5, 4, 1, p2, t2);
    bin_ref(5, 4, 1, p2, t2, o2);
    w3 = new[16];
    foreach (w3[i]) w3[i] = 16'($urandom);
    conv_ref(5, 4, 1, 1, 1, 1, o2, w3, p3);
    pick_thr(5, 4, 1, p3, t3);
    bin_ref(5, 4, 1, p3, t3, o3);
    t4 = new[16];
    foreach (t4[o]) begin   // a window sum of each channel, plus or minus 1
      t4[o] = int'($urandom_range(2)) - 1;
      for (int m = 0; m < 2; m++)
        for (int n = 0; n < 2; n++) t4[o] += p3[(o*4 + 2*(o % 2) + m)*5 + 2*((o/2) % 2) + n];
    end
    avg_ref(5, 4, 2, 1, p3, t4, o4);

    // ---- descriptors
    c0 = '0; c0.w0.op = OP_CONV; c0.w0.i_w = 10; c0.w0.i_h = 9; c0.w0.k_w = 3; c0.w0.k_h = 3;
    c0.w1.n_ci = 2; c0.w1.n_co = 2; c0.w1.wbase = 0; c0.thr_base = 290;
    c0.in_base = 16'h0000; c0.psum_base = 16'h0100; c0.out_base = 16'h0800;
    c1 = '0; c1.w0.op = OP_POOL; c1.w0.i_w = 10; c1.w0.i_h = 9; c1.w0.k_w = 2; c1.w0.k_h = 2;
    c1.w1.n_ci = 2; c1.in_base = 16'h0800; c1.out_base = 16'h0040; c1.w0.last = 1;
    c2 = '0; c2.w0.op = OP_CONV; c2.w0.i_w = 5; c2.w0.i_h = 4; c2.w0.k_w = 7; c2.w0.k_h = 7;
    c2.w0.res_en = 1; c2.w1.n_ci = 1; c2.w1.n_co = 1; c2.w1.wbase = 0; c2.thr_base = 400;
    c2.in_base = 16'h0040; c2.psum_base = 16'h0900; c2.res_base = 16'h0100;
    c2.out_base = 16'h0B00;
    c3 = '0; c3.w0.op = OP_CONV; c3.w0.i_w = 5; c3.w0.i_h = 4; c3.w0.k_w = 1; c3.w0.k_h = 1;
    c3.w1.n_ci = 1; c3.w1.n_co = 1; c3.w1.wbase = 392; c3.thr_base = 416;
    c3.in_base = 16'h0B00; c3.psum_base = 16'h0200; c3.out_base = 16'h0300; c3.w0.last = 1;
    c4 = c3; c4.w1.avg_s = 3'd2; c4.out_base = 16'h0380; c4.thr_base = 400;

    // ---- power gating: bank 72 of block 0 is switched off and loses its data
    wr(fa(0, 72*256 + 5), 32'hCAFE_F00D);
    rd(fa(0, 72*256 + 5), d);
    checks++; if (d !== 32'hCAFE_F00D) begin failures++; $display("bank write failed"); end
    wr(REG | 18'h12, 32'h0000_0000);    // block 0, banks 64..72 off
    wr(fa(0, 72*256 + 5), 32'h1234_5678);
    rd(fa(0, 72*256 + 5), d);
    checks++; if (d !== 32'h0) begin failures++; $display("gated bank returned %h", d); end
    else cnt_gated++;
    wr(REG | 18'h12, 32'hFFFF_FFFF);
    rd(fa(0, 72*256 + 5), d);
    checks++; if (d !== 32'h0) begin failures++; $display("bank kept data through gating"); end

    // ---- run A: after reset the core reads bank 0, so bank 1 is loaded and swapped in
    load_fm(0, 0, 10, 9, 2, in0);
    load_w(0, w0); load_thr(290, t0); load_desc(330, c0); load_desc(335, c1);
    wr(REG | 18'h0, 32'h2); cnt_pbswap++;
    cyc0 = $time;
    run_and_wait(330, 0);
    // while run A executes, load run B's parameters into the load bank (bank 1)
    load_w(0, w2); load_w(392, w3); load_thr(400, t2); load_thr(416, t3);
    load_desc(432, c2); load_desc(437, c3);
    rd(REG | 18'h0, d);
    checks++; if (!d[0]) begin failures++; $display("parameters not loaded during the run"); end
    wait_done();
    cyc1 = $time;
    $display("run A: %0d cycles", (cyc1 - cyc0) / 10);
    check_fm("L0 conv3x3", 1, 16'h0800, 10, 9, 2, o0);
    check_fm("L1 pool2x2", 0, 16'h0040, 5, 4, 2, o1);

    // ---- run B: bank 0, filled during run A, becomes the core bank
    wr(REG | 18'h0, 32'h2); cnt_pbswap++;
    rd(REG | 18'h0, d);
    checks++; if (d[2] !== 1'b0) begin failures++; $display("parameter bank swap failed"); end
    run_and_wait(432, 0);
    wait_done();
    check_fm("L2 conv7x7+res", 1, 16'h0B00, 5, 4, 1, o2);
    check_fm("L3 conv1x1", 0, 16'h0300, 5, 4, 1, o3);

    // ---- run C: L3 with average pooling, from the map L2 left in block 1
    load_w(392, w3); load_thr(400, t4); load_desc(432, c4);
    wr(REG | 18'h0, 32'h2); cnt_pbswap++;
    run_and_wait(432, 1);
    wait_done();
    check_fm("L3 conv1x1 + avg pool 2x2", 0, 16'h0380, 2, 2, 1, o4);

    // ---- mechanisms and rate
    $display("average pooling window reads %0d", cnt_avg);
    checks++; if (cnt_avg != 3*16*2*2) begin failures++; $display("average pooling missing"); end
    $display("rotation=%0d acc=%0d tiles=%0d res=%0d bin=%0d pool=%0d k1=%0d k3=%0d k7=%0d swap=%0d pbswap=%0d gated=%0d runs=%0d bad_runs=%0d",
             cnt_rot, cnt_acc, cnt_tiles, cnt_res, cnt_bin, cnt_pool, cnt_k1, cnt_k3, cnt_k7,
             cnt_swap, cnt_pbswap, cnt_gated, runs, bad_runs);
    checks++; if (cnt_rot == 0)    begin failures++; $display("no row bank rotation"); end
    checks++; if (cnt_acc == 0)    begin failures++; $display("no accumulation"); end
    checks++; if (cnt_tiles == 0)  begin failures++; $display("no second output tile"); end
    checks++; if (cnt_res != 320)  begin failures++; $display("residual adds %0d", cnt_res); end
    checks++; if (cnt_bin != 180 + 20 + 20 + 4) begin failures++; $display("packed words %0d", cnt_bin); end
    checks++; if (cnt_pool != 40)  begin failures++; $display("pooled words %0d", cnt_pool); end
    checks++; if (cnt_k1 == 0 || cnt_k3 == 0 || cnt_k7 == 0) begin failures++; $display("kernel size missing"); end
    checks++; if (cnt_swap != 2)   begin failures++; $display("block swaps %0d", cnt_swap); end
    checks++; if (cnt_pbswap == 0) begin failures++; $display("no PB swap"); end
    checks++; if (cnt_gated == 0)  begin failures++; $display("no gated access"); end
    // conv rows: L0 2 tiles x 2 chunks x 9 rows x 16 + L2 4 x 16 + L3 twice 4 x 16
    checks++; if (runs != 2*2*9*16 + 4*16 + 2*4*16 || bad_runs != 0) begin
      failures++; $display("conv result streams %0d, with gaps %0d", runs, bad_runs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
