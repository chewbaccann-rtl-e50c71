// tb_workload_cifar: a CIFAR-10-sized stage of a binary network at the default size
// of the accelerator, run through the host port as a host would run it.
//
//   conv 3x3, 32x32 pixels, 64 -> 64 channels   4 runs, one per 16-channel output
//                                                tile; the next tile's weights are
//                                                loaded into the idle parameter bank
//                                                while the current tile runs
//   max pool 2x2 -> 16x16, 64 channels           1 run
//   conv 1x1, 16x16, 64 -> 64 channels           1 run, 4 input chunks x 4 tiles
//   conv 5x5, 16x16, 32 -> 16 channels           1 run (first two chunks of the pool
//                                                output; 400 weight words)
//   conv 5x5 as above with 2x2 average pooling   1 run, 16x16 -> 8x8 before binarization
//   conv 3x3, 16x16, 128 -> 16 channels          2 runs of 4 input chunks: the first
//                                                leaves its partial sums (no_bin), the
//                                                second adds onto them (acc_in) and
//                                                binarizes; its weights are loaded
//                                                while the first part runs
//
// One tile of the 32x32 layer needs 16 x 32 x 32 / 2 = 8,192 partial-sum words
// (two 16-bit sums per word) plus the 2,048-word output map in the 18,688-word sink
// block; its 4 x 72 weight words fit a parameter bank, the whole layer's 1,152 do
// not, hence one run per output tile. The 128-channel layer needs 8 x 72 weight
// words per tile, more than a bank holds, hence the split by input chunks. Every output map
// is compared with a reference computed here. Also checked: each run delivers one
// result per cycle within a row stream, and the cycle count of each run.
`timescale 1ns/1ps
module tb_workload_cifar;
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
  int run_len = 0, bad_runs = 0, runs = 0;

  chewbaccann dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
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

  // average pooling of the partial sums over p x p windows, then thresholds that
  // are already multiplied by p*p (mean >= t exactly when window sum >= p*p*t)
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

  // thresholds: the reference sum of one pixel per channel, so outputs are mixed
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

  // conv result streams must be gap-free: i_w results on consecutive cycles
  always @(posedge clk) if (rst_n) begin
    if (dut.u_arr.valid) run_len++;
    else if (run_len != 0) begin
      if (dut.u_sched.cfg.w0.op == OP_CONV) begin
        runs++;
        if (run_len != int'(dut.u_sched.cfg.w0.i_w)) bad_runs++;
      end
      run_len = 0;
    end
  end

  logic [15:0] in0[], w0[], wt[], o0[], o1[], w2[], o2[], w3[], i3[], o3[], i4[], w4[], o4[];
  int p0[], p2[], p3[], p4[], t0[], t2[], t3[], t4[], tt[], ta[];
  logic [15:0] oa[];
  int avg_cmds = 0;

  always @(posedge clk) if (rst_n && dut.u_nmcu.cmd.op == NM_AVG) avg_cmds++;
  layer_cfg_t c;

  // weights and thresholds of output tile t of layer 0, rebased for a 1-tile run
  task automatic tile_params(input int t);
    wt = new[4*3*16*3];
    foreach (wt[i]) wt[i] = w0[t*(4*3*16*3) + i];
    tt = new[16];
    foreach (tt[i]) tt[i] = t0[16*t + i];
  endtask

  initial begin
    logic [31:0] d;
    int cyc0, cyc1, bank;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    in0 = new[4*32*32];
    foreach (in0[i]) in0[i] = 16'($urandom);
    w0 = new[4*4*3*16*3];
    foreach (w0[i]) w0[i] = 16'($urandom);
    conv_ref(32, 32, 3, 3, 4, 4, in0, w0, p0);
    pick_thr(32, 32, 4, p0, t0);
    bin_ref(32, 32, 4, p0, t0, o0);
    pool_ref(32, 32, 2, 4, o0, o1);
    w2 = new[4*4*1*16*1];
    foreach (w2[i]) w2[i] = 16'($urandom);
    conv_ref(16, 16, 1, 1, 4, 4, o1, w2, p2);
    pick_thr(16, 16, 4, p2, t2);
    bin_ref(16, 16, 4, p2, t2, o2);
    i3 = new[2*16*16];
    foreach (i3[i]) i3[i] = o1[i];
    w3 = new[2*5*16*5];
    foreach (w3[i]) w3[i] = 16'($urandom);
    conv_ref(16, 16, 5, 5, 2, 1, i3, w3, p3);
    pick_thr(16, 16, 1, p3, t3);
    bin_ref(16, 16, 1, p3, t3, o3);
    ta = new[16];
    foreach (ta[o]) begin   // window sum at a pixel of each channel, plus or minus 1
      ta[o] = 0;
      for (int m = 0; m < 2; m++)
        for (int n = 0; n < 2; n++)
          ta[o] += p3[(o*16 + 2*(o % 8) + m)*16 + 2*((3*o) % 8) + n];
      ta[o] += int'($urandom_range(2)) - 1;
    end
    avg_ref(16, 16, 2, 1, p3, ta, oa);
    i4 = new[8*16*16];
    foreach (i4[i]) i4[i] = 16'($urandom);
    w4 = new[8*3*16*3];
    foreach (w4[i]) w4[i] = 16'($urandom);
    conv_ref(16, 16, 3, 3, 8, 1, i4, w4, p4);
    pick_thr(16, 16, 1, p4, t4);
    bin_ref(16, 16, 1, p4, t4, o4);

    load_fm(0, 0, 32, 32, 4, in0);

    // ---- layer 0, one run per output tile
    tile_params(0);
    load_w(0, wt); load_thr(300, tt);
    for (int t = 0; t < 4; t++) begin
      c = '0; c.w0.op = OP_CONV; c.w0.i_w = 32; c.w0.i_h = 32; c.w0.k_w = 3; c.w0.k_h = 3;
      c.w0.last = 1; c.w1.n_ci = 4; c.w1.n_co = 1; c.w1.wbase = 0; c.thr_base = 300;
      c.in_base = 16'h0000; c.psum_base = 16'h0000; c.out_base = 16'(16'h4000 + 512*t);
      load_desc(400, c);
      wr(REG | 18'h0, 32'h2);                  // swap: this tile's bank to the core
      cyc0 = $time;
      run_and_wait(400, 0);
      if (t < 3) begin                         // next tile into the idle bank
        tile_params(t + 1);
        load_w(0, wt); load_thr(300, tt);
        rd(REG | 18'h0, d);
        checks++;
        if (!d[0]) begin failures++; $display("tile %0d finished before the next load", t); end
      end
      wait_done();
      cyc1 = $time;
      $display("layer 0 tile %0d: %0d cycles", t, (cyc1 - cyc0) / 10);
    end
    check_fm("conv3x3 32x32 64->64", 1, 16'h4000, 32, 32, 4, o0);

    // ---- pooling
    c = '0; c.w0.op = OP_POOL; c.w0.i_w = 32; c.w0.i_h = 32; c.w0.k_w = 2; c.w0.k_h = 2;
    c.w0.last = 1; c.w1.n_ci = 4; c.in_base = 16'h4000; c.out_base = 16'h1000;
    load_desc(400, c);
    wr(REG | 18'h0, 32'h2);
    run_and_wait(400, 1);
    wait_done();
    check_fm("pool2x2 -> 16x16", 0, 16'h1000, 16, 16, 4, o1);

    // ---- 1x1 conv, 4 chunks x 4 tiles in one run
    load_w(0, w2); load_thr(300, t2);
    c = '0; c.w0.op = OP_CONV; c.w0.i_w = 16; c.w0.i_h = 16; c.w0.k_w = 1; c.w0.k_h = 1;
    c.w0.last = 1; c.w1.n_ci = 4; c.w1.n_co = 4; c.w1.wbase = 0; c.thr_base = 300;
    c.in_base = 16'h1000; c.psum_base = 16'h0000; c.out_base = 16'h2000;
    load_desc(400, c);
    wr(REG | 18'h0, 32'h2);
    cyc0 = $time;
    run_and_wait(400, 0);
    wait_done();
    cyc1 = $time;
    $display("conv1x1: %0d cycles", (cyc1 - cyc0) / 10);
    check_fm("conv1x1 16x16 64->64", 1, 16'h2000, 16, 16, 4, o2);

    // ---- 5x5 conv on the pooled map
    load_w(0, w3); load_thr(400, t3);
    c = '0; c.w0.op = OP_CONV; c.w0.i_w = 16; c.w0.i_h = 16; c.w0.k_w = 5; c.w0.k_h = 5;
    c.w0.last = 1; c.w1.n_ci = 2; c.w1.n_co = 1; c.w1.wbase = 0; c.thr_base = 400;
    c.in_base = 16'h1000; c.psum_base = 16'h0000; c.out_base = 16'h3000;
    load_desc(420, c);
    wr(REG | 18'h0, 32'h2);
    run_and_wait(420, 0);
    wait_done();
    check_fm("conv5x5 16x16 32->16", 1, 16'h3000, 16, 16, 1, o3);

    // ---- the same 5x5 conv with 2x2 average pooling before binarization
    load_w(0, w3); load_thr(400, ta);
    c.w1.avg_s = 3'd2; c.out_base = 16'h3400;
    load_desc(420, c);
    wr(REG | 18'h0, 32'h2);
    run_and_wait(420, 0);
    wait_done();
    check_fm("conv5x5 16x16 32->16, 2x2 average pooling", 1, 16'h3400, 8, 8, 1, oa);
    checks++;
    if (avg_cmds != 3 * 16 * 8 * 8) begin
      failures++; $display("average pooling commands: %0d", avg_cmds);
    end

    // ---- 3x3 conv, 128 input channels, split over two runs by input chunks
    load_fm(0, 16'h1000, 16, 16, 8, i4);
    wt = new[4*3*16*3];
    foreach (wt[i]) wt[i] = w4[i];
    load_w(0, wt);
    c = '0; c.w0.op = OP_CONV; c.w0.i_w = 16; c.w0.i_h = 16; c.w0.k_w = 3; c.w0.k_h = 3;
    c.w0.last = 1; c.w0.no_bin = 1; c.w1.n_ci = 4; c.w1.n_co = 1; c.w1.wbase = 0;
    c.in_base = 16'h1000; c.psum_base = 16'h0000; c.out_base = 16'h3800;
    load_desc(420, c);
    wr(fa(1, 16'h3800), 32'hA5A5_5A5A);      // sentinel in the output map
    wr(REG | 18'h0, 32'h2);
    run_and_wait(420, 0);
    foreach (wt[i]) wt[i] = w4[4*3*16*3 + i];   // second half of the chunks
    load_w(0, wt); load_thr(300, t4);
    c.w0.no_bin = 0; c.w0.acc_in = 1; c.thr_base = 300; c.in_base = 16'h1200;
    load_desc(420, c);
    rd(REG | 18'h0, d);
    checks++;
    if (!d[0]) begin failures++; $display("first part finished before the second was loaded"); end
    wait_done();
    checks++;
    rd(fa(1, 16'h3800), d);
    if (d !== 32'hA5A5_5A5A) begin
      // the first part must not have written an output (no binarization)
      failures++; $display("no_bin run wrote the output map: %h", d);
    end
    wr(REG | 18'h0, 32'h2);
    run_and_wait(420, 0);
    wait_done();
    check_fm("conv3x3 16x16 128->16 in two runs", 1, 16'h3800, 16, 16, 1, o4);

    checks++;
    if (runs != 4*4*32*16 + 4*4*16*16 + 2*2*16*16 + 8*16*16 || bad_runs != 0) begin
      failures++; $display("conv result streams %0d, with gaps %0d", runs, bad_runs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
