// tb_scheduler: runs the controller alone against a parameter buffer model holding
// two layer descriptors (a 3x3 convolution with 2 input chunks, 2 output tiles and
// a residual, then a 2x2 pooling layer) and a DMA model that stays busy for len+1
// cycles. The monitors check every DMA command (source, address, bank, length and
// order), the threshold loads, that each NMCU command arrives ARR_LAT cycles after
// its emit strobe, that accumulation, residual, binarization and pooling commands
// cover each partial-sum element (a 16-bit half word) exactly the expected number
// of times, the crossbar rotation
// pattern, the source/sink swap between layers and the single done pulse.
module tb_scheduler;
  import chewbacca_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, src_init = 1;
  logic [PB_AW-1:0] desc_base = 9'd400;
  logic busy, done, src_sel, pb_re;
  logic [PB_AW-1:0] pb_raddr;
  logic [WORD_W-1:0] pb_rdata;
  logic dma_start, dma_busy;
  dma_src_e dma_src;
  logic [FMM_AW-1:0] dma_saddr;
  logic [2:0] dma_bank;
  logic [BANK_AW-1:0] dma_daddr;
  logic [7:0] dma_len;
  logic rb_re, xb_half, img_clr, img_shift, img_valid, wgt_shift, emit;
  logic [BANK_AW-1:0] rb_raddr;
  logic [KMAX-1:0][2:0] xb_sel;
  logic [KMAX-1:0] tap_mask, row_en;
  nm_cmd_t nm_cmd;
  logic thr_we;
  logic [3:0] thr_idx;
  logic [PSUM_W-1:0] thr_data;

  scheduler dut (.*);
  always #5 clk = ~clk;

  // layer 0: conv 3x3, 5 x 6, 2 input chunks, 2 output tiles, residual
  localparam int IH = 5, IW = 6, RW = 3, NCI = 2, NCO = 2, K = 3;
  localparam int IN0 = 16'h0100, OUT0 = 16'h0400, RES0 = 16'h0800, PS0 = 16'h2000;
  localparam int WB0 = 0, THR0 = 300;
  // layer 1: pool 2x2, 4 x 6, 2 channel chunks
  localparam int PH = 4, PW = 6, PK = 2, PNC = 2, POH = 2, POW = 3, PORW = 2;
  localparam int IN1 = 16'h0400, OUT1 = 16'h0040;

  logic [31:0] pb [PB_WORDS];
  int checks = 0, failures = 0;
  int dma_left = 0;
  int wl_i = 0, row_i = 0, thr_i = 0, n_done = 0, layer = 0;
  int n_emit = 0, n_aligned = 0, n_rot_bad = 0;
  logic [ARR_LAT:0] emit_hist = '0;
  int cnt_init [int], cnt_acc [int], cnt_resl [int], cnt_resa [int], cnt_binw [int], cnt_pool [int];
  int cnt_binr [int];
  int n_bin = 0;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("%t %s", $time, s);
  endtask

  always @(posedge clk) if (pb_re) pb_rdata <= pb[pb_raddr];

  // DMA model
  always @(posedge clk) begin
    if (dma_start) begin
      if (dma_left != 0) fail("DMA started while busy");
      dma_left <= int'(dma_len) + 1;
    end else if (dma_left != 0) dma_left <= dma_left - 1;
  end
  assign dma_busy = (dma_left != 0);

  always @(posedge clk) if (rst_n) begin
    int no, ni, kr, r, rkey, wkey;
    // partial sums are 16-bit halves: element key = 2*word + half
    rkey = 2 * int'(nm_cmd.raddr) + int'(nm_cmd.rhalf);
    wkey = 2 * int'(nm_cmd.waddr) + int'(nm_cmd.whalf);
    // ---------------- DMA commands, in schedule order
    if (dma_start) begin
      checks++;
      if (layer == 0 && dma_src == SRC_PB) begin
        // weights: for n_o, n_i: kernel rows 0..2
        no = wl_i / (NCI * K); ni = (wl_i / K) % NCI; kr = wl_i % K;
        if (int'(dma_saddr) != WB0 + ((no * NCI + ni) * K + kr) * 8 * K || int'(dma_bank) != kr + 2
            || int'(dma_daddr) != RB_WREG || int'(dma_len) != 8 * K)
          fail($sformatf("weight DMA %0d: saddr %0d bank %0d len %0d", wl_i, dma_saddr, dma_bank, dma_len));
        wl_i++;
      end else if (layer == 0) begin
        // rows: for n_o, n_i: rows 0..IH-1
        ni = (row_i / IH) % NCI; r = row_i % IH;
        if (int'(dma_saddr) != IN0 + (ni * IH + r) * RW || int'(dma_bank) != r % 7
            || dma_daddr != 0 || int'(dma_len) != RW || wl_i != (row_i / IH) * K + K)
          fail($sformatf("row DMA %0d: saddr %h bank %0d len %0d", row_i, dma_saddr, dma_bank, dma_len));
        row_i++;
      end else begin
        ni = row_i / PH; r = row_i % PH;
        if (dma_src != SRC_FMM || int'(dma_saddr) != IN1 + (ni * PH + r) * 3
            || int'(dma_bank) != r % 7 || int'(dma_len) != 3)
          fail($sformatf("pool row DMA %0d: saddr %h bank %0d len %0d", row_i, dma_saddr, dma_bank, dma_len));
        row_i++;
      end
    end
    // ---------------- thresholds
    if (thr_we) begin
      checks++;
      if (int'(thr_idx) != thr_i % 16 || thr_data !== pb[THR0 + thr_i][15:0])
        fail($sformatf("threshold %0d: idx %0d data %h", thr_i, thr_idx, thr_data));
      thr_i++;
    end
    // ---------------- emit / command alignment and crossbar rotation
    emit_hist <= {emit_hist[ARR_LAT-1:0], emit};
    if (emit) begin
      n_emit++;
      for (int i = 1; i < KMAX; i++)
        if (int'(xb_sel[i]) != (int'(xb_sel[0]) + i) % KMAX) n_rot_bad++;
    end
    if (nm_cmd.op inside {NM_ACC_INIT, NM_ACC, NM_POOL}) begin
      checks++;
      if (!emit_hist[ARR_LAT-1]) fail("array command without emit ARR_LAT cycles before");
      else n_aligned++;
    end
    unique case (nm_cmd.op)
      NM_ACC_INIT: cnt_init[wkey] = cnt_init[wkey] + 1;
      NM_ACC: begin
        if (rkey != wkey) fail("ACC reads another element than it writes");
        cnt_acc[wkey] = cnt_acc[wkey] + 1;
      end
      NM_RES_LOAD: cnt_resl[rkey] = cnt_resl[rkey] + 1;
      NM_RES_ADD: begin
        if (rkey != wkey) fail("RES_ADD reads another element than it writes");
        cnt_resa[wkey] = cnt_resa[wkey] + 1;
      end
      NM_BIN: begin
        n_bin++;
        cnt_binr[rkey] = cnt_binr[rkey] + 1;
        if (nm_cmd.wlast) cnt_binw[2 * int'(nm_cmd.waddr) + int'(nm_cmd.whalf)] =
                          cnt_binw[2 * int'(nm_cmd.waddr) + int'(nm_cmd.whalf)] + 1;
      end
      NM_POOL: cnt_pool[2 * int'(nm_cmd.waddr) + int'(nm_cmd.whalf)] =
               cnt_pool[2 * int'(nm_cmd.waddr) + int'(nm_cmd.whalf)] + 1;
      default: ;
    endcase
    // ---------------- layer tracking via the source/sink swap
    if (layer == 0 && busy && src_sel != src_init) begin
      layer <= 1;
      checks++;
      if (row_i != NCO * NCI * IH) fail($sformatf("%0d conv row DMAs", row_i));
      row_i = 0;
    end
    if (done) n_done++;
  end

  task automatic expect_map(input string what, ref int m [int], input int base, input int n,
                            input int times);
    checks++;
    if (m.num() != n) fail($sformatf("%s: %0d addresses, expected %0d", what, m.num(), n));
    for (int a = base; a < base + n; a++) begin
      checks++;
      if (!m.exists(a) || m[a] != times) begin
        fail($sformatf("%s: address %h hit %0d times", what, a, m.exists(a) ? m[a] : 0));
        break;
      end
    end
  endtask

  initial begin
    desc_w0_t w0;
    desc_w1_t w1;
    int k;
    for (int i = 0; i < PB_WORDS; i++) pb[i] = $urandom;
    w0 = '0; w0.res_en = 1; w0.op = OP_CONV; w0.k_h = K; w0.k_w = K; w0.i_h = IH; w0.i_w = IW;
    w1 = '0; w1.wbase = WB0; w1.n_co = NCO; w1.n_ci = NCI;
    pb[400] = w0; pb[401] = w1; pb[402] = {16'(OUT0), 16'(IN0)}; pb[403] = {16'(RES0), 16'(PS0)};
    pb[404] = THR0;
    w0 = '0; w0.last = 1; w0.op = OP_POOL; w0.k_h = PK; w0.k_w = PK; w0.i_h = PH; w0.i_w = PW;
    w1 = '0; w1.n_co = PNC; w1.n_ci = PNC;
    pb[405] = w0; pb[406] = w1; pb[407] = {16'(OUT1), 16'(IN1)}; pb[408] = 0; pb[409] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!busy) fail("not busy after start");
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++; if (n_done != 1) fail("done pulses");
    checks++; if (busy) fail("busy after done");
    checks++; if (layer != 1) fail("no source/sink swap");
    checks++; if (wl_i != NCO * NCI * K) fail($sformatf("%0d weight DMAs", wl_i));
    checks++; if (row_i != PNC * PH) fail($sformatf("%0d pool row DMAs", row_i));
    checks++; if (thr_i != 16 * NCO) fail($sformatf("%0d threshold loads", thr_i));
    checks++; if (n_rot_bad != 0) fail($sformatf("%0d crossbar selects off the rotation", n_rot_bad));
    checks++; if (n_emit != n_aligned) fail($sformatf("%0d emits, %0d commands", n_emit, n_aligned));
    checks++; if (n_bin != 16 * IH * IW * NCO) fail($sformatf("%0d BIN commands", n_bin));
    expect_map("ACC_INIT", cnt_init, 2 * PS0, 16 * IH * IW, NCO);
    expect_map("ACC", cnt_acc, 2 * PS0, 16 * IH * IW, NCO * (NCI - 1));
    expect_map("RES_LOAD", cnt_resl, 2 * RES0, 16 * IH * IW * NCO, 1);
    expect_map("RES_ADD", cnt_resa, 2 * PS0, 16 * IH * IW, NCO);
    expect_map("BIN read", cnt_binr, 2 * PS0, 16 * IH * IW, NCO);
    expect_map("BIN write", cnt_binw, 2 * OUT0, 2 * NCO * IH * RW, 1);
    checks++;
    if (cnt_pool.num() != PNC * POH * POW) fail($sformatf("%0d POOL targets", cnt_pool.num()));
    for (int c = 0; c < PNC; c++)
      for (int y = 0; y < POH; y++)
        for (int x = 0; x < POW; x++) begin
          k = 2 * (OUT1 + (c * POH + y) * PORW + x / 2) + x % 2;
          checks++;
          if (!cnt_pool.exists(k) || cnt_pool[k] != 1) fail($sformatf("POOL target %0d,%0d,%0d", c, y, x));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
