// tb_nmcu: random command streams against a word memory model with one-cycle read
// latency. A reference model applies every command in issue order (the stream
// never reads an address written by the directly preceding command, as in the
// scheduler's streams) and the memory contents are compared after each stream.
// Partial sums are 16-bit halves of memory words: element e lives in word e/2,
// half e%2, and commands on the two halves of one word follow each other directly.
// Covers ACC_INIT, ACC, RES_LOAD/RES_ADD, BIN with packing into either half,
// POOL, and AVG window sums of 2x2 to 4x4 partial sums followed by a BIN that
// compares the window sum.
module tb_nmcu;
  import chewbacca_pkg::*;
  localparam int MW = 64;
  logic clk = 0, rst_n = 0;
  nm_cmd_t cmd;
  logic [ARR_W-1:0] bpu_sum = '0;
  logic [CH-1:0] bpu_pool = '0;
  logic thr_we = 0;
  logic [3:0] thr_idx = '0;
  logic [PSUM_W-1:0] thr_data = '0;
  logic mem_re, mem_we;
  logic [FMM_AW-1:0] mem_raddr, mem_waddr;
  logic [WORD_W-1:0] mem_rdata, mem_wdata;
  logic [1:0] mem_wstrb;
  logic [31:0] mem [MW];
  logic [31:0] ref_mem [MW];
  logic signed [15:0] ref_thr [16];
  logic signed [15:0] ref_res;
  logic [15:0] ref_pack;
  int checks = 0, failures = 0;
  int n_init = 0, n_acc = 0, n_res = 0, n_bin = 0, n_pool = 0;

  nmcu dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (mem_re) mem_rdata <= mem[mem_raddr[5:0]];
    if (mem_we) begin
      if (mem_wstrb[0]) mem[mem_waddr[5:0]][15:0]  <= mem_wdata[15:0];
      if (mem_wstrb[1]) mem[mem_waddr[5:0]][31:16] <= mem_wdata[31:16];
    end
  end

  function automatic logic [31:0] sx(input logic [15:0] v);
    return {{16{v[15]}}, v};
  endfunction

  // one command in the cycle starting at the current negedge
  logic ae = 1'b0;            // acc_en of the next command
  int   ref_wsum = 0, n_avg = 0;

  task automatic wr16(input int wa, input logic half, input logic [15:0] v);
    if (half) ref_mem[wa][31:16] = v; else ref_mem[wa][15:0] = v;
  endtask

  // ra/rh: word and half read, wa/half: word and half written
  task automatic issue(input nm_op_e op, input int ra, input logic rh, input int wa,
                       input logic half, input int ch, input logic wl, input int sum,
                       input logic [15:0] pool);
    logic signed [15:0] p;
    logic b;
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.raddr = 16'(ra); cmd.rhalf = rh; cmd.waddr = 16'(wa);
    cmd.whalf = half; cmd.ch = 4'(ch); cmd.wlast = wl; cmd.acc_en = ae; bpu_sum = ARR_W'(sum); bpu_pool = pool;
    p = rh ? ref_mem[ra][31:16] : ref_mem[ra][15:0];
    unique case (op)
      NM_ACC_INIT: begin wr16(wa, half, 16'(sum)); n_init++; end
      NM_ACC:      begin wr16(wa, half, p + 16'(sum)); n_acc++; end
      NM_RES_LOAD: ref_res = p;
      NM_RES_ADD:  begin wr16(wa, half, p + ref_res); n_res++; end
      NM_BIN: begin
        b = (int'(p) + (ae ? ref_wsum : 0) >= int'(ref_thr[ch]));
        ref_pack = {b, ref_pack[15:1]};
        if (wl) wr16(wa, half, ref_pack);
        n_bin++;
      end
      NM_AVG: begin
        ref_wsum = (ae ? ref_wsum : 0) + int'(p);
        n_avg++;
      end
      NM_POOL: begin
        wr16(wa, half, pool);
        n_pool++;
      end
      default: ;
    endcase
  endtask

  task automatic idle(input int n);
    repeat (n) begin @(negedge clk); cmd = '0; end
  endtask

  task automatic compare(input string what);
    idle(3);
    for (int a = 0; a < MW; a++) begin
      checks++;
      if (mem[a] !== ref_mem[a]) begin
        failures++;
        $display("%s: word %0d got %h exp %h", what, a, mem[a], ref_mem[a]);
      end
    end
  endtask

  initial begin
    cmd = '0;
    ref_res = 0; ref_pack = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < MW; a++) begin
      mem[a] = {16'($urandom % 400) - 16'd200, 16'($urandom % 400) - 16'd200};
      ref_mem[a] = mem[a];
    end
    for (int c = 0; c < 16; c++) begin
      @(negedge clk);
      thr_we = 1; thr_idx = 4'(c); thr_data = 16'($signed(int'($urandom % 300) - 150));
      ref_thr[c] = $signed(thr_data);
    end
    @(negedge clk); thr_we = 0;
    for (int round = 0; round < 20; round++) begin
      // accumulate: ACC_INIT then n_ci-1 ACC passes over 16 elements (words 0..7)
      for (int e = 0; e < 16; e++) issue(NM_ACC_INIT, 0, 0, e/2, 1'(e%2), 0, 0, $urandom % 784, '0);
      for (int pass = 0; pass < 3; pass++)
        for (int e = 0; e < 16; e++)
          issue(NM_ACC, e/2, 1'(e%2), e/2, 1'(e%2), 0, 0, $urandom % 784, '0);
      compare("acc");
      // residual: elements 32..47 (words 16..23) into elements 0..15
      for (int e = 0; e < 16; e++) begin
        issue(NM_RES_LOAD, 16 + e/2, 1'(e%2), 0, 0, 0, 0, 0, '0);
        issue(NM_RES_ADD, e/2, 1'(e%2), e/2, 1'(e%2), 0, 0, 0, '0);
      end
      compare("residual");
      // binarize 16 channels (random elements) of 2 pixels into the halves of word 40+round%8
      for (int h = 0; h < 2; h++)
        for (int c = 0; c < 16; c++)
          issue(NM_BIN, $urandom % 32, 1'($urandom % 2), 40 + round % 8, 1'(h), c, c == 15, 0, '0);
      compare("bin");
      // average pooling: s x s random elements summed, then binarized into word 32+round%8
      for (int h = 0; h < 2; h++)
        for (int c = 0; c < 16; c++) begin
          int s = 2 + $urandom % 3;
          for (int k = 0; k < s*s - 1; k++) begin
            ae = (k != 0);
            issue(NM_AVG, $urandom % 32, 1'($urandom % 2), 0, 0, 0, 0, 0, '0);
          end
          ae = 1'b1;
          issue(NM_BIN, $urandom % 32, 1'($urandom % 2), 32 + round % 8, 1'(h), c, c == 15, 0, '0);
          ae = 1'b0;
        end
      compare("avg");
      // pooling into words 48..63
      for (int i = 0; i < 6; i++)
        issue(NM_POOL, 0, 0, 48 + $urandom % 16, 1'($urandom % 2), 0, 0, 0, 16'($urandom));
      compare("pool");
    end
    checks++;
    if (n_init == 0 || n_acc == 0 || n_res == 0 || n_bin == 0 || n_pool == 0 || n_avg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
