// scheduler: the controller that runs a network layer by layer following the
// loop nest of the paper's layer schedule.
//
// For each layer it fetches a five-word descriptor (layer_cfg_t) from the
// parameter buffer at desc_base + 5*layer, then:
//
// Convolution (stride 1, odd k_w x k_h up to 7 x 7, output same size as input):
//   for n_o in output tiles of 16 channels:
//     load the 16 thresholds of the tile into the NMCU
//     for n_i in input chunks of 16 channels:
//       DMA kernel row kr of the tile's 16 filters (chunk n_i) into row bank kr+3-k_h/2
//       for n_r in image rows:
//         DMA the image rows still missing for this window into bank (row mod 7)
//         for b_o in the 16 filters of the tile:
//           shift the filter's kernel row into the weight CSR of every BPU
//           stream image row n_r+r-3 through BPU r, one pixel per cycle; every
//           cycle from the 4th on completes one output column, which the NMCU
//           accumulates into the partial sum of (b_o, n_r, n_c)
//     optionally add the residual map (RES_LOAD/RES_ADD per element)
//     binarize the 16 partial sums of every pixel and pack them into one word;
//     with average pooling (avg_s = s > 1) every output pixel and channel first
//     sums the s x s window of partial sums (s*s - 1 AVG commands, then a BIN
//     that adds the window sum), and the output map is i_w/s x i_h/s
// Pooling (window = stride = k_w, k_w x k_w, channel-wise binary max):
//   for n_i in channel chunks: for each output row: DMA the k_w input rows,
//   stream them through BPUs 0..k_w-1 and write every k_w-th result.
// After each layer the FMM source and sink blocks swap; the last layer ends with
// a `done` pulse.
// Layers wider than the parameter buffer: a layer may be split over several runs
// by input chunks. The descriptor bit no_bin stops after accumulation and leaves
// the partial sums in the sink; acc_in makes the next run's first chunk add onto
// them instead of starting afresh. The host loads each part's weights into the
// idle parameter bank while the previous part runs (double buffering).
//
// Data layout (word addresses, two 16-bit items per 32-bit word):
//   input FM   in_base  + (n_i*i_h + y)*ceil(i_w/2) + x/2, half x%2   (source block)
//   partial    psum_base + p/2, half p%2, p = (b*i_h + y)*i_w + x, for channel b of
//              the current tile (sink block; 16-bit sums, two per word)
//   residual   res_base + r/2, half r%2, r = ((16*n_o + b)*i_h + y)*i_w + x, 16-bit
//              integer map in the same format (sink block)
//   output FM  out_base + (n_o*o_h + y)*ceil(o_w/2) + x/2, half x%2   (sink block)
//   weights    wbase + ((n_o*n_ci + n_i)*k_h + kr)*8*k_w, item b*k_w + kc (param. buffer)
//   thresholds thr_base + 16*n_o + b (param. buffer, low 16 bits, two's complement)
//
// Timing: row bank reads return one cycle after issue, so every signal that goes
// with the data (half select, shift strobes, valid, emit) is registered once.
// NMCU commands pass a delay line of 1 + ARR_LAT cycles so that each meets its
// BPU result. After every stream the scheduler waits DRAIN cycles so that the
// pipeline and the NMCU's last write have finished before anything changes.
// Threshold data go from the parameter buffer to the NMCU unchanged (thr_data);
// the scheduler only sequences the addresses and write enables.
//
// What follows the paper: the loop order of the schedule, weights staying in the
// BPUs while a row streams, row-bank rotation through the crossbar, accumulation,
// binarization and pooling after each output tile, and the source/sink swap per
// layer. The descriptor format, the data layout, padding (taps outside the image
// are switched off), stride 1 and the drain waits are this design's choices.
module scheduler
  import chewbacca_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // control
  input  logic                        start,
  input  logic [PB_AW-1:0]            desc_base,
  input  logic                        src_init,
  output logic                        busy,
  output logic                        done,
  output logic                        src_sel,
  // parameter buffer read port
  output logic                        pb_re,
  output logic [PB_AW-1:0]            pb_raddr,
  input  logic [WORD_W-1:0]           pb_rdata,
  // DMA
  output logic                        dma_start,
  output dma_src_e                    dma_src,
  output logic [FMM_AW-1:0]           dma_saddr,
  output logic [2:0]                  dma_bank,
  output logic [BANK_AW-1:0]          dma_daddr,
  output logic [7:0]                  dma_len,
  input  logic                        dma_busy,
  // row banks and crossbar
  output logic                        rb_re,
  output logic [BANK_AW-1:0]          rb_raddr,
  output logic [KMAX-1:0][2:0]        xb_sel,
  output logic                        xb_half,
  // BPU array
  output logic                        img_clr,
  output logic                        img_shift,
  output logic                        img_valid,
  output logic                        wgt_shift,
  output logic [KMAX-1:0]             tap_mask,
  output logic [KMAX-1:0]             row_en,
  output logic                        emit,
  // NMCU
  output nm_cmd_t                     nm_cmd,
  output logic                        thr_we,
  output logic [3:0]                  thr_idx,
  output logic [PSUM_W-1:0]           thr_data
);

  localparam int unsigned DLY   = 1 + ARR_LAT;
  localparam int unsigned DRAIN = DLY + 3;

  typedef enum logic [3:0] {
    S_IDLE, S_DESC, S_LAYER, S_THR, S_WLOAD, S_ROWS, S_DMA_WAIT, S_WBPU,
    S_STREAM, S_DRAIN, S_RES, S_BIN, S_NEXT_LAYER
  } state_e;

  state_e         state, ret_state;
  layer_cfg_t     cfg;
  logic [PB_AW-1:0] desc_ptr;
  logic [2:0]     cnt3;
  logic           desc_rd_q;
  logic [2:0]     desc_idx_q;

  // loop counters
  logic [7:0]     n_o, n_i;
  logic [8:0]     n_r, next_row;
  logic [3:0]     b_o;
  logic [2:0]     kr;
  logic [9:0]     t;          // stream position / weight load step
  logic [2:0]     px;         // pooling: position inside the window
  logic [8:0]     ox;         // pooling: output column
  logic [19:0]    e;          // residual / binarize element counter
  logic           res_phase;
  logic [8:0]     bin_y, bin_x;
  logic [2:0]     wy, wx;     // average pooling: position inside the window
  logic [4:0]     thr_cnt;
  logic           thr_rd_q;
  logic [3:0]     thr_idx_q;
  logic [3:0]     drain_cnt;
  state_e         after_drain;

  // derived sizes
  logic [2:0]     kw2, kh2;
  logic [8:0]     row_words, o_w, o_h, orow_words;
  logic           is_pool;
  logic           is_avg;     // conv with average pooling before binarization
  logic [2:0]     bs;         // binarization window: avg_s, or 1
  logic [8:0]     b_w, b_h, brow_words;  // binarized output size
  logic [8:0]     last_row_needed;

  // per-cycle issue signals (before the row bank read latency)
  logic           iss_read, iss_shift, iss_valid, iss_wshift, iss_emit, iss_half;
  nm_cmd_t        iss_cmd;
  logic [BANK_AW-1:0] iss_addr;

  nm_cmd_t        cmd_dly [DLY];
  logic [11:0]    item;       // weight item read in S_WBPU
  logic [19:0]    pidx;       // partial-sum element index (two per word)
  logic [19:0]    ridx;       // residual element index

  // ------------------------------------------------------------------ sizes
  always_comb begin
    kw2        = cfg.w0.k_w >> 1;
    kh2        = cfg.w0.k_h >> 1;
    is_pool    = (cfg.w0.op == OP_POOL);
    row_words  = (cfg.w0.i_w + 9'd1) >> 1;
    o_w        = is_pool ? 9'(cfg.w0.i_w / cfg.w0.k_w) : cfg.w0.i_w;
    o_h        = is_pool ? 9'(cfg.w0.i_h / cfg.w0.k_w) : cfg.w0.i_h;
    orow_words = (o_w + 9'd1) >> 1;
    is_avg     = !is_pool && (cfg.w1.avg_s > 3'd1);
    bs         = is_avg ? cfg.w1.avg_s : 3'd1;
    b_w        = 9'(cfg.w0.i_w / bs);
    b_h        = 9'(cfg.w0.i_h / bs);
    brow_words = (b_w + 9'd1) >> 1;
    if (is_pool) begin
      last_row_needed = 9'(32'(n_r) * 32'(cfg.w0.k_w) + 32'(cfg.w0.k_w) - 1);
    end else if (n_r + 9'(kh2) > cfg.w0.i_h - 9'd1) begin
      last_row_needed = cfg.w0.i_h - 9'd1;
    end else begin
      last_row_needed = n_r + 9'(kh2);
    end
  end

  // ------------------------------------------------------------------ window masks
  always_comb begin
    for (int unsigned r = 0; r < KMAX; r++) begin
      if (is_pool) begin
        tap_mask[r] = (r < 32'(cfg.w0.k_w));
        row_en[r]   = (r < 32'(cfg.w0.k_w));
        xb_sel[r]   = 3'((32'(n_r) * 32'(cfg.w0.k_w) + 32'(r)) % KMAX);
      end else begin
        tap_mask[r] = (r + 32'(kw2) >= KCENTER) && (r <= KCENTER + 32'(kw2));
        row_en[r]   = (r + 32'(kh2) >= KCENTER) && (r <= KCENTER + 32'(kh2))
                   && (32'(n_r) + r >= KCENTER) && (32'(n_r) + r < KCENTER + 32'(cfg.w0.i_h));
        xb_sel[r]   = 3'((32'(n_r) + r + KMAX - KCENTER) % KMAX);
      end
    end
  end

  // ------------------------------------------------------------------ issue logic
  always_comb begin
    iss_read   = 1'b0;
    iss_addr   = '0;
    iss_half   = 1'b0;
    iss_shift  = 1'b0;
    iss_valid  = 1'b0;
    iss_wshift = 1'b0;
    iss_emit   = 1'b0;
    iss_cmd    = '0;
    img_clr    = 1'b0;
    item       = 12'(b_o) * 12'(cfg.w0.k_w) + 12'(t);
    pidx       = '0;
    ridx       = '0;
    unique case (state)
      S_WBPU: begin
        iss_read   = 1'b1;
        iss_addr   = BANK_AW'(RB_WREG) + BANK_AW'(item >> 1);
        iss_half   = item[0];
        iss_wshift = 1'b1;
        img_clr    = (t == 0);
      end
      S_STREAM: begin
        iss_read  = 1'b1;
        iss_addr  = BANK_AW'(t >> 1);
        iss_half  = t[0];
        iss_shift = 1'b1;
        iss_valid = (t < 10'(cfg.w0.i_w));
        if (is_pool) begin
          iss_emit = (px == cfg.w0.k_w - 3'd1) && (ox < o_w);
          iss_cmd.op    = NM_POOL;
          iss_cmd.waddr = cfg.out_base
                        + FMM_AW'((32'(n_i) * 32'(o_h) + 32'(n_r)) * 32'(orow_words))
                        + FMM_AW'(ox >> 1);
          iss_cmd.whalf = ox[0];
        end else begin
          iss_emit = (t >= 10'(KCENTER));
          iss_cmd.op    = (n_i == 0 && !cfg.w0.acc_in) ? NM_ACC_INIT : NM_ACC;
          pidx          = 20'((32'(b_o) * 32'(cfg.w0.i_h) + 32'(n_r)) * 32'(cfg.w0.i_w)
                              + 32'(t) - KCENTER);
          iss_cmd.waddr = cfg.psum_base + FMM_AW'(pidx >> 1);
          iss_cmd.whalf = pidx[0];
          iss_cmd.raddr = iss_cmd.waddr;
          iss_cmd.rhalf = pidx[0];
        end
        if (!iss_emit) iss_cmd = '0;
      end
      S_RES: begin
        ridx          = 20'(32'(n_o) * 16 * 32'(cfg.w0.i_h) * 32'(cfg.w0.i_w) + 32'(e));
        iss_cmd.op    = res_phase ? NM_RES_ADD : NM_RES_LOAD;
        iss_cmd.raddr = res_phase ? cfg.psum_base + FMM_AW'(e >> 1)
                                  : cfg.res_base + FMM_AW'(ridx >> 1);
        iss_cmd.rhalf = res_phase ? e[0] : ridx[0];
        iss_cmd.waddr = cfg.psum_base + FMM_AW'(e >> 1);
        iss_cmd.whalf = e[0];
      end
      S_BIN: begin
        iss_cmd.op    = (wy == bs - 3'd1 && wx == bs - 3'd1) ? NM_BIN : NM_AVG;
        iss_cmd.acc_en = (wy != 3'd0 || wx != 3'd0);
        pidx          = 20'((32'(b_o) * 32'(cfg.w0.i_h) + 32'(bin_y) * 32'(bs) + 32'(wy))
                            * 32'(cfg.w0.i_w) + 32'(bin_x) * 32'(bs) + 32'(wx));
        iss_cmd.raddr = cfg.psum_base + FMM_AW'(pidx >> 1);
        iss_cmd.rhalf = pidx[0];
        iss_cmd.waddr = cfg.out_base
                      + FMM_AW'((32'(n_o) * 32'(b_h) + 32'(bin_y)) * 32'(brow_words))
                      + FMM_AW'(bin_x >> 1);
        iss_cmd.whalf = bin_x[0];
        iss_cmd.ch    = b_o;
        iss_cmd.wlast = (b_o == 4'd15);
      end
      default: ;
    endcase
  end

  assign rb_re    = iss_read;
  assign rb_raddr = iss_addr;

  // signals that travel with the row bank data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xb_half   <= 1'b0;
      img_shift <= 1'b0;
      img_valid <= 1'b0;
      wgt_shift <= 1'b0;
      emit      <= 1'b0;
    end else begin
      xb_half   <= iss_half;
      img_shift <= iss_shift;
      img_valid <= iss_valid;
      wgt_shift <= iss_wshift;
      emit      <= iss_emit;
    end
  end

  // NMCU command delay line: commands from the stream wait for their BPU result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < DLY; i++) cmd_dly[i] <= '0;
    end else begin
      cmd_dly[0] <= iss_cmd;
      for (int unsigned i = 1; i < DLY; i++) cmd_dly[i] <= cmd_dly[i-1];
    end
  end
  assign nm_cmd = cmd_dly[DLY-1];

  // ------------------------------------------------------------------ parameter buffer reads
  always_comb begin
    pb_re    = 1'b0;
    pb_raddr = '0;
    if (state == S_DESC && cnt3 < 3'd5) begin
      pb_re    = 1'b1;
      pb_raddr = desc_ptr + PB_AW'(cnt3);
    end else if (state == S_THR && thr_cnt < 5'd16) begin
      pb_re    = 1'b1;
      pb_raddr = cfg.thr_base + PB_AW'({n_o, 4'b0}) + PB_AW'(thr_cnt);
    end
  end

  assign thr_we   = thr_rd_q;
  assign thr_idx  = thr_idx_q;
  assign thr_data = pb_rdata[PSUM_W-1:0];

  // ------------------------------------------------------------------ DMA commands
  always_comb begin
    dma_start = 1'b0;
    dma_src   = SRC_FMM;
    dma_saddr = '0;
    dma_bank  = '0;
    dma_daddr = '0;
    dma_len   = '0;
    if (state == S_WLOAD) begin
      dma_start = 1'b1;
      dma_src   = SRC_PB;
      dma_saddr = FMM_AW'(cfg.w1.wbase)
                + FMM_AW'(((32'(n_o) * 32'(cfg.w1.n_ci) + 32'(n_i)) * 32'(cfg.w0.k_h) + 32'(kr))
                          * 8 * 32'(cfg.w0.k_w));
      dma_bank  = 3'(32'(kr) + KCENTER - 32'(kh2));
      dma_daddr = BANK_AW'(RB_WREG);
      dma_len   = 8'(8 * 32'(cfg.w0.k_w));
    end else if (state == S_ROWS && next_row <= last_row_needed) begin
      dma_start = 1'b1;
      dma_src   = SRC_FMM;
      dma_saddr = cfg.in_base
                + FMM_AW'((32'(n_i) * 32'(cfg.w0.i_h) + 32'(next_row)) * 32'(row_words));
      dma_bank  = 3'(32'(next_row) % KMAX);
      dma_daddr = '0;
      dma_len   = 8'(row_words);
    end
  end

  // ------------------------------------------------------------------ state machine
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      ret_state   <= S_IDLE;
      after_drain <= S_IDLE;
      cfg         <= '0;
      desc_ptr    <= '0;
      cnt3        <= '0;
      desc_rd_q   <= 1'b0;
      desc_idx_q  <= '0;
      src_sel     <= 1'b0;
      done        <= 1'b0;
      n_o <= '0; n_i <= '0; n_r <= '0; next_row <= '0; b_o <= '0; kr <= '0;
      t <= '0; px <= '0; ox <= '0; e <= '0; res_phase <= 1'b0;
      bin_y <= '0; bin_x <= '0; wy <= '0; wx <= '0;
      thr_cnt <= '0; thr_rd_q <= 1'b0; thr_idx_q <= '0;
      drain_cnt <= '0;
    end else begin
      done       <= 1'b0;
      desc_rd_q  <= (state == S_DESC) && (cnt3 < 3'd5);
      desc_idx_q <= cnt3;
      thr_rd_q   <= (state == S_THR) && (thr_cnt < 5'd16);
      thr_idx_q  <= thr_cnt[3:0];

      // descriptor words arrive one cycle after their read
      if (desc_rd_q) begin
        unique case (desc_idx_q)
          3'd0: cfg.w0 <= desc_w0_t'(pb_rdata);
          3'd1: cfg.w1 <= desc_w1_t'(pb_rdata);
          3'd2: {cfg.out_base, cfg.in_base}   <= pb_rdata;
          3'd3: {cfg.res_base, cfg.psum_base} <= pb_rdata;
          default: cfg.thr_base <= pb_rdata[8:0];
        endcase
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            desc_ptr <= desc_base;
            src_sel  <= src_init;
            cnt3     <= '0;
            state    <= S_DESC;
          end
        end

        S_DESC: begin
          cnt3 <= cnt3 + 3'd1;
          if (cnt3 == 3'd5) state <= S_LAYER;  // last word captured this edge
        end

        S_LAYER: begin
          n_o <= '0; n_i <= '0; n_r <= '0; next_row <= '0; thr_cnt <= '0;
          state <= is_pool ? S_ROWS : S_THR;
        end

        S_THR: begin
          thr_cnt <= thr_cnt + 5'd1;
          if (thr_cnt == 5'd16) begin
            n_i <= '0;
            kr  <= '0;
            state <= S_WLOAD;
          end
        end

        S_WLOAD: begin
          ret_state <= (32'(kr) == 32'(cfg.w0.k_h) - 1) ? S_ROWS : S_WLOAD;
          kr        <= kr + 3'd1;
          n_r       <= '0;
          next_row  <= '0;
          state     <= S_DMA_WAIT;
        end

        S_DMA_WAIT: begin
          if (!dma_busy) state <= ret_state;
        end

        S_ROWS: begin
          if (next_row <= last_row_needed) begin
            next_row  <= next_row + 9'd1;
            ret_state <= S_ROWS;
            state     <= S_DMA_WAIT;
          end else begin
            b_o <= '0;
            t   <= '0;
            px  <= '0;
            ox  <= '0;
            state <= is_pool ? S_STREAM : S_WBPU;
          end
        end

        S_WBPU: begin
          // k_w weights followed by 3-k_w/2 filler shifts
          if (32'(t) == 32'(cfg.w0.k_w) + KCENTER - 32'(kw2) - 1) begin
            t     <= '0;
            state <= S_STREAM;
          end else begin
            t <= t + 10'd1;
          end
        end

        S_STREAM: begin
          if (is_pool) begin
            if (px == cfg.w0.k_w - 3'd1) begin
              px <= '0;
              ox <= ox + 9'd1;
            end else begin
              px <= px + 3'd1;
            end
          end
          if (is_pool ? (t == 10'(cfg.w0.i_w) - 10'd1)
                      : (t == 10'(cfg.w0.i_w) + 10'(KCENTER) - 10'd1)) begin
            t         <= '0;
            drain_cnt <= '0;
            state     <= S_DRAIN;
            // decide what follows the drain
            if (!is_pool && b_o != 4'd15) begin
              after_drain <= S_WBPU;
            end else if (n_r != o_h - 9'd1) begin
              after_drain <= S_ROWS;
            end else if (n_i != cfg.w1.n_ci - 8'd1) begin
              after_drain <= is_pool ? S_ROWS : S_WLOAD;
            end else if (!is_pool && cfg.w0.no_bin) begin
              after_drain <= (n_o == cfg.w1.n_co - 8'd1) ? S_NEXT_LAYER : S_THR;
            end else if (!is_pool) begin
              after_drain <= cfg.w0.res_en ? S_RES : S_BIN;
            end else begin
              after_drain <= S_NEXT_LAYER;
            end
          end else begin
            t <= t + 10'd1;
          end
        end

        S_DRAIN: begin
          drain_cnt <= drain_cnt + 4'd1;
          if (32'(drain_cnt) == DRAIN - 1) begin
            state <= after_drain;
            e <= '0; res_phase <= 1'b0; bin_y <= '0; bin_x <= '0; wy <= '0; wx <= '0;
            px <= '0; ox <= '0;
            unique case (after_drain)
              S_WBPU: b_o <= b_o + 4'd1;
              S_ROWS: begin
                if (n_r != o_h - 9'd1) begin
                  n_r <= n_r + 9'd1;
                end else begin
                  // next input chunk (pooling: next channel chunk)
                  n_r      <= '0;
                  next_row <= '0;
                  n_i      <= n_i + 8'd1;
                end
              end
              S_WLOAD: begin
                n_i <= n_i + 8'd1;
                kr  <= '0;
              end
              S_RES, S_BIN: b_o <= '0;
              S_THR: begin
                n_o     <= n_o + 8'd1;
                thr_cnt <= '0;
              end
              default: ;
            endcase
          end
        end

        S_RES: begin
          res_phase <= ~res_phase;
          if (res_phase) begin
            if (32'(e) == 16 * 32'(cfg.w0.i_h) * 32'(cfg.w0.i_w) - 1) begin
              drain_cnt   <= '0;
              after_drain <= S_BIN;
              state       <= S_DRAIN;
            end else begin
              e <= e + 20'd1;
            end
          end
        end

        S_BIN: begin
          wx <= wx + 3'd1;
          if (wx == bs - 3'd1) begin
            wx <= '0;
            wy <= wy + 3'd1;
          end
          if (wx == bs - 3'd1 && wy == bs - 3'd1) begin
            wy  <= '0;
            b_o <= b_o + 4'd1;
            if (b_o == 4'd15) begin
              if (bin_x == b_w - 9'd1) begin
                bin_x <= '0;
                if (bin_y == b_h - 9'd1) begin
                  drain_cnt   <= '0;
                  after_drain <= (n_o == cfg.w1.n_co - 8'd1) ? S_NEXT_LAYER : S_THR;
                  state       <= S_DRAIN;
                end else begin
                  bin_y <= bin_y + 9'd1;
                end
              end else begin
                bin_x <= bin_x + 9'd1;
              end
            end
          end
        end

        S_NEXT_LAYER: begin
          if (cfg.w0.last) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            src_sel  <= ~src_sel;
            desc_ptr <= desc_ptr + PB_AW'(5);
            cnt3     <= '0;
            state    <= S_DESC;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
