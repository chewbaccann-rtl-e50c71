// bpu: Basic Processing Unit, a 1D binary convolution of one image row with one
// kernel row over 16 input channels.
//
// Two controlled shift registers hold 7 activation words (img) and 7 weight words
// (wgt), 16 channels each. Seven xnor_sum lanes compare position j of both
// registers; a second-stage adder tree adds their 6-bit match counts into an 8-bit
// row inner product. A lane is enabled when its position is inside the kernel
// window (`tap_mask`) and its activation is a real pixel, not padding (CSR valid).
// Beside the adder tree an AND tree over the lanes' pooling terms gives the
// pooling term of the whole row (see xnor_sum).
//
// Position j of the img CSR holds pixel (n_c + 3 - j) when the output for column
// n_c is computed, so position 3 is the kernel centre and kernels of 1, 3, 5 and 7
// taps sit at positions 3-k/2 .. 3+k/2. Weights are shifted in starting with the
// leftmost kernel column, followed by 3-k/2 empty shifts (done by the scheduler).
//
// Timing: the CSRs update on the edge where their shift strobe is high; sum_q and
// pool_n_q register the combinational result one edge later. Structure (CSRs,
// 7 xnor_sum, adder tree, widths 16/6/8) follows the paper's figure; the tap mask
// and the registered output are this design's choices.
module bpu
  import chewbacca_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               img_clr,
  input  logic               img_shift,
  input  logic [CH-1:0]      img_in,
  input  logic               img_valid,
  input  logic               wgt_shift,
  input  logic [CH-1:0]      wgt_in,
  input  logic [KMAX-1:0]    tap_mask,
  output logic [BPU_W-1:0]   sum_q,
  output logic [CH-1:0]      pool_n_q
);

  logic [KMAX-1:0][CH-1:0]   img_q, wgt_q;
  logic [KMAX-1:0]           img_v;
  logic [KMAX-1:0]           wgt_v;  // weight CSR tags, unused: weights never pad
  logic [KMAX-1:0][XS_W-1:0] cnt;
  logic [KMAX-1:0][CH-1:0]   pn;
  logic [BPU_W-1:0]          sum_d;
  logic [CH-1:0]             pool_d;

  csr #(.W(CH), .DEPTH(KMAX)) u_img_csr (
    .clk, .rst_n, .clr(img_clr), .shift(img_shift), .din(img_in), .din_valid(img_valid),
    .q(img_q), .v(img_v)
  );

  csr #(.W(CH), .DEPTH(KMAX)) u_wgt_csr (
    .clk, .rst_n, .clr(1'b0), .shift(wgt_shift), .din(wgt_in), .din_valid(1'b1),
    .q(wgt_q), .v(wgt_v)
  );

  for (genvar j = 0; j < KMAX; j++) begin : g_lane
    xnor_sum u_xs (
      .img(img_q[j]), .wgt(wgt_q[j]), .en(tap_mask[j] & img_v[j]),
      .cnt(cnt[j]), .pool_n(pn[j])
    );
  end

  always_comb begin
    sum_d  = '0;
    pool_d = '1;
    for (int unsigned j = 0; j < KMAX; j++) begin
      sum_d  = sum_d + BPU_W'(cnt[j]);
      pool_d = pool_d & pn[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q    <= '0;
      pool_n_q <= '1;
    end else begin
      sum_q    <= sum_d;
      pool_n_q <= pool_d;
    end
  end

endmodule
