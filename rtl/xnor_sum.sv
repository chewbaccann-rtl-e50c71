// xnor_sum: one binary multiply-accumulate lane of a BPU.
//
// Sixteen xnor gates compare a 16-channel activation word with the matching
// 16-channel weight word, and a popcount adder counts the matches (0..16). This is
// the binary replacement of 16 multiply-accumulates in the {0,1} encoding of
// {-1,+1} values. When `en` is low the lane contributes zero: this is how taps
// outside the kernel and outside the image are switched off.
//
// For binary max pooling the lane also presents `pool_n`, the complement of the
// activations, or all ones when disabled. An AND over these terms in the BPU and
// in the array, complemented at the end, gives the channel-wise maximum (OR) of
// the window: the AND-gate tree that flanks the adder trees.
//
// Purely combinational. The 16 xnor gates, the popcount and the 6-bit output
// follow the paper's figure; the masking input is this design's own choice.
module xnor_sum
  import chewbacca_pkg::*;
(
  input  logic [CH-1:0]   img,
  input  logic [CH-1:0]   wgt,
  input  logic            en,
  output logic [XS_W-1:0] cnt,
  output logic [CH-1:0]   pool_n
);

  logic [CH-1:0] match;

  always_comb begin
    match = ~(img ^ wgt);
    cnt   = '0;
    if (en) begin
      for (int unsigned i = 0; i < CH; i++) cnt = cnt + XS_W'(match[i]);
    end
    pool_n = en ? ~img : '1;
  end

endmodule
