// crossbar: X-bar between the seven row banks and the seven BPUs.
//
// Image path: BPU r takes the row bank chosen by `sel[r]`; the scheduler sets
// sel[r] = (n_r + r - 3) mod 7 for convolution, which rotates the banks as the
// window moves down without moving data. Weight path: BPU r always takes bank r.
// Each row bank word holds two 16-bit items; `half` picks which one goes out, on
// both paths. Purely combinational.
//
// The crossbar and its purpose (rotating row banks) follow the paper; the
// separate fixed weight path and the half-word select are this design's choices.
module crossbar
  import chewbacca_pkg::*;
(
  input  logic [KMAX-1:0][WORD_W-1:0]  bank_data,
  input  logic [KMAX-1:0][2:0]         sel,
  input  logic                         half,
  output logic [KMAX-1:0][CH-1:0]      img,
  output logic [KMAX-1:0][CH-1:0]      wgt
);

  always_comb begin
    for (int unsigned r = 0; r < KMAX; r++) begin
      logic [WORD_W-1:0] w;
      w = '0;
      for (int unsigned k = 0; k < KMAX; k++) begin
        if (sel[r] == 3'(k)) w = bank_data[k];
      end
      img[r] = half ? w[WORD_W-1:CH] : w[CH-1:0];
      wgt[r] = half ? bank_data[r][WORD_W-1:CH] : bank_data[r][CH-1:0];
    end
  end

endmodule
