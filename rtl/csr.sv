// csr: controlled shift register that feeds the xnor_sum units of one BPU.
//
// DEPTH entries of W bits, each with a valid tag. On `shift` the entries move one
// position up (0 -> 1 -> ... -> DEPTH-1) and `din`/`din_valid` enter at position 0,
// so position 0 always holds the newest word. When the convolution window slides
// one pixel to the right only one new word enters: the other DEPTH-1 are reused.
// `clr` drops all valid tags (start of a new image row) and has priority over
// `shift`. The valid tag marks padding: a tap whose tag is low is switched off.
//
// Timing: q/v change on the clock edge at which shift or clr is high.
// The 7 positions follow the paper's figure; the valid tags are this design's own.
module csr #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 7
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     shift,
  input  logic [W-1:0]             din,
  input  logic                     din_valid,
  output logic [DEPTH-1:0][W-1:0]  q,
  output logic [DEPTH-1:0]         v
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
      v <= '0;
    end else if (clr) begin
      v <= '0;
    end else if (shift) begin
      q <= {q[DEPTH-2:0], din};
      v <= {v[DEPTH-2:0], din_valid};
    end
  end

endmodule
