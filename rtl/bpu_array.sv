// bpu_array: seven BPUs and the third-stage adder tree that turns seven row inner
// products into the 2D inner product of one output pixel.
//
// BPU r works on kernel row r-3 (r = 0..6): its img and wgt words come from the
// row banks through the crossbar. All BPUs shift together, so each cycle the
// window moves one pixel right and one result leaves the array. `row_en` switches
// whole BPUs off: rows outside the kernel and kernel rows that fall outside the
// image. The array output is registered (`sum`, 10 bit, up to 7 x 112 = 784).
//
// Pooling reuses the datapath: the pooling terms of the enabled BPUs are ANDed and
// complemented, giving the channel-wise OR (binary max) over the window (`pool`).
//
// Timing: an `emit` strobe given together with `img_shift` comes out as `valid`
// ARR_LAT = 3 edges later, in the cycle in which `sum`/`pool` hold the result of
// the window completed by that shift. Throughput: one result per cycle.
// The 7 x 7 organisation, the pipelining of the BPU outputs and the third adder
// tree follow the paper; the emit/valid tag is this design's own.
module bpu_array
  import chewbacca_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       img_clr,
  input  logic                       img_shift,
  input  logic [KMAX-1:0][CH-1:0]    img_in,
  input  logic                       img_valid,
  input  logic                       wgt_shift,
  input  logic [KMAX-1:0][CH-1:0]    wgt_in,
  input  logic [KMAX-1:0]            tap_mask,
  input  logic [KMAX-1:0]            row_en,
  input  logic                       emit,
  output logic                       valid,
  output logic [ARR_W-1:0]           sum,
  output logic [CH-1:0]              pool
);

  logic [KMAX-1:0][BPU_W-1:0] bsum;
  logic [KMAX-1:0][CH-1:0]    bpool_n;
  logic [ARR_W-1:0]           sum_d;
  logic [CH-1:0]              pool_n_d;
  logic [ARR_LAT-1:0]         emit_sr;

  for (genvar r = 0; r < KMAX; r++) begin : g_bpu
    bpu u_bpu (
      .clk, .rst_n, .img_clr, .img_shift, .img_in(img_in[r]), .img_valid,
      .wgt_shift, .wgt_in(wgt_in[r]), .tap_mask,
      .sum_q(bsum[r]), .pool_n_q(bpool_n[r])
    );
  end

  always_comb begin
    sum_d    = '0;
    pool_n_d = '1;
    for (int unsigned r = 0; r < KMAX; r++) begin
      if (row_en[r]) begin
        sum_d    = sum_d + ARR_W'(bsum[r]);
        pool_n_d = pool_n_d & bpool_n[r];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum     <= '0;
      pool    <= '0;
      emit_sr <= '0;
    end else begin
      sum     <= sum_d;
      pool    <= ~pool_n_d;
      emit_sr <= {emit_sr[ARR_LAT-2:0], emit & img_shift};
    end
  end

  assign valid = emit_sr[ARR_LAT-1];

endmodule
