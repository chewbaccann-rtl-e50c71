// io_ctrl: host I/O port of the accelerator.
//
// A simple word-addressed bus (req, we, addr, wdata; rvalid/rdata one cycle after
// a read) with this memory map, addr[17:16] selecting the region:
//   0, 1   feature map memory block 0 / 1, word addr[15:0] (only while idle)
//   2      parameter buffer load bank, word addr[8:0] (always: double buffering)
//   3      registers, addr[7:0]:
//          0x00 CTRL   write: bit0 start, bit1 swap parameter buffer banks
//                      read : bit0 busy, bit1 done (sticky until the next start),
//                             bit2 parameter buffer bank used by the core
//          0x01 DESC   descriptor base address in the parameter buffer
//          0x02 SRC    FMM block holding the first layer's input
//          0x10+4b+i   FMM block b power enables, banks 32i..32i+31 (reset: all on)
// Requests are accepted every cycle. Feature map requests made while the core
// runs are dropped by the memory interconnect and read as zero.
// The address and write-data outputs to the memories are the host's own bus
// lines passed straight on; only the enables are decoded.
//
// The paper only names the I/O block; its bus and register map are this design's.
module io_ctrl
  import chewbacca_pkg::*;
#(
  parameter int unsigned NBANK = 73
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host bus
  input  logic                    req,
  input  logic                    we,
  input  logic [17:0]             addr,
  input  logic [WORD_W-1:0]       wdata,
  output logic                    rvalid,
  output logic [WORD_W-1:0]       rdata,
  // core control
  output logic                    start,
  output logic [PB_AW-1:0]        desc_base,
  output logic                    src_init,
  input  logic                    busy,
  input  logic                    done,
  output logic [1:0][NBANK-1:0]   fmm_pwr,
  // feature map memory
  output logic                    fmm_blk,
  output logic                    fmm_re,
  output logic                    fmm_we,
  output logic [FMM_AW-1:0]       fmm_addr,
  output logic [WORD_W-1:0]       fmm_wdata,
  input  logic [WORD_W-1:0]       fmm_rdata,
  // parameter buffer
  output logic                    pb_swap,
  input  logic                    pb_core_bank,
  output logic                    pb_re,
  output logic [PB_AW-1:0]        pb_raddr,
  input  logic [WORD_W-1:0]       pb_rdata,
  output logic                    pb_we,
  output logic [PB_AW-1:0]        pb_waddr,
  output logic [WORD_W-1:0]       pb_wdata
);

  localparam int unsigned NPW = (NBANK + 31) / 32;

  logic [1:0]              region, region_q;
  logic [WORD_W-1:0]       reg_rdata_q;
  logic                    done_q;
  logic [1:0][NPW*32-1:0]  pwr_q;
  logic                    reg_wr, reg_rd;

  assign region = addr[17:16];
  assign reg_wr = req && we && (region == 2'd3);
  assign reg_rd = req && !we && (region == 2'd3);

  // memory regions
  assign fmm_blk   = region[0];
  assign fmm_re    = req && !we && !region[1];
  assign fmm_we    = req &&  we && !region[1];
  assign fmm_addr  = addr[FMM_AW-1:0];
  assign fmm_wdata = wdata;
  assign pb_re     = req && !we && (region == 2'd2);
  assign pb_raddr  = addr[PB_AW-1:0];
  assign pb_we     = req &&  we && (region == 2'd2);
  assign pb_waddr  = addr[PB_AW-1:0];
  assign pb_wdata  = wdata;

  // register strobes
  assign start   = reg_wr && (addr[7:0] == 8'h00) && wdata[0] && !busy;
  assign pb_swap = reg_wr && (addr[7:0] == 8'h00) && wdata[1];

  for (genvar b = 0; b < 2; b++) begin : g_pwr
    assign fmm_pwr[b] = pwr_q[b][NBANK-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      desc_base   <= '0;
      src_init    <= 1'b0;
      done_q      <= 1'b0;
      pwr_q       <= '1;
      rvalid      <= 1'b0;
      region_q    <= '0;
      reg_rdata_q <= '0;
    end else begin
      rvalid   <= req && !we;
      region_q <= region;
      if (start)     done_q <= 1'b0;
      else if (done) done_q <= 1'b1;
      if (reg_wr) begin
        unique case (addr[7:0])
          8'h01: desc_base <= wdata[PB_AW-1:0];
          8'h02: src_init  <= wdata[0];
          default: begin
            for (int unsigned b = 0; b < 2; b++) begin
              for (int unsigned i = 0; i < NPW; i++) begin
                if (addr[7:0] == 8'(32'h10 + 4*b + i)) pwr_q[b][32*i +: 32] <= wdata;
              end
            end
          end
        endcase
      end
      if (reg_rd) begin
        reg_rdata_q <= '0;
        unique case (addr[7:0])
          8'h00: reg_rdata_q <= {29'b0, pb_core_bank, done_q, busy};
          8'h01: reg_rdata_q <= WORD_W'(desc_base);
          8'h02: reg_rdata_q <= WORD_W'(src_init);
          default: begin
            for (int unsigned b = 0; b < 2; b++) begin
              for (int unsigned i = 0; i < NPW; i++) begin
                if (addr[7:0] == 8'(32'h10 + 4*b + i)) reg_rdata_q <= pwr_q[b][32*i +: 32];
              end
            end
          end
        endcase
      end
    end
  end

  always_comb begin
    unique case (region_q)
      2'd0, 2'd1: rdata = fmm_rdata;
      2'd2:       rdata = pb_rdata;
      default:    rdata = reg_rdata_q;
    endcase
  end


endmodule
