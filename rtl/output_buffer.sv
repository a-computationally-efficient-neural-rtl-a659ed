// output_buffer -- Output Buffer holding the DeConv results of one chain step.
//
// Six banks, one per output row of a T3(6x6,4x4) DeConv patch, so that the six
// rows of a patch column are written in one cycle. A word holds POF output
// channels of one pixel; address = channel_tile * WO_MAX + column. The paper
// says DeConv outputs are written here and then moved to external memory; the
// banking is this design's choice. Read: one word per cycle for the DMA
// (bank + address), data the cycle after rd_en.
module output_buffer
  import nvca_pkg::*;
#(
  parameter int POF   = 12,
  parameter int DEPTH = 768
) (
  input  logic                               clk,
  input  logic                               wr_en,
  input  logic [$clog2(DEPTH)-1:0]           wr_addr,
  input  act_t [OB_BANKS-1:0][POF-1:0]       wr_data,
  input  logic                               rd_en,
  input  logic [2:0]                         rd_bank,
  input  logic [$clog2(DEPTH)-1:0]           rd_addr,
  output act_t [POF-1:0]                     rd_data
);
  logic [OB_BANKS-1:0][POF*ACT_W-1:0] b_rdata;
  logic [2:0] rd_bank_q;

  for (genvar b = 0; b < OB_BANKS; b++) begin : g_bank
    sram_bank #(.W(POF*ACT_W), .DEPTH(DEPTH)) u_bank (
      .clk, .we(wr_en), .waddr(wr_addr), .wdata(wr_data[b]),
      .re(rd_en && rd_bank == 3'(b)), .raddr(rd_addr), .rdata(b_rdata[b]));
  end

  always_ff @(posedge clk) if (rd_en) rd_bank_q <= rd_bank;
  assign rd_data = b_rdata[rd_bank_q];
endmodule
