// input_buffer -- the ten-bank Input Buffer used by heterogeneous layer chaining.
//
// Row i of any feature map of a chain lives in bank i % 10, so the ten banks
// hold the 10 input rows a complete fast DeConv chain needs and are reused,
// bank by bank, by the rows of the following layers (bank count and the
// i % 10 mapping are the paper's). Inside a bank a word holds PIF channels of
// one pixel; address = channel_tile * W_MAX + column (this design's layout).
// Read: NR row slots, each naming a bank and sharing one address; the
// controller never names one bank twice. Data arrive the cycle after rd_en.
// Write: NW ports, each naming a bank; the controller never names one bank
// twice in a cycle.
module input_buffer
  import nvca_pkg::*;
#(
  parameter int PIF   = 12,
  parameter int DEPTH = 384,
  parameter int NR    = 5,
  parameter int NW    = 2
) (
  input  logic                          clk,
  input  logic                          rd_en,
  input  logic [NR-1:0][3:0]            rd_bank,
  input  logic [$clog2(DEPTH)-1:0]      rd_addr,
  output act_t [NR-1:0][PIF-1:0]        rd_data,
  input  logic [NW-1:0]                 wr_en,
  input  logic [NW-1:0][3:0]            wr_bank,
  input  logic [NW-1:0][$clog2(DEPTH)-1:0] wr_addr,
  input  act_t [NW-1:0][PIF-1:0]        wr_data
);
  localparam int AW = $clog2(DEPTH);
  logic [IB_BANKS-1:0]                 b_we, b_re;
  logic [IB_BANKS-1:0][AW-1:0]         b_waddr;
  logic [IB_BANKS-1:0][PIF*ACT_W-1:0]  b_wdata, b_rdata;
  logic [NR-1:0][3:0]                  rd_bank_q;

  always_comb begin
    b_we = '0; b_re = '0; b_waddr = '0; b_wdata = '0;
    for (int p = 0; p < NW; p++)
      if (wr_en[p]) begin
        b_we[wr_bank[p]]    = 1'b1;
        b_waddr[wr_bank[p]] = wr_addr[p];
        b_wdata[wr_bank[p]] = wr_data[p];
      end
    for (int s = 0; s < NR; s++)
      if (rd_en) b_re[rd_bank[s]] = 1'b1;
  end

  for (genvar b = 0; b < IB_BANKS; b++) begin : g_bank
    sram_bank #(.W(PIF*ACT_W), .DEPTH(DEPTH)) u_bank (
      .clk, .we(b_we[b]), .waddr(b_waddr[b]), .wdata(b_wdata[b]),
      .re(b_re[b]), .raddr(rd_addr), .rdata(b_rdata[b]));
  end

  always_ff @(posedge clk) if (rd_en) rd_bank_q <= rd_bank;

  always_comb
    for (int s = 0; s < NR; s++) rd_data[s] = b_rdata[rd_bank_q[s]];
endmodule
