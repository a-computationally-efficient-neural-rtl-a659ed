// sram_bank -- one simple dual-port buffer bank (1 write, 1 read port).
//
// Helper for the Input Buffer and Output Buffer banks: DEPTH words of W bits,
// synchronous write, registered read (rdata valid the cycle after re).
// Written as an array so that synthesis maps it to a memory macro.
module sram_bank #(
  parameter int W     = 144,
  parameter int DEPTH = 384
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
