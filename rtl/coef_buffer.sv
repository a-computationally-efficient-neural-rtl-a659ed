// coef_buffer -- Weight Buffer / Index Buffer of the SFTC.
//
// Stores, for every (output-channel tile, input-channel tile) step of the
// layers of one chain, the compressed coefficients of all POF x PIF SCUs:
// NNZ = 32 elements of EW bits per SCU. Used with EW = 16 as the Weight Buffer
// (non-zero transform-domain weights) and with EW = 6 as the Index Buffer
// (positions of those weights). The paper gives the buffers' role; the
// organisation (one very wide word per step, DEPTH = 27 steps, enough for the
// CTVC-Net synthesis chain Conv(36)+Conv(36)+DeConv(36) at 12x12 SCUs) is
// this design's choice.
// Write port: one 16-element chunk (half of one SCU's 32 slots) per cycle,
// selected by waddr, wlane = oc*PIF + ic and wchunk. Read port: the whole
// word at raddr, registered (data valid the cycle after re).
module coef_buffer #(
  parameter int EW    = 16,
  parameter int DEPTH = 27,
  parameter int POF   = 12,
  parameter int PIF   = 12,
  parameter int NNZ   = 32
) (
  input  logic                                   clk,
  input  logic                                   we,
  input  logic [$clog2(DEPTH)-1:0]               waddr,
  input  logic [$clog2(POF*PIF)-1:0]             wlane,
  input  logic                                   wchunk,
  input  logic [NNZ/2-1:0][EW-1:0]               wdata,
  input  logic                                   re,
  input  logic [$clog2(DEPTH)-1:0]               raddr,
  output logic [POF-1:0][PIF-1:0][NNZ-1:0][EW-1:0] rdata
);
  logic [POF-1:0][PIF-1:0][NNZ-1:0][EW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      for (int k = 0; k < NNZ/2; k++)
        mem[waddr][int'(wlane) / PIF][int'(wlane) % PIF][NNZ/2*int'(wchunk) + k] <= wdata[k];
    if (re) rdata <= mem[raddr];
  end
endmodule
