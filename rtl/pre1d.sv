// pre1d -- one 1D-PreU: the 1-D input transform y = B^T x of the fast algorithms.
//
// In DeConv mode (mode = MODE_DECONV) it maps five inputs to the eight outputs of
// the T3(6x6,4x4) transform B^T_DeConv:
//   o0=i0-i2  o1=i1+i2  o2=i2-i1  o3=i3-i1  o4=i1-i3  o5=i2+i3  o6=i3-i2  o7=i4-i2.
// The Winograd F(2x2,3x3) matrix B^T_Conv is a subset of the same adders: its
// four outputs (i0-i2, i1+i2, i2-i1, i1-i3) appear on o0, o1, o2 and o4, which is
// how the unit is shared between the two modes; in Conv mode i4 is replaced by 0.
// The sharing of outputs o0/o1/o2/o4 and the i4/0 multiplexer follow the
// structure of the published 1D-PreU diagram; the bit growth of one bit per
// stage is this design's choice. Purely combinational.
module pre1d
  import nvca_pkg::*;
#(
  parameter int IN_W = ACT_W
) (
  input  mode_e                         mode,
  input  logic signed [4:0][IN_W-1:0]   i,
  output logic signed [7:0][IN_W:0]     o
);
  logic signed [IN_W:0] x0, x1, x2, x3, x4;

  always_comb begin
    x0 = (IN_W+1)'($signed(i[0]));
    x1 = (IN_W+1)'($signed(i[1]));
    x2 = (IN_W+1)'($signed(i[2]));
    x3 = (IN_W+1)'($signed(i[3]));
    x4 = (mode == MODE_DECONV) ? (IN_W+1)'($signed(i[4])) : '0;
    o[0] = x0 - x2;
    o[1] = x1 + x2;
    o[2] = x2 - x1;
    o[3] = x3 - x1;
    o[4] = x1 - x3;
    o[5] = x2 + x3;
    o[6] = x3 - x2;
    o[7] = x4 - x2;
  end
endmodule
