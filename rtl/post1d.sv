// post1d -- one 1D-PostU: the 1-D output transform v = A^T u of the fast algorithms.
//
// In DeConv mode it maps eight inputs to the six outputs of A^T_DeConv:
//   o0=i0+i1+i2  o1=i4+i5+i6  o2=i1-i2  o3=i5-i6  o4=i1+i2+i3  o5=i5+i6+i7.
// In Conv mode the Winograd F(2x2,3x3) matrix A^T_Conv (u0+u1+u2, u1-u2-u3) is
// produced on o0 and o2: a multiplexer feeds i3 (Conv) or 0 (DeConv) into the
// subtraction of o2, as in the published 1D-PostU diagram. The other outputs
// are don't-care in Conv mode. Output width grows by two bits (sums of three
// terms). Purely combinational.
module post1d
  import nvca_pkg::*;
#(
  parameter int IN_W = ACC_W
) (
  input  mode_e                         mode,
  input  logic signed [7:0][IN_W-1:0]   i,
  output logic signed [5:0][IN_W+1:0]   o
);
  logic signed [IN_W+1:0] x [8];
  logic signed [IN_W+1:0] m3;

  always_comb begin
    for (int k = 0; k < 8; k++) x[k] = (IN_W+2)'($signed(i[k]));
    m3 = (mode == MODE_CONV) ? x[3] : '0;
    o[0] = x[0] + x[1] + x[2];
    o[1] = x[4] + x[5] + x[6];
    o[2] = x[1] - x[2] - m3;
    o[3] = x[5] - x[6];
    o[4] = x[1] + x[2] + x[3];
    o[5] = x[5] + x[6] + x[7];
  end
endmodule
