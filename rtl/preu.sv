// preu -- Pre-processing Unit: 2-D input transform Y = B^T X B for one input channel.
//
// Built, as in the published PreU diagram, from two columns of sixteen 1D-PreUs
// (pre1d, 32 in all) joined by a data router. The first column transforms
// rows, the router transposes, the second column transforms columns.
//   DeConv (T3(6x6,4x4)): one 5x5 patch in x[0..4][0..4]; stage 1 uses
//     1D-PreU[0..4], stage 2 uses 1D-PreU[0..7]; y[8*i+j] = Y[i][j], 8x8.
//   Conv (F(2x2,3x3)): four 4x4 patches, patch p in rows x[4p..4p+3][0..3];
//     all sixteen units of both stages are used; y[16*p+4*i+j] = Y_p[i][j].
// The four Conv patches are the four horizontally adjacent 2x2 output tiles
// that the SFTC computes together (this design's choice of which four patches).
// Timing: one register stage, out_valid follows in_valid by one cycle; a new
// patch can be accepted every cycle.
module preu
  import nvca_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  mode_e                 mode,
  input  logic                  in_valid,
  input  act_t [15:0][4:0]      x,
  output logic                  out_valid,
  output tin_t [NPOS-1:0]       y
);
  localparam int S1_W = ACT_W + 1;

  logic signed [15:0][4:0][ACT_W-1:0] s1_in;
  logic signed [15:0][7:0][S1_W-1:0]  s1_out;
  logic signed [15:0][4:0][S1_W-1:0]  s2_in;
  logic signed [15:0][7:0][TIN_W-1:0] s2_out;
  tin_t [NPOS-1:0]                    y_d;

  // Stage-1 input multiplexers: DeConv uses rows 0..4 with five taps, Conv all
  // sixteen rows with four taps (tap 4 forced to zero).
  always_comb begin
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 5; c++)
        s1_in[r][c] = (mode == MODE_DECONV) ? ((r < 5) ? x[r][c] : '0)
                                            : ((c < 4) ? x[r][c] : '0);
  end

  for (genvar r = 0; r < 16; r++) begin : g_s1
    pre1d #(.IN_W(ACT_W)) u_row (.mode(mode), .i(s1_in[r]), .o(s1_out[r]));
  end

  // Data router: transpose the row results into column vectors.
  // Conv outputs of a 1D-PreU sit on o0, o1, o2 and o4.
  localparam int CSEL [4] = '{0, 1, 2, 4};
  always_comb begin
    s2_in = '0;
    if (mode == MODE_DECONV) begin
      for (int j = 0; j < 8; j++)
        for (int r = 0; r < 5; r++)
          s2_in[j][r] = s1_out[r][j];
    end else begin
      for (int p = 0; p < 4; p++)
        for (int j = 0; j < 4; j++)
          for (int r = 0; r < 4; r++)
            s2_in[4*p+j][r] = s1_out[4*p+r][CSEL[j]];
    end
  end

  for (genvar u = 0; u < 16; u++) begin : g_s2
    pre1d #(.IN_W(S1_W)) u_col (.mode(mode), .i(s2_in[u]), .o(s2_out[u]));
  end

  // Output demultiplexers: Yd (8x8) or Yc (four 4x4) into the 64-entry vector.
  always_comb begin
    y_d = '0;
    if (mode == MODE_DECONV) begin
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++)
          y_d[8*i+j] = s2_out[j][i];
    end else begin
      for (int p = 0; p < 4; p++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            y_d[16*p+4*i+j] = s2_out[4*p+j][CSEL[i]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_d;
    end
  end
endmodule
