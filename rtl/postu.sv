// postu -- Post-processing Unit: 2-D output transform V = A^T U A for one output channel.
//
// Built, as in the published PostU diagram, from sixteen first-stage and eight
// second-stage 1D-PostUs (post1d, 24 in all) joined by a data router.
//   DeConv: U is 8x8 (u[8*i+j]); stage 1 uses 1D-PostU[0..7] on the rows,
//     stage 2 uses 1D-PostU[0..5] on the six resulting columns;
//     v[6*a+b] = V[a][b], a 6x6 output patch.
//   Conv: U holds four 4x4 patches (u[16*p+4*i+j]); stage 1 uses all sixteen
//     units (one per patch row), stage 2 all eight (two columns per patch);
//     v[4*p+2*a+b] = V_p[a][b], four 2x2 output patches.
// 1D-PostU conv results appear on outputs o0 and o2.
// Timing: one register stage, out_valid follows in_valid by one cycle.
module postu
  import nvca_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  mode_e                 mode,
  input  logic                  in_valid,
  input  acc_t [NPOS-1:0]       u,
  output logic                  out_valid,
  output out_t [35:0]           v
);
  localparam int S1_W = ACC_W + 2;

  logic signed [15:0][7:0][ACC_W-1:0] s1_in;
  logic signed [15:0][5:0][S1_W-1:0]  s1_out;
  logic signed [7:0][7:0][S1_W-1:0]   s2_in;
  logic signed [7:0][5:0][OUT_W-1:0]  s2_out;
  out_t [35:0]                        v_d;

  always_comb begin
    s1_in = '0;
    if (mode == MODE_DECONV) begin
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++)
          s1_in[r][c] = u[8*r+c];
    end else begin
      for (int p = 0; p < 4; p++)
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 4; c++)
            s1_in[4*p+r][c] = u[16*p+4*r+c];
    end
  end

  for (genvar r = 0; r < 16; r++) begin : g_s1
    post1d #(.IN_W(ACC_W)) u_row (.mode(mode), .i(s1_in[r]), .o(s1_out[r]));
  end

  // Data router. Conv results of a 1D-PostU are on o0 and o2.
  always_comb begin
    s2_in = '0;
    if (mode == MODE_DECONV) begin
      for (int j = 0; j < 6; j++)
        for (int r = 0; r < 8; r++)
          s2_in[j][r] = s1_out[r][j];
    end else begin
      for (int p = 0; p < 4; p++)
        for (int b = 0; b < 2; b++)
          for (int r = 0; r < 4; r++)
            s2_in[2*p+b][r] = s1_out[4*p+r][2*b];
    end
  end

  for (genvar u2 = 0; u2 < 8; u2++) begin : g_s2
    post1d #(.IN_W(S1_W)) u_col (.mode(mode), .i(s2_in[u2]), .o(s2_out[u2]));
  end

  always_comb begin
    v_d = '0;
    if (mode == MODE_DECONV) begin
      for (int a = 0; a < 6; a++)
        for (int b = 0; b < 6; b++)
          v_d[6*a+b] = s2_out[b][a];
    end else begin
      for (int p = 0; p < 4; p++)
        for (int a = 0; a < 2; a++)
          for (int b = 0; b < 2; b++)
            v_d[4*p+2*a+b] = s2_out[2*p+b][2*a];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      v         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) v <= v_d;
    end
  end
endmodule
