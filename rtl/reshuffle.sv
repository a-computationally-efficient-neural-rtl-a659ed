// reshuffle -- Reshuffle Network: PostU patches -> row-ordered output words.
//
// Takes the POF post-transformed patches of one beat and reorders them into
// the row/column order in which the results are stored: a word per output
// pixel holding the POF channels. Conv: four 2x2 patches side by side give
// 2 rows x 8 columns (rows[a][2p+b] = V_p[a][b]). DeConv: one 6x6 patch gives
// 6 rows x 6 columns. Each value is requantised to a 12-bit activation
// (arithmetic shift right by `shift`, optional ReLU, saturation); the paper
// does not describe requantisation, so that step is this design's own.
// Timing: registered, out_valid one cycle after in_valid; the result is held
// until the next in_valid.
module reshuffle
  import nvca_pkg::*;
#(
  parameter int POF = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  mode_e                       mode,
  input  logic [5:0]                  shift,
  input  logic                        relu,
  input  logic                        in_valid,
  input  out_t [POF-1:0][35:0]        v,
  output logic                        out_valid,
  output act_t [5:0][7:0][POF-1:0]    rows
);
  act_t [5:0][7:0][POF-1:0] rows_d;

  always_comb begin
    rows_d = '0;
    for (int o = 0; o < POF; o++) begin
      if (mode == MODE_DECONV) begin
        for (int a = 0; a < 6; a++)
          for (int b = 0; b < 6; b++)
            rows_d[a][b][o] = requant(v[o][6*a+b], shift, relu);
      end else begin
        for (int p = 0; p < 4; p++)
          for (int a = 0; a < 2; a++)
            for (int b = 0; b < 2; b++)
              rows_d[a][2*p+b][o] = requant(v[o][4*p+2*a+b], shift, relu);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rows      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) rows <= rows_d;
    end
  end
endmodule
