// tb_preu -- self-checking test of the PreU (2-D input transform).
// Random 12-bit patches in both modes (including full-scale extremes); the
// 64 outputs are compared with Y = B^T X B from the reference matrices, one
// cycle after the input (registered output).
module tb_preu;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic in_valid = 0, out_valid;
  act_t [15:0][4:0] x;
  tin_t [63:0] y;

  preu dut (.clk, .rst_n, .mode, .in_valid, .x, .out_valid, .y);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mat_t xm [4], ym [4];
    x = '0; mode = MODE_CONV;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic bit dec = t[0];
      @(negedge clk);
      mode = dec ? MODE_DECONV : MODE_CONV;
      x = '0;
      for (int p = 0; p < 4; p++) foreach (xm[p][i, j]) xm[p][i][j] = 0;
      for (int p = 0; p < (dec ? 1 : 4); p++)
        for (int i = 0; i < (dec ? 5 : 4); i++)
          for (int j = 0; j < (dec ? 5 : 4); j++) begin
            xm[p][i][j] = (t < 4) ? (((i + j) % 2) ? 2047 : -2048) : rnd(-2048, 2047);
            x[dec ? i : 4*p+i][j] = act_t'(xm[p][i][j]);
          end
      for (int p = 0; p < 4; p++) ym[p] = tr_in(dec, xm[p]);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int k = 0; k < 64; k++) begin
        automatic longint exp = dec ? ym[0][k/8][k%8] : ym[k/16][(k%16)/4][k%4];
        checks++;
        if (longint'($signed(y[k])) != exp) begin
          failures++;
          if (failures < 10) $display("mismatch t=%0d k=%0d got=%0d exp=%0d", t, k, $signed(y[k]), exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
