// tb_postu -- self-checking test of the PostU (2-D output transform).
// Part 1: random 40-bit U in both modes, compared with V = A^T U A.
// Part 2: end-to-end check of the fast algorithms: U = E4 .* (B^T X B) with
// E4 = 4 G W G^T from random spatial kernels W; the PostU output must equal
// 4 x the direct 3x3 correlation (Conv) or the direct stride-2 transposed
// convolution (DeConv) of X with W.
module tb_postu;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic in_valid = 0, out_valid;
  acc_t [63:0] u;
  out_t [35:0] v;

  postu dut (.clk, .rst_n, .mode, .in_valid, .u, .out_valid, .v);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mat_t um [4], vm [4], xm, wm, em, ym;
    u = '0; mode = MODE_CONV;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic bit dec = t[0];
      automatic bit direct = (t >= 200);
      @(negedge clk);
      mode = dec ? MODE_DECONV : MODE_CONV;
      u = '0;
      for (int p = 0; p < (dec ? 1 : 4); p++) begin
        foreach (um[p][i, j]) um[p][i][j] = 0;
        if (direct) begin
          foreach (xm[i, j]) xm[i][j] = rnd(-2048, 2047);
          foreach (wm[i, j]) wm[i][j] = rnd(-300, 300);
          em = tr_w4(dec, wm);
          ym = tr_in(dec, xm);
          for (int i = 0; i < (dec ? 8 : 4); i++) for (int j = 0; j < (dec ? 8 : 4); j++)
            um[p][i][j] = em[i][j] * ym[i][j];
          vm[p] = dec ? deconv_direct(xm, wm) : conv_direct(xm, wm);
          foreach (vm[p][i, j]) vm[p][i][j] *= 4;
        end else begin
          for (int i = 0; i < (dec ? 8 : 4); i++) for (int j = 0; j < (dec ? 8 : 4); j++)
            um[p][i][j] = longint'($signed($urandom)) * rnd(1, 64);
          vm[p] = tr_out(dec, um[p]);
        end
        for (int i = 0; i < (dec ? 8 : 4); i++) for (int j = 0; j < (dec ? 8 : 4); j++)
          u[dec ? 8*i+j : 16*p+4*i+j] = acc_t'(um[p][i][j]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int k = 0; k < (dec ? 36 : 16); k++) begin
        automatic longint exp = dec ? vm[0][k/6][k%6] : vm[k/4][(k%4)/2][k%2];
        checks++;
        if (longint'($signed(v[k])) != exp) begin
          failures++;
          if (failures < 10) $display("mismatch t=%0d k=%0d got=%0d exp=%0d", t, k, $signed(v[k]), exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
