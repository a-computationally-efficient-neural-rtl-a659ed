// tb_scu -- self-checking test of the SCU: random inputs H[0..63], indices and
// 16-bit weights; every product must be H[S[j]] * I[j].
module tb_scu;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  int checks = 0, failures = 0;
  tin_t  [63:0] h;
  idx_t  [31:0] idx;
  wgt_t  [31:0] w;
  prod_t [31:0] m;
  longint hv [64], wv [32];
  int iv [32];

  scu dut (.h, .idx, .w, .m);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < 64; k++) begin
        hv[k] = (t == 0) ? -8192 : rnd(-8192, 8191); h[k] = tin_t'(hv[k]);
      end
      for (int j = 0; j < 32; j++) begin
        iv[j] = rnd(0, 63); idx[j] = idx_t'(iv[j]);
        wv[j] = (t == 0) ? -32768 : rnd(-32768, 32767); w[j] = wgt_t'(wv[j]);
      end
      #1;
      for (int j = 0; j < 32; j++) begin
        checks++;
        if (longint'($signed(m[j])) != hv[iv[j]] * wv[j]) begin
          failures++;
          if (failures < 10) $display("mismatch t=%0d j=%0d", t, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
