// tb_pre1d -- self-checking test of one 1D-PreU against the B^T matrices.
// Random 12-bit inputs in both modes; Conv results are read from o0,o1,o2,o4.
module tb_pre1d;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  int checks = 0, failures = 0;
  mode_e mode;
  logic signed [4:0][11:0] i;
  logic signed [7:0][12:0] o;
  localparam int CPOS [4] = '{0, 1, 2, 4};

  pre1d #(.IN_W(12)) dut (.mode, .i, .o);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      automatic bit dec = t[0];
      int x [5];
      mode = dec ? MODE_DECONV : MODE_CONV;
      for (int k = 0; k < 5; k++) begin
        x[k] = (t < 4) ? ((k % 2) ? 2047 : -2048) : rnd(-2048, 2047);
        i[k] = 12'(x[k]);
      end
      #1;
      for (int r = 0; r < (dec ? 8 : 4); r++) begin
        automatic int exp = 0;
        int pos, got;
        for (int k = 0; k < (dec ? 5 : 4); k++) exp += bt(dec, r, k) * x[k];
        pos = dec ? r : CPOS[r];
        got = int'($signed(o[pos]));
        checks++;
        if (got != exp) begin
          failures++;
          if (failures < 10) $display("mismatch mode=%0d row=%0d got=%0d exp=%0d", dec, r, got, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
