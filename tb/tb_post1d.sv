// tb_post1d -- self-checking test of one 1D-PostU against the A^T matrices.
// Random 40-bit inputs in both modes; Conv results are read from o0 and o2.
module tb_post1d;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  int checks = 0, failures = 0;
  mode_e mode;
  logic signed [7:0][39:0] i;
  logic signed [5:0][41:0] o;
  localparam int CPOS [2] = '{0, 2};

  post1d #(.IN_W(40)) dut (.mode, .i, .o);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      automatic bit dec = t[0];
      longint x [8];
      mode = dec ? MODE_DECONV : MODE_CONV;
      for (int k = 0; k < 8; k++) begin
        x[k] = longint'($signed($urandom)) * ((t % 3 == 0) ? 64 : 1);
        i[k] = 40'(x[k]);
      end
      #1;
      for (int r = 0; r < (dec ? 6 : 2); r++) begin
        automatic longint exp = 0;
        int pos;
        longint got;
        for (int k = 0; k < (dec ? 8 : 4); k++) exp += at(dec, r, k) * x[k];
        pos = dec ? r : CPOS[r];
        got = longint'($signed(o[pos]));
        checks++;
        if (got != exp) begin
          failures++;
          if (failures < 10) $display("mismatch mode=%0d row=%0d", dec, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
