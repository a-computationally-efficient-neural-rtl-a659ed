// tb_reshuffle -- self-checking test of the Reshuffle Network (POF = 3).
// Random PostU outputs (wide signed values so that shift, ReLU and saturation
// are all exercised) are applied in both modes; the registered rows are
// compared with the reference re-ordering (Conv: rows[a][2p+b] = V_p[a][b];
// DeConv: rows[a][b] = V[a][b]) and the reference requantiser. Also checks
// the one-cycle latency of out_valid.
module tb_reshuffle;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  localparam int POF = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_CONV;
  logic [5:0] shift = '0;
  logic relu = 0, in_valid = 0, out_valid;
  out_t [POF-1:0][35:0] v = '0;
  act_t [5:0][7:0][POF-1:0] rows;

  reshuffle #(.POF(POF)) dut (.clk, .rst_n, .mode, .shift, .relu, .in_valid, .v, .out_valid, .rows);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      automatic bit dec = n[0];
      automatic int mag = 4 + ($urandom % 30);
      @(negedge clk);
      mode = dec ? MODE_DECONV : MODE_CONV;
      shift = 6'($urandom % 20); relu = $urandom % 2; in_valid = 1;
      for (int o = 0; o < POF; o++) for (int k = 0; k < 36; k++)
        v[o][k] = out_t'(rnd(-(1 << 30), (1 << 30))) >>> (30 - (mag > 30 ? 30 : mag));
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int o = 0; o < POF; o++) begin
        if (dec) begin
          for (int a = 0; a < 6; a++) for (int b = 0; b < 6; b++) begin
            checks++;
            if (int'(rows[a][b][o]) != rq(longint'(v[o][6*a+b]), int'(shift), relu)) begin
              failures++; if (failures < 10) $display("dec mismatch a=%0d b=%0d", a, b);
            end
          end
        end else begin
          for (int p = 0; p < 4; p++) for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin
            checks++;
            if (int'(rows[a][2*p+b][o]) != rq(longint'(v[o][4*p+2*a+b]), int'(shift), relu)) begin
              failures++; if (failures < 10) $display("conv mismatch p=%0d a=%0d b=%0d", p, a, b);
            end
          end
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
