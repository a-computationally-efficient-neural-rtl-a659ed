// tb_scu_array -- self-checking test of the united SCU array (PIF = POF = 3).
// Runs groups of 1..4 input-channel tiles (first ... last beats) in both
// modes with random inputs, random unique indices and weights, and compares
// the psum output with a dense reference: for each output channel and
// position, the sum over tiles and input channels of input * weight, where
// Conv-mode kernels (8 non-zeros, 4-bit positions) act on all four patches.
// Also checks out_valid timing: two cycles after the last beat.
module tb_scu_array;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  localparam int PIF = 3, POF = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic in_valid = 0, first = 0, last = 0, out_valid;
  tin_t [PIF-1:0][63:0] h;
  wgt_t [POF-1:0][PIF-1:0][31:0] w;
  idx_t [POF-1:0][PIF-1:0][31:0] idx;
  acc_t [POF-1:0][63:0] u;
  longint expv [POF][64];

  scu_array #(.PIF(PIF), .POF(POF)) dut (.clk, .rst_n, .mode, .in_valid, .first, .last,
    .h, .w, .idx, .out_valid, .u);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    h = '0; w = '0; idx = '0; mode = MODE_CONV;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 60; g++) begin
      automatic bit dec = g[0];
      automatic int ntiles = 1 + (g % 4);
      foreach (expv[o, k]) expv[o][k] = 0;
      for (int t = 0; t < ntiles; t++) begin
        @(negedge clk);
        mode = dec ? MODE_DECONV : MODE_CONV;
        for (int c = 0; c < PIF; c++) for (int k = 0; k < 64; k++) h[c][k] = tin_t'(rnd(-8192, 8191));
        for (int o = 0; o < POF; o++) for (int c = 0; c < PIF; c++) begin
          int perm [64];
          for (int k = 0; k < 64; k++) perm[k] = k;
          perm.shuffle();
          for (int j = 0; j < 32; j++) begin
            w[o][c][j]   = wgt_t'(rnd(-32768, 32767));
            idx[o][c][j] = dec ? idx_t'(perm[j]) : idx_t'(perm[j] % 16);
          end
          if (!dec) begin   // unique 4-bit positions for the 8 Conv non-zeros
            int p16 [16];
            for (int k = 0; k < 16; k++) p16[k] = k;
            p16.shuffle();
            for (int j = 0; j < 8; j++) idx[o][c][j] = idx_t'(p16[j]);
          end
          if (dec) begin
            for (int j = 0; j < 32; j++)
              expv[o][idx[o][c][j]] += longint'($signed(h[c][idx[o][c][j]])) * longint'($signed(w[o][c][j]));
          end else begin
            for (int p = 0; p < 4; p++) for (int j = 0; j < 8; j++) begin
              automatic int pos = 16*p + int'(idx[o][c][j][3:0]);
              expv[o][pos] += longint'($signed(h[c][pos])) * longint'($signed(w[o][c][j]));
            end
          end
        end
        in_valid = 1; first = (t == 0); last = (t == ntiles - 1);
      end
      @(negedge clk); in_valid = 0; first = 0; last = 0;
      checks++; if (out_valid) failures++;       // not yet: two-cycle latency
      @(negedge clk);
      checks++; if (!out_valid) begin failures++; $display("out_valid missing g=%0d", g); end
      for (int o = 0; o < POF; o++) for (int k = 0; k < 64; k++) begin
        checks++;
        if (longint'($signed(u[o][k])) != expv[o][k]) begin
          failures++;
          if (failures < 10) $display("mismatch g=%0d o=%0d k=%0d got=%0d exp=%0d", g, o, k, $signed(u[o][k]), expv[o][k]);
        end
      end
      @(negedge clk);
      checks++; if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
