// tb_sftc -- self-checking test of the SFTC datapath (sftc) together with its
// controller (sftc_ctrl), at PIF = POF = 2, two channel tiles in and out
// (4 input, 4 output channels), W_MAX = 16.
// Each round:
//   * fills all ten Input Buffer banks with random activations through the
//     DMA write port and loads pruned transform-domain weights/indices for a
//     Conv layer (8 of the 16 Winograd positions, E = 4 G W G^T of a random
//     3x3 kernel; unused chunk slots are filled with junk that must be
//     ignored) and a DeConv layer (32 of the 64 T3 positions of a random 4x4
//     kernel);
//   * runs one Conv row operation whose output rows overwrite two of its own
//     input banks, and checks every Input Buffer word (written columns equal
//     the reference, all other words unchanged);
//   * runs one DeConv row operation on five banks (including the ones just
//     written) and reads the whole written part of the Output Buffer back
//     through the gather port.
// The reference computes each patch as A^T[sum_ci E (.) (B^T X B)]A on the
// zero-padded row, then shift/ReLU/saturate, independently of the RTL layout.
// Widths are random so that partial last groups (zero-padded input columns,
// dropped output columns) occur.
module tb_sftc;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  localparam int PIF = 2, POF = 2, CT_MAX = 2, W_MAX = 16, WO_MAX = 32, WB_DEPTH = 8;
  localparam int IB_DEPTH = CT_MAX * W_MAX, OB_DEPTH = CT_MAX * WO_MAX;
  localparam int ICT = 2, OCT = 2, NCI = ICT * PIF, NCO = OCT * POF;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  sftc_cmd_t cmd = '0;
  sftc_ctl_t ctl;
  logic start = 0, busy, done, res_valid;
  logic wb_we = 0, xb_we = 0, cb_wchunk = 0;
  logic [$clog2(WB_DEPTH)-1:0] cb_waddr = '0;
  logic [$clog2(POF*PIF)-1:0] cb_wlane = '0;
  logic [NNZ/2-1:0][WGT_W-1:0] cb_wdata = '0;
  logic ib_ext_we = 0;
  logic [3:0] ib_ext_bank = '0;
  logic [$clog2(IB_DEPTH)-1:0] ib_ext_addr = '0;
  act_t [PIF-1:0] ib_ext_data = '0;
  logic ob_ext_re = 0;
  logic [2:0] ob_ext_bank = '0;
  logic [$clog2(OB_DEPTH)-1:0] ob_ext_addr = '0;
  act_t [POF-1:0] ob_ext_data;

  sftc_ctrl #(.W_MAX(W_MAX), .WO_MAX(WO_MAX)) u_ctrl (
    .clk, .rst_n, .start, .cmd, .res_valid, .busy, .done, .ctl);
  sftc #(.PIF(PIF), .POF(POF), .CT_MAX(CT_MAX), .W_MAX(W_MAX), .WO_MAX(WO_MAX),
         .WB_DEPTH(WB_DEPTH)) dut (
    .clk, .rst_n, .ctl, .res_valid, .wb_we, .xb_we, .cb_waddr, .cb_wlane, .cb_wchunk, .cb_wdata,
    .ib_ext_we, .ib_ext_bank, .ib_ext_addr, .ib_ext_data,
    .ob_ext_re, .ob_ext_bank, .ob_ext_addr, .ob_ext_data);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // shadow state
  int ib [10][IB_DEPTH][PIF];
  longint ec [NCO][NCI][16];   // Conv E, dense, pruned positions = 0
  longint ed [NCO][NCI][64];   // DeConv E

  // Input Buffer word peek (hierarchical, bank index must be constant)
  function automatic act_t [PIF-1:0] peek(int b, int a);
    case (b)
      0: return dut.u_input_buf.g_bank[0].u_bank.mem[a];
      1: return dut.u_input_buf.g_bank[1].u_bank.mem[a];
      2: return dut.u_input_buf.g_bank[2].u_bank.mem[a];
      3: return dut.u_input_buf.g_bank[3].u_bank.mem[a];
      4: return dut.u_input_buf.g_bank[4].u_bank.mem[a];
      5: return dut.u_input_buf.g_bank[5].u_bank.mem[a];
      6: return dut.u_input_buf.g_bank[6].u_bank.mem[a];
      7: return dut.u_input_buf.g_bank[7].u_bank.mem[a];
      8: return dut.u_input_buf.g_bank[8].u_bank.mem[a];
      default: return dut.u_input_buf.g_bank[9].u_bank.mem[a];
    endcase
  endfunction

  task automatic cb_write(bit isidx, int addr, int lane, int chunk, int vals[16]);
    @(negedge clk);
    wb_we = !isidx; xb_we = isidx; cb_waddr = 3'(addr); cb_wlane = 2'(lane); cb_wchunk = chunk[0];
    for (int k = 0; k < 16; k++) cb_wdata[k] = 16'(vals[k]);
    @(negedge clk); wb_we = 0; xb_we = 0;
  endtask

  // pick n distinct positions out of m
  function automatic void pick(int n, int m, ref int pos[32]);
    int perm[64];
    for (int i = 0; i < m; i++) perm[i] = i;
    for (int i = m - 1; i > 0; i--) begin
      int j = $urandom % (i + 1), t = perm[i];
      perm[i] = perm[j]; perm[j] = t;
    end
    for (int i = 0; i < n; i++) pos[i] = perm[i];
  endfunction

  task automatic load_coefs(int cbase, int dbase);
    for (int co = 0; co < NCO; co++) for (int ci = 0; ci < NCI; ci++) begin
      mat_t wm, em;
      int pos[32];
      int wv[16], xv[16];
      int addr, lane;
      addr = (co / POF) * ICT + (ci / PIF);
      lane = (co % POF) * PIF + (ci % PIF);
      // Conv
      foreach (wm[i, j]) wm[i][j] = (i < 3 && j < 3) ? rnd(-64, 64) : 0;
      em = tr_w4(0, wm);
      pick(8, 16, pos);
      for (int p = 0; p < 16; p++) ec[co][ci][p] = 0;
      for (int k = 0; k < 16; k++) begin
        if (k < 8) begin
          ec[co][ci][pos[k]] = em[pos[k] / 4][pos[k] % 4];
          wv[k] = int'(em[pos[k] / 4][pos[k] % 4]); xv[k] = pos[k];
        end else begin
          wv[k] = rnd(-30000, 30000); xv[k] = $urandom % 64;  // must be ignored
        end
      end
      cb_write(0, cbase + addr, lane, 0, wv);
      cb_write(1, cbase + addr, lane, 0, xv);
      // DeConv
      foreach (wm[i, j]) wm[i][j] = (i < 4 && j < 4) ? rnd(-64, 64) : 0;
      em = tr_w4(1, wm);
      pick(32, 64, pos);
      for (int p = 0; p < 64; p++) ed[co][ci][p] = 0;
      for (int ch = 0; ch < 2; ch++) begin
        for (int k = 0; k < 16; k++) begin
          automatic int pp = pos[16*ch + k];
          ed[co][ci][pp] = em[pp / 8][pp % 8];
          wv[k] = int'(em[pp / 8][pp % 8]); xv[k] = pp;
        end
        cb_write(0, dbase + addr, lane, ch, wv);
        cb_write(1, dbase + addr, lane, ch, xv);
      end
    end
  endtask

  function automatic longint xval(int bank, int ci, int col, int w);
    if (col >= w) return 0;
    return ib[bank][(ci / PIF) * W_MAX + col][ci % PIF];
  endfunction

  task automatic run(sftc_cmd_t c);
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      automatic int wc = rnd(5, W_MAX);
      automatic int wd = rnd(5, W_MAX);
      automatic int perm[10];
      sftc_cmd_t c;
      int newib [10][IB_DEPTH][PIF];
      int obx [6][OB_DEPTH][POF];
      // bank permutation
      for (int i = 0; i < 10; i++) perm[i] = i;
      for (int i = 9; i > 0; i--) begin
        automatic int j = $urandom % (i + 1), t = perm[i];
        perm[i] = perm[j]; perm[j] = t;
      end
      // fill Input Buffer
      for (int b = 0; b < 10; b++) for (int a = 0; a < IB_DEPTH; a++) begin
        @(negedge clk);
        ib_ext_we = 1; ib_ext_bank = 4'(b); ib_ext_addr = 5'(a);
        for (int k = 0; k < PIF; k++) begin
          ib[b][a][k] = rnd(-255, 255);
          ib_ext_data[k] = act_t'(ib[b][a][k]);
        end
      end
      @(negedge clk); ib_ext_we = 0;
      load_coefs(0, 4);

      // ---------------- Conv row op ----------------
      c = '0; c.mode = MODE_CONV; c.width = 8'(wc); c.ict = 4'(ICT); c.oct = 4'(OCT);
      c.wbase = 8'd0; c.shift = 6'(rnd(2, 9)); c.relu = $urandom % 2;
      for (int r = 0; r < 5; r++) c.in_bank[r] = 4'(perm[r]);
      c.out_bank[0] = 4'(perm[0]); c.out_bank[1] = 4'(perm[1]);  // overwrite own input rows
      newib = ib;
      for (int co = 0; co < NCO; co++) for (int x0 = 0; x0 < wc - 2; x0 += 2) begin
        mat_t u, v;
        foreach (u[i, j]) u[i][j] = 0;
        for (int ci = 0; ci < NCI; ci++) begin
          mat_t xm, t;
          foreach (xm[i, j]) xm[i][j] = (i < 4 && j < 4) ? xval(perm[i], ci, x0 + j, wc) : 0;
          t = tr_in(0, xm);
          for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) u[i][j] += ec[co][ci][4*i+j] * t[i][j];
        end
        v = tr_out(0, u);
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
          if (x0 + b < wc - 2)
            newib[perm[a]][(co / POF) * W_MAX + x0 + b][co % POF] = rq(v[a][b], int'(c.shift), c.relu);
      end
      run(c);
      ib = newib;
      for (int b = 0; b < 10; b++) for (int a = 0; a < IB_DEPTH; a++) begin
        automatic act_t [PIF-1:0] got = peek(b, a);
        for (int k = 0; k < PIF; k++) begin
          checks++;
          if (int'(got[k]) != ib[b][a][k]) begin
            failures++;
            if (failures < 10) $display("conv: bank %0d addr %0d ch %0d got %0d exp %0d", b, a, k, got[k], ib[b][a][k]);
          end
        end
      end

      // ---------------- DeConv row op ----------------
      c = '0; c.mode = MODE_DECONV; c.width = 8'(wd); c.ict = 4'(ICT); c.oct = 4'(OCT);
      c.wbase = 8'd4; c.shift = 6'(rnd(2, 9)); c.relu = $urandom % 2;
      for (int r = 0; r < 5; r++) c.in_bank[r] = 4'(perm[(r + 1) % 10]);
      for (int g = 0; g < (wd - 2 + 2) / 3; g++) for (int co = 0; co < NCO; co++) begin
        mat_t u, v;
        foreach (u[i, j]) u[i][j] = 0;
        for (int ci = 0; ci < NCI; ci++) begin
          mat_t xm, t;
          foreach (xm[i, j]) xm[i][j] = (i < 5 && j < 5) ? xval(perm[(i + 1) % 10], ci, 3*g + j, wd) : 0;
          t = tr_in(1, xm);
          for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) u[i][j] += ed[co][ci][8*i+j] * t[i][j];
        end
        v = tr_out(1, u);
        for (int a = 0; a < 6; a++) for (int b = 0; b < 6; b++)
          if (6*g + b < 2*wd - 4)
            obx[a][(co / POF) * WO_MAX + 6*g + b][co % POF] = rq(v[a][b], int'(c.shift), c.relu);
      end
      run(c);
      for (int a = 0; a < 6; a++) for (int ot = 0; ot < OCT; ot++) for (int col = 0; col < 2*wd - 4; col++) begin
        @(negedge clk); ob_ext_re = 1; ob_ext_bank = 3'(a); ob_ext_addr = 6'(ot * WO_MAX + col);
        @(negedge clk); ob_ext_re = 0;
        for (int k = 0; k < POF; k++) begin
          checks++;
          if (int'(ob_ext_data[k]) != obx[a][ot * WO_MAX + col][k]) begin
            failures++;
            if (failures < 20) $display("deconv: row %0d ot %0d col %0d ch %0d got %0d exp %0d (wd=%0d)",
                                        a, ot, col, k, ob_ext_data[k], obx[a][ot * WO_MAX + col][k], wd);
          end
        end
      end
      $display("round %0d wc=%0d wd=%0d checks=%0d failures=%0d", round, wc, wd, checks, failures);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
