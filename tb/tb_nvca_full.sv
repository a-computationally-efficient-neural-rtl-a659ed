// tb_nvca_full -- full-size end-to-end test: nvca_top at its default
// parameters (12 x 12 SCUs with 32 multipliers each, 10-bank Input Buffer of
// 6 tiles x 64 columns, 27-word Weight/Index Buffers) runs a complete
// Conv(36) -> Conv(36) -> DeConv(36) chain, HA = 12 rows of width WA = 10,
// with every coefficient-buffer word used. Same host model, reference chain
// and mechanism counters as tb_nvca_top (which runs the small configuration):
// the output map D in external memory is compared word by word with
//   D = Q(DeConv(Q(Conv2(Q(Conv1(A)))))),
// each layer evaluated as A^T[sum_ci E (.) (B^T X B)]A with the same pruned
// transform-domain kernels, and each chain mechanism must occur.
// The 4608-multiplier array makes the C++ model large: building this bench
// with verilator takes far longer than running it: about 13 minutes of
// C++ compilation on one core, then about 15 seconds of simulation.
module tb_nvca_full;
  localparam bit FULL = 1;
  import nvca_pkg::*;
  import nvca_ref_pkg::*;
  localparam int PIF = FULL ? 12 : 2, POF = PIF;
  localparam int T = FULL ? 3 : 2, NCH = T * PIF, LANES = PIF * POF;
  localparam int STEPS = 3 * T * T;               // coefficient-buffer words used
  localparam int COEF_WORDS = STEPS * LANES * 2;
  localparam int WGT_BASE = 0, IDX_BASE = COEF_WORDS;
  localparam int A_BASE = 2 * COEF_WORDS, D_BASE = A_BASE + 16384;
  localparam int MEM_DEPTH = 65536;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic bus_req_valid, bus_req_ready, bus_req_we, bus_rsp_valid;
  logic [BUS_AW-1:0] bus_req_addr;
  logic [BUS_W-1:0] bus_req_wdata, bus_rsp_rdata;
  logic dcc_in_valid, dcc_off_valid, dcc_out_ready, op_fire;
  logic [BUS_W-1:0] dcc_in_data;
  act_t [POF-1:0] dcc_off_data;
  chain_op_t op_cur;
  int n_zero = 0, n_coef = 0;

  nvca_top dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .bus_req_valid, .bus_req_ready, .bus_req_we, .bus_req_addr, .bus_req_wdata,
    .bus_rsp_valid, .bus_rsp_rdata,
    .dcc_in_valid, .dcc_in_data, .dcc_off_valid, .dcc_off_data,
    .dcc_out_valid(1'b0), .dcc_out_data('0), .dcc_out_ready, .op_fire, .op_cur);
  always @(posedge clk) begin
    if (dut.ctl.fifo_push && dut.ctl.fifo_push_zero) n_zero++;
    if (dut.wb_we || dut.xb_we) n_coef++;
  end

  ext_mem_model #(.DEPTH(MEM_DEPTH)) u_mem (
    .clk, .req_valid(bus_req_valid), .req_ready(bus_req_ready), .req_we(bus_req_we),
    .req_addr(bus_req_addr), .req_wdata(bus_req_wdata), .rsp_valid(bus_rsp_valid),
    .rsp_rdata(bus_rsp_rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (FULL ? 3000000 : 2000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_load = 0, n_c1 = 0, n_c2 = 0, n_dec = 0, n_st = 0, n_reload = 0, n_selfw = 0, n_sw = 0, n_stall = 0;
  bit last_dec = 0, any_sftc = 0;
  always @(posedge clk) begin
    if (bus_req_valid && !bus_req_ready) n_stall++;
    if (op_fire) begin
      case (op_cur.kind)
        OP_LOAD:  begin n_load++; if (op_cur.row >= 10) n_reload++; end
        OP_STORE: n_st++;
        default: begin
          if (op_cur.kind == OP_CONV1) n_c1++;
          else if (op_cur.kind == OP_CONV2) n_c2++;
          else n_dec++;
          if (op_cur.kind != OP_DECONV)
            for (int k = 0; k < 2; k++) for (int j = 0; j < 4; j++)
              if (op_cur.out_bank[k] == op_cur.in_bank[j]) n_selfw++;
          if (any_sftc && (last_dec != (op_cur.kind == OP_DECONV))) n_sw++;
          any_sftc = 1; last_dec = (op_cur.kind == OP_DECONV);
        end
      endcase
    end
  end

  // ---------------- reference model ----------------
  longint E [];          // [layer][co][ci][64]
  int lay_shift [3], lay_relu [3];

  function automatic int eix(int l, int co, int ci, int p);
    return ((l * NCH + co) * NCH + ci) * 64 + p;
  endfunction

  // Conv layer: X is h x w x NCH (flat [r][c][ch]) -> (h-2) x (w-2)
  function automatic void conv_ref(int l, int h, int w, const ref int x[], ref int y[]);
    int ho = h - 2, wo = w - 2;
    y = new[ho * wo * NCH];
    for (int p = 0; p < ho / 2; p++) for (int co = 0; co < NCH; co++)
      for (int x0 = 0; x0 < wo; x0 += 2) begin
        mat_t u, v;
        foreach (u[i, j]) u[i][j] = 0;
        for (int ci = 0; ci < NCH; ci++) begin
          mat_t xm, t;
          foreach (xm[i, j]) xm[i][j] = (i < 4 && j < 4 && x0 + j < w) ? x[((2*p + i) * w + x0 + j) * NCH + ci] : 0;
          t = tr_in(0, xm);
          for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) u[i][j] += E[eix(l, co, ci, 4*i + j)] * t[i][j];
        end
        v = tr_out(0, u);
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
          if (x0 + b < wo) y[((2*p + a) * wo + x0 + b) * NCH + co] = rq(v[a][b], lay_shift[l], lay_relu[l][0]);
      end
  endfunction

  // DeConv layer: X is h x w -> windows q < (h-2)/3, 6 rows each, 2w-4 columns
  function automatic void deconv_ref(int h, int w, const ref int x[], ref int y[]);
    int nq = (h - 2) / 3, wo = 2 * w - 4;
    y = new[6 * nq * wo * NCH];
    for (int q = 0; q < nq; q++) for (int g = 0; 6 * g < wo; g++) for (int co = 0; co < NCH; co++) begin
      mat_t u, v;
      foreach (u[i, j]) u[i][j] = 0;
      for (int ci = 0; ci < NCH; ci++) begin
        mat_t xm, t;
        foreach (xm[i, j]) xm[i][j] = (i < 5 && j < 5 && 3*g + j < w) ? x[((3*q + i) * w + 3*g + j) * NCH + ci] : 0;
        t = tr_in(1, xm);
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) u[i][j] += E[eix(2, co, ci, 8*i + j)] * t[i][j];
      end
      v = tr_out(1, u);
      for (int a = 0; a < 6; a++) for (int b = 0; b < 6; b++)
        if (6*g + b < wo) y[((6*q + a) * wo + 6*g + b) * NCH + co] = rq(v[a][b], lay_shift[2], lay_relu[2][0]);
    end
  endfunction

  task automatic wr(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // build pruned kernels and write the coefficient words to external memory
  task automatic make_coefs();
    int perm [64];
    E = new[3 * NCH * NCH * 64];
    foreach (E[i]) E[i] = 0;
    for (int l = 0; l < 3; l++) for (int co = 0; co < NCH; co++) for (int ci = 0; ci < NCH; ci++) begin
      automatic bit dec = (l == 2);
      automatic int k = dec ? 4 : 3, npos = dec ? 64 : 16, nnz = dec ? 32 : 8, mu = dec ? 8 : 4;
      automatic int step = l * T * T + (co / POF) * T + ci / PIF, lane = (co % POF) * PIF + ci % PIF;
      mat_t wm, em;
      foreach (wm[i, j]) wm[i][j] = (i < k && j < k) ? rnd(-40, 40) : 0;
      em = tr_w4(dec, wm);
      for (int i = 0; i < npos; i++) perm[i] = i;
      for (int i = npos - 1; i > 0; i--) begin
        automatic int j = $urandom % (i + 1), tt = perm[i];
        perm[i] = perm[j]; perm[j] = tt;
      end
      for (int ch = 0; ch < 2; ch++) begin
        logic [BUS_W-1:0] ww, xw;
        ww = '0; xw = '0;
        for (int e = 0; e < 16; e++) begin
          automatic int s = 16 * ch + e;
          if (s < nnz) begin
            automatic int p = perm[s];
            E[eix(l, co, ci, p)] = em[p / mu][p % mu];
            ww[e*16 +: 16] = 16'(em[p / mu][p % mu]);
            xw[e*16 +: 16] = 16'(p);
          end else begin
            ww[e*16 +: 16] = 16'($urandom);          // unused slots: junk
            xw[e*16 +: 16] = 16'($urandom % 64);
          end
        end
        u_mem.mem[WGT_BASE + (step * LANES + lane) * 2 + ch] = ww;
        u_mem.mem[IDX_BASE + (step * LANES + lane) * 2 + ch] = xw;
      end
    end
  endtask

  task automatic run_chain(int ha, int wa);
    int a [], b [], c [], d [];
    int wd = 2 * (wa - 4) - 4, nq = (ha - 6) / 3;
    bit fin = 0;
    // input map
    a = new[ha * wa * NCH];
    foreach (a[i]) a[i] = rnd(-200, 200);
    for (int i = 0; i < ha; i++) for (int t = 0; t < T; t++) for (int col = 0; col < wa; col++) begin
      logic [BUS_W-1:0] w;
      w = '0;
      for (int p = 0; p < PIF; p++) w[p*ACT_W +: ACT_W] = ACT_W'(a[(i * wa + col) * NCH + t * PIF + p]);
      u_mem.mem[A_BASE + i * wa * T + t * wa + col] = w;
    end
    for (int k = 0; k < 6 * nq * wd * T; k++) u_mem.mem[D_BASE + k] = '1;
    for (int l = 0; l < 3; l++) begin
      lay_shift[l] = FULL ? 9 : 7; lay_relu[l] = (l < 2) ? 1 : ($urandom % 2);
    end
    conv_ref(0, ha, wa, a, b);
    conv_ref(1, ha - 2, wa - 2, b, c);
    deconv_ref(ha - 4, wa - 4, c, d);
    // program and start
    wr(1, A_BASE); wr(2, D_BASE); wr(3, WGT_BASE); wr(4, IDX_BASE); wr(5, COEF_WORDS);
    wr(6, ha); wr(7, wa); wr(11, 0);
    for (int l = 0; l < 3; l++)
      wr(8 + l, T | (T << 4) | ((l * T * T) << 8) | (lay_shift[l] << 16) | (lay_relu[l] << 24));
    wr(0, 1);
    while (!fin) begin
      @(negedge clk); cfg_addr = 4'd0;
      #1 if (!cfg_rdata[0]) fin = 1;
    end
    chk(cfg_rdata[1] && !cfg_rdata[2], "STATUS done without stall");
    for (int q = 0; q < nq; q++) for (int t = 0; t < T; t++) for (int r = 0; r < 6; r++)
      for (int col = 0; col < wd; col++) begin
        automatic logic [BUS_W-1:0] w = u_mem.mem[D_BASE + q * 6 * wd * T + (t * 6 + r) * wd + col];
        for (int o = 0; o < POF; o++) begin
          automatic int got = int'(act_t'(w[o*ACT_W +: ACT_W]));
          automatic int exp = d[((6*q + r) * wd + col) * NCH + t * POF + o];
          checks++;
          if (got != exp) begin
            failures++;
            if (failures < 20) $display("D row %0d col %0d ch %0d: got %0d expected %0d", 6*q + r, col, t * POF + o, got, exp);
          end
        end
      end
    $display("chain ha=%0d wa=%0d done at %0t: checks=%0d failures=%0d", ha, wa, $time, checks, failures);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    make_coefs();
    if (FULL) run_chain(12, 10);
    else begin
      run_chain(18, 13);
      run_chain(12, 9);
    end
    $display("mechanisms: load=%0d conv1=%0d conv2=%0d deconv=%0d store=%0d bank_reuse=%0d self_overwrite=%0d mode_switch=%0d zero_pad=%0d coef_words=%0d bus_stalls=%0d",
             n_load, n_c1, n_c2, n_dec, n_st, n_reload, n_selfw, n_sw, n_zero, n_coef, n_stall);
    chk(n_load > 0, "no row load");      chk(n_c1 > 0, "no Conv1");
    chk(n_c2 > 0, "no Conv2");           chk(n_dec > 0, "no DeConv");
    chk(n_st > 0, "no store");           chk(n_reload > 0, "no bank reuse");
    chk(n_selfw > 0, "no Conv self-overwrite"); chk(n_sw > 0, "no mode switch");
    chk(n_zero > 0, "no zero padding");  chk(n_coef > 0, "no coefficient load");
    chk(n_stall > 0, "no bus stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
