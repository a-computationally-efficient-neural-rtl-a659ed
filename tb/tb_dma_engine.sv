// tb_dma_engine -- self-checking test of the DMA / Scatter / Gather engine
// (PIF = POF = 2, W_MAX = 16) on the behavioural external memory with random
// bus stalls and read latencies. Monitors record every buffer-side transfer;
// each command is checked against the external layout:
//   LOAD_WGT / LOAD_IDX: word k -> address k/(2*LANES), lane (k/2)%LANES,
//     chunk k%2, sixteen 16-bit fields;
//   LOAD_ROW: word t*W+c -> Input Buffer bank, address t*W_MAX+c, PIF
//     12-bit activations from the low bits;
//   STORE_WIN: Output Buffer word (row r, tile t, column c) -> external word
//     base + (t*6+r)*W + c, and the same stream to the DCC offset port when
//     to_dcc is set (memory then untouched);
//   LOAD_DCC / STORE_DCC: words streamed to / from the DCC ports in order.
module tb_dma_engine;
  import nvca_pkg::*;
  localparam int PIF = 2, POF = 2, W_MAX = 16, WO_MAX = 32, WB_DEPTH = 4;
  localparam int LANES = PIF * POF, IB_DEPTH = 6 * W_MAX, OB_DEPTH = 6 * WO_MAX;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  dma_cmd_t cmd = '0;
  logic bus_req_valid, bus_req_ready, bus_req_we, bus_rsp_valid;
  logic [BUS_AW-1:0] bus_req_addr;
  logic [BUS_W-1:0] bus_req_wdata, bus_rsp_rdata;
  logic wb_we, xb_we, cb_wchunk, ib_we, ob_re;
  logic [$clog2(WB_DEPTH)-1:0] cb_waddr;
  logic [$clog2(LANES)-1:0] cb_wlane;
  logic [NNZ/2-1:0][WGT_W-1:0] cb_wdata;
  logic [3:0] ib_bank;
  logic [$clog2(IB_DEPTH)-1:0] ib_addr;
  act_t [PIF-1:0] ib_data;
  logic [2:0] ob_bank;
  logic [$clog2(OB_DEPTH)-1:0] ob_addr;
  act_t [POF-1:0] ob_data = '0;
  logic dcc_in_valid, dcc_off_valid, dcc_out_ready;
  logic [BUS_W-1:0] dcc_in_data;
  act_t [POF-1:0] dcc_off_data;
  logic dcc_out_valid = 0;
  logic [BUS_W-1:0] dcc_out_data = '0;

  dma_engine #(.PIF(PIF), .POF(POF), .W_MAX(W_MAX), .WO_MAX(WO_MAX), .WB_DEPTH(WB_DEPTH)) dut (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .bus_req_valid, .bus_req_ready, .bus_req_we, .bus_req_addr, .bus_req_wdata,
    .bus_rsp_valid, .bus_rsp_rdata,
    .wb_we, .xb_we, .cb_waddr, .cb_wlane, .cb_wchunk, .cb_wdata,
    .ib_we, .ib_bank, .ib_addr, .ib_data, .ob_re, .ob_bank, .ob_addr, .ob_data,
    .dcc_in_valid, .dcc_in_data, .dcc_off_valid, .dcc_off_data,
    .dcc_out_valid, .dcc_out_data, .dcc_out_ready);
  ext_mem_model #(.DEPTH(4096)) u_mem (
    .clk, .req_valid(bus_req_valid), .req_ready(bus_req_ready), .req_we(bus_req_we),
    .req_addr(bus_req_addr), .req_wdata(bus_req_wdata), .rsp_valid(bus_rsp_valid),
    .rsp_rdata(bus_rsp_rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // Output Buffer model: registered read
  act_t [POF-1:0] ob [6][OB_DEPTH];
  always @(posedge clk) if (ob_re) ob_data <= ob[ob_bank][ob_addr];

  // transfer logs
  typedef struct { int a, b, c; logic [BUS_W-1:0] d; } xfer_t;
  xfer_t cb_log [$], ib_log [$], din_log [$], doff_log [$];
  always @(posedge clk) begin
    if (wb_we || xb_we) cb_log.push_back('{int'(cb_waddr), int'(cb_wlane), int'(cb_wchunk), BUS_W'(cb_wdata)});
    if (ib_we) ib_log.push_back('{int'(ib_bank), int'(ib_addr), 0, BUS_W'(ib_data)});
    if (dcc_in_valid) din_log.push_back('{0, 0, 0, dcc_in_data});
    if (dcc_off_valid) doff_log.push_back('{0, 0, 0, BUS_W'(dcc_off_data)});
  end

  function automatic logic [BUS_W-1:0] rword();
    logic [BUS_W-1:0] w;
    for (int i = 0; i < BUS_W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  task automatic run(dma_cmd_t c);
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    dma_cmd_t c;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      // ---- LOAD_WGT and LOAD_IDX ----
      for (int kind = 0; kind < 2; kind++) begin
        automatic int base = $urandom % 2000, len = 2 * LANES * (1 + $urandom % WB_DEPTH);
        for (int k = 0; k < len; k++) u_mem.mem[base + k] = rword();
        cb_log.delete();
        c = '0; c.kind = kind ? DMA_LOAD_IDX : DMA_LOAD_WGT; c.ext_addr = base; c.len = 16'(len);
        run(c);
        chk(cb_log.size() == len, "coef word count");
        for (int k = 0; k < len && k < cb_log.size(); k++)
          chk(cb_log[k].a == k / (2 * LANES) && cb_log[k].b == (k / 2) % LANES && cb_log[k].c == k % 2 &&
              cb_log[k].d == u_mem.mem[base + k], $sformatf("coef word %0d", k));
      end
      // ---- LOAD_ROW ----
      begin
        automatic int base = $urandom % 2000, w = 1 + $urandom % W_MAX, t = 1 + $urandom % 6;
        automatic int bank = $urandom % 10;
        for (int k = 0; k < w * t; k++) u_mem.mem[base + k] = rword();
        ib_log.delete();
        c = '0; c.kind = DMA_LOAD_ROW; c.ext_addr = base; c.width = 8'(w); c.tiles = 4'(t); c.bank = 4'(bank);
        run(c);
        chk(ib_log.size() == w * t, "row word count");
        for (int k = 0; k < w * t && k < ib_log.size(); k++)
          chk(ib_log[k].a == bank && ib_log[k].b == (k / w) * W_MAX + k % w &&
              ib_log[k].d[PIF*ACT_W-1:0] == u_mem.mem[base + k][PIF*ACT_W-1:0], $sformatf("row word %0d", k));
      end
      // ---- STORE_WIN to memory and to the DCC ----
      for (int dcc = 0; dcc < 2; dcc++) begin
        automatic int base = $urandom % 2000, w = 1 + $urandom % WO_MAX, t = 1 + $urandom % 6;
        for (int r = 0; r < 6; r++) for (int a = 0; a < OB_DEPTH; a++)
          for (int o = 0; o < POF; o++) ob[r][a][o] = act_t'($urandom);
        for (int k = 0; k < 6 * w * t; k++) u_mem.mem[base + k] = '1;
        doff_log.delete();
        c = '0; c.kind = DMA_STORE_WIN; c.ext_addr = base; c.width = 8'(w); c.tiles = 4'(t); c.to_dcc = dcc[0];
        run(c);
        if (dcc) chk(doff_log.size() == 6 * w * t, "offset word count");
        for (int tt = 0; tt < t; tt++) for (int r = 0; r < 6; r++) for (int col = 0; col < w; col++) begin
          automatic int k = (tt * 6 + r) * w + col;
          automatic logic [POF*ACT_W-1:0] exp = ob[r][tt * WO_MAX + col];
          if (dcc) chk(k < doff_log.size() && doff_log[k].d[POF*ACT_W-1:0] == exp && u_mem.mem[base + k] == '1,
                       $sformatf("dcc offset word %0d", k));
          else chk(u_mem.mem[base + k] == BUS_W'(exp), $sformatf("stored word %0d", k));
        end
      end
      // ---- LOAD_DCC ----
      begin
        automatic int base = $urandom % 2000, len = 1 + $urandom % 40;
        for (int k = 0; k < len; k++) u_mem.mem[base + k] = rword();
        din_log.delete();
        c = '0; c.kind = DMA_LOAD_DCC; c.ext_addr = base; c.len = 16'(len);
        run(c);
        chk(din_log.size() == len, "dcc in count");
        for (int k = 0; k < len && k < din_log.size(); k++)
          chk(din_log[k].d == u_mem.mem[base + k], $sformatf("dcc in word %0d", k));
      end
      // ---- STORE_DCC: the DCC offers words with random gaps ----
      begin
        automatic int base = $urandom % 2000, len = 1 + $urandom % 40;
        logic [BUS_W-1:0] src [$];
        for (int k = 0; k < len; k++) src.push_back(rword());
        c = '0; c.kind = DMA_STORE_DCC; c.ext_addr = base; c.len = 16'(len);
        @(negedge clk); cmd = c; start = 1;
        @(negedge clk); start = 0;
        fork
          begin
            automatic int n = 0;
            while (n < len) begin
              automatic bit acc;
              dcc_out_valid = ($urandom % 3 != 0); dcc_out_data = src[n];
              #4 acc = dcc_out_valid && dcc_out_ready;   // sampled just before the edge
              @(negedge clk);
              if (acc) n++;
            end
            dcc_out_valid = 0;
          end
        join_none
        while (!done) @(negedge clk);
        wait fork;
        repeat (2) @(negedge clk);
        for (int k = 0; k < len; k++) chk(u_mem.mem[base + k] == src[k], $sformatf("dcc out word %0d", k));
      end
      $display("rep %0d checks=%0d failures=%0d", rep, checks, failures);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
