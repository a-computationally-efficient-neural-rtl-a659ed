// tb_top_ctrl -- self-checking test of the global/top controller.
// Behavioural DMA and SFTC controllers acknowledge each command after a
// random delay. The testbench programs the registers over the control bus,
// reads some back, starts the chain and checks every command issued:
//   * first a Weight Buffer load then an Index Buffer load (base, length);
//   * each A-row load: address A_BASE + i*WA*T0, bank i % 10, width WA,
//     T0 tiles, rows in order;
//   * Conv1 / Conv2 / DeConv: mode, widths WA, WA-2, WA-4, and the tiles,
//     buffer base, shift and ReLU fields of the matching layer register;
//   * each D-window store: address D_BASE + q*6*WD*T3 (WD = 2(WA-4)-4),
//     width WD, T3 tiles, TO_DCC flag;
//   * never a DMA and an SFTC command outstanding together;
//   * op counts (HA loads, (HA-2)/2, (HA-4)/2 Conv pairs, (HA-6)/3 windows
//     and stores) and STATUS busy/done.
module tb_top_ctrl;
  import nvca_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic dma_start, sftc_start, op_fire;
  logic dma_done = 0, sftc_done = 0;
  dma_cmd_t dma_cmd;
  sftc_cmd_t sftc_cmd;
  chain_op_t op_cur;

  top_ctrl dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .dma_start, .dma_cmd, .dma_done, .sftc_start, .sftc_cmd, .sftc_done, .op_fire, .op_cur);
  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("watchdog state=%0d cs=%0d", dut.state, dut.u_chain.state); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic wr(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      automatic int ha = (rep == 0) ? 24 : (rep == 1) ? 12 : 30;
      automatic int wa = 6 + $urandom % 40;
      automatic int abase = $urandom % 10000, dbase = 20000 + $urandom % 10000;
      automatic int wbase = $urandom % 1000, xbase = 2000 + $urandom % 1000, cw = 1 + $urandom % 200;
      automatic int lc [3];
      automatic int wd = 2 * (wa - 4) - 4;
      automatic int nload = 0, nc1 = 0, nc2 = 0, nd = 0, nst = 0, ncoef = 0;
      automatic bit tdcc = $urandom % 2, fin = 0;
      for (int l = 0; l < 3; l++)
        lc[l] = (1 + $urandom % 6) | ((1 + $urandom % 6) << 4) | (($urandom % 27) << 8) |
                (($urandom % 40) << 16) | (($urandom % 2) << 24);
      wr(1, abase); wr(2, dbase); wr(3, wbase); wr(4, xbase); wr(5, cw);
      wr(6, ha); wr(7, wa); wr(8, lc[0]); wr(9, lc[1]); wr(10, lc[2]); wr(11, tdcc);
      @(negedge clk); cfg_addr = 4'd1; #1 chk(cfg_rdata == abase, "A_BASE readback");
      cfg_addr = 4'd6; #1 chk(cfg_rdata == ha, "HA readback");
      cfg_addr = 4'd7; #1 chk(cfg_rdata == wa, "WA readback");
      wr(0, 1);
      cfg_addr = 4'd0; #1 chk(cfg_rdata[0] == 1'b1, "STATUS busy");
      while (!fin) begin
        automatic bit handled = dma_start || sftc_start;
        cfg_addr = 4'd0;
        #1 if (cfg_rdata[0] == 1'b0) begin
          fin = 1;
          chk(cfg_rdata[1] && !cfg_rdata[2], "STATUS done, not stuck");
        end
        chk(!(dma_start && sftc_start), "two commands at once");
        if (dma_start) begin
          case (dma_cmd.kind)
            DMA_LOAD_WGT: begin
              chk(ncoef == 0 && dma_cmd.ext_addr == wbase && dma_cmd.len == cw, "LOAD_WGT");
              ncoef++;
            end
            DMA_LOAD_IDX: begin
              chk(ncoef == 1 && dma_cmd.ext_addr == xbase && dma_cmd.len == cw, "LOAD_IDX");
              ncoef++;
            end
            DMA_LOAD_ROW: begin
              chk(ncoef == 2 && dma_cmd.ext_addr == abase + nload * wa * (lc[0] & 15) &&
                  dma_cmd.bank == nload % 10 && dma_cmd.width == wa && dma_cmd.tiles == (lc[0] & 15),
                  $sformatf("LOAD_ROW %0d", nload));
              nload++;
            end
            DMA_STORE_WIN: begin
              chk(dma_cmd.ext_addr == dbase + nst * 6 * wd * ((lc[2] >> 4) & 15) &&
                  dma_cmd.width == wd && dma_cmd.tiles == ((lc[2] >> 4) & 15) && dma_cmd.to_dcc == tdcc &&
                  nst == nd - 1, $sformatf("STORE_WIN %0d", nst));
              nst++;
            end
            default: chk(0, "unexpected DMA command");
          endcase
          repeat (1 + $urandom % 5) @(negedge clk);
          dma_done = 1; @(negedge clk); dma_done = 0;
        end
        if (sftc_start) begin
          automatic int l = (sftc_cmd.mode == MODE_DECONV) ? 2 : (op_cur.kind == OP_CONV1) ? 0 : 1;
          chk(int'(sftc_cmd.ict) == (lc[l] & 15) && int'(sftc_cmd.oct) == ((lc[l] >> 4) & 15) &&
              int'(sftc_cmd.wbase) == ((lc[l] >> 8) & 255) && int'(sftc_cmd.shift) == ((lc[l] >> 16) & 63) &&
              sftc_cmd.relu == lc[l][24], $sformatf("layer %0d fields", l));
          chk(op_cur.kind == (l == 0 ? OP_CONV1 : l == 1 ? OP_CONV2 : OP_DECONV), "op kind/mode");
          chk(int'(sftc_cmd.width) == wa - 2 * l, "SFTC width");
          chk(sftc_cmd.in_bank == op_cur.in_bank && sftc_cmd.out_bank == op_cur.out_bank, "banks");
          if (l == 0) nc1++; else if (l == 1) nc2++; else nd++;
          repeat (1 + $urandom % 8) @(negedge clk);
          sftc_done = 1; @(negedge clk); sftc_done = 0;
        end
        // a command that follows a done pulse is already visible here
        if (!handled) @(negedge clk);
      end
      chk(nload == ha && nc1 == (ha - 2) / 2 && nc2 == (ha - 4) / 2 && nd == (ha - 6) / 3 && nst == nd,
          $sformatf("counts %0d %0d %0d %0d %0d", nload, nc1, nc2, nd, nst));
      $display("rep %0d ha=%0d wa=%0d checks=%0d failures=%0d", rep, ha, wa, checks, failures);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
