// tb_input_fifo -- self-checking test of the column FIFO (PIF = 2,
// CT_MAX = 3). A behavioural model keeps a queue of columns (5 rows x CT_MAX
// tiles). Random sequences push columns (all tiles, the last push closing the
// column) until the FIFO holds a full window, then the combinational window
// is compared with the model for every tile in both Conv (4 patches of 4x4
// with 2-column overlap) and DeConv (5x5) layout, then 8 (Conv) or 3
// (DeConv) columns are popped, keeping the overlap. Also checks count and
// clear.
module tb_input_fifo;
  import nvca_pkg::*;
  localparam int PIF = 2, CT_MAX = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_CONV;
  logic clear = 0, push = 0, push_last = 0, pop = 0;
  logic [1:0] push_ct = '0, rd_ct = '0;
  act_t [4:0][PIF-1:0] push_data = '0;
  logic [3:0] pop_n = '0, count;
  act_t [PIF-1:0][15:0][4:0] window;
  act_t [PIF-1:0] q [$][5][CT_MAX];

  input_fifo #(.PIF(PIF), .CT_MAX(CT_MAX)) dut (
    .clk, .rst_n, .mode, .clear, .push, .push_last, .push_ct, .push_data,
    .pop, .pop_n, .rd_ct, .count, .window);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic push_col();
    act_t [PIF-1:0] col [5][CT_MAX];
    for (int t = 0; t < CT_MAX; t++) begin
      @(negedge clk);
      push = 1; push_ct = 2'(t); push_last = (t == CT_MAX-1);
      for (int r = 0; r < 5; r++) for (int k = 0; k < PIF; k++) begin
        push_data[r][k] = act_t'($urandom);
      end
      for (int r = 0; r < 5; r++) col[r][t] = push_data[r];
    end
    @(negedge clk); push = 0; push_last = 0;
    q.push_back(col);
  endtask

  task automatic check_count();
    checks++;
    if (int'(count) != q.size()) begin
      failures++; $display("count %0d expected %0d", count, q.size());
    end
  endtask

  task automatic check_window(bit dec);
    mode = dec ? MODE_DECONV : MODE_CONV;
    for (int t = 0; t < CT_MAX; t++) begin
      rd_ct = 2'(t); #1;
      for (int ch = 0; ch < PIF; ch++) begin
        if (dec) begin
          for (int r = 0; r < 5; r++) for (int c = 0; c < 5; c++) begin
            checks++;
            if (window[ch][r][c] != q[c][r][t][ch]) begin
              failures++; if (failures < 10) $display("dec win mismatch t=%0d r=%0d c=%0d", t, r, c);
            end
          end
        end else begin
          for (int p = 0; p < 4; p++) for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
            checks++;
            if (window[ch][4*p+r][c] != q[2*p+c][r][t][ch]) begin
              failures++; if (failures < 10) $display("conv win mismatch t=%0d p=%0d r=%0d c=%0d", t, p, r, c);
            end
          end
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 12; rep++) begin
      automatic bit dec = rep[0];
      automatic int win = dec ? 5 : 10;
      automatic int step = dec ? 3 : 8;
      // every fourth window starts from an empty FIFO via clear; the others
      // reuse the 2 overlap columns left by the previous pop
      if (rep % 4 == 0) begin
        @(negedge clk); clear = 1; @(negedge clk); clear = 0;
        q.delete();
        check_count();
      end
      while (q.size() < win) push_col();
      check_count();
      @(negedge clk); check_window(dec);
      @(negedge clk); pop = 1; pop_n = 4'(step);
      @(negedge clk); pop = 0;
      for (int k = 0; k < step; k++) void'(q.pop_front());
      check_count();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
