// tb_input_buffer -- self-checking test of the ten-bank Input Buffer
// (PIF = 2, DEPTH = 16). Fills every bank/address through both write ports
// (two banks per cycle, different addresses), then reads five different banks per cycle at one
// address and checks each slot against a shadow copy, including the one-cycle
// read latency and that a write to one bank leaves the others unchanged.
module tb_input_buffer;
  import nvca_pkg::*;
  localparam int PIF = 2, DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic rd_en = 0;
  logic [4:0][3:0] rd_bank = '0;
  logic [3:0] rd_addr = '0;
  act_t [4:0][PIF-1:0] rd_data;
  logic [1:0] wr_en = '0;
  logic [1:0][3:0] wr_bank = '0;
  logic [1:0][3:0] wr_addr = '0;
  act_t [1:0][PIF-1:0] wr_data = '0;
  act_t [PIF-1:0] shadow [10][DEPTH];

  input_buffer #(.PIF(PIF), .DEPTH(DEPTH), .NR(5), .NW(2)) dut (
    .clk, .rd_en, .rd_bank, .rd_addr, .rd_data, .wr_en, .wr_bank, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_all(input int base);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 4'(a);
      for (int s = 0; s < 5; s++) rd_bank[s] = 4'((base + 3*s) % 10);
      @(negedge clk); rd_en = 0;
      for (int s = 0; s < 5; s++) begin
        checks++;
        if (rd_data[s] != shadow[(base + 3*s) % 10][a]) begin
          failures++;
          if (failures < 10) $display("mismatch bank=%0d addr=%0d", (base + 3*s) % 10, a);
        end
      end
    end
  endtask

  initial begin
    for (int b = 0; b < 10; b += 2)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 2'b11;
        for (int p = 0; p < 2; p++) begin
          wr_bank[p] = 4'(b + p); wr_addr[p] = 4'(p ? DEPTH - 1 - a : a);
          for (int k = 0; k < PIF; k++) wr_data[p][k] = act_t'($urandom);
          shadow[b + p][p ? DEPTH - 1 - a : a] = wr_data[p];
        end
      end
    @(negedge clk); wr_en = '0;
    check_all(0);
    check_all(7);
    // single-port overwrite of one bank
    @(negedge clk);
    wr_en = 2'b10; wr_bank[1] = 4'd9; wr_addr[1] = 4'd3;
    for (int k = 0; k < PIF; k++) wr_data[1][k] = act_t'($urandom);
    shadow[9][3] = wr_data[1];
    @(negedge clk); wr_en = '0;
    check_all(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
