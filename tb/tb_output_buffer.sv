// tb_output_buffer -- self-checking test of the six-bank Output Buffer
// (POF = 2, DEPTH = 16): six rows written per cycle, read back word by word
// (bank, address) with one-cycle latency, compared with a shadow copy.
module tb_output_buffer;
  import nvca_pkg::*;
  localparam int POF = 2, DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [3:0] wr_addr = '0, rd_addr = '0;
  act_t [5:0][POF-1:0] wr_data = '0;
  logic [2:0] rd_bank = '0;
  act_t [POF-1:0] rd_data;
  act_t [POF-1:0] shadow [6][DEPTH];

  output_buffer #(.POF(POF), .DEPTH(DEPTH)) dut (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_bank, .rd_addr, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = (pass == 0) || (a % 3 == 0); wr_addr = 4'(a);
        for (int b = 0; b < 6; b++) for (int k = 0; k < POF; k++) wr_data[b][k] = act_t'($urandom);
        if (wr_en) for (int b = 0; b < 6; b++) shadow[b][a] = wr_data[b];
      end
      @(negedge clk); wr_en = 0;
      for (int b = 0; b < 6; b++) for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk); rd_en = 1; rd_bank = 3'(b); rd_addr = 4'(a);
        @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data != shadow[b][a]) begin
          failures++;
          if (failures < 10) $display("mismatch bank=%0d addr=%0d", b, a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
