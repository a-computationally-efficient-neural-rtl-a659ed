// tb_coef_buffer -- self-checking test of the Weight/Index Buffer (small size:
// DEPTH 5, 2x3 lanes). Writes random 16-element chunks to every (address,
// lane, chunk), reads every address back (one-cycle read latency) and checks
// all elements against a shadow copy; then overwrites single chunks and
// checks that neighbours are untouched.
module tb_coef_buffer;
  localparam int EW = 16, DEPTH = 5, POF = 2, PIF = 3, NNZ = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we = 0, re = 0, wchunk = 0;
  logic [2:0] waddr = 0, raddr = 0;
  logic [2:0] wlane = 0;
  logic [NNZ/2-1:0][EW-1:0] wdata = '0;
  logic [POF-1:0][PIF-1:0][NNZ-1:0][EW-1:0] rdata;
  logic [EW-1:0] shadow [DEPTH][POF][PIF][NNZ];

  coef_buffer #(.EW(EW), .DEPTH(DEPTH), .POF(POF), .PIF(PIF), .NNZ(NNZ)) dut (
    .clk, .we, .waddr, .wlane, .wchunk, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input int a, input int l, input int ch);
    @(negedge clk);
    we = 1; waddr = 3'(a); wlane = 3'(l); wchunk = ch[0];
    for (int k = 0; k < NNZ/2; k++) begin
      wdata[k] = EW'($urandom);
      shadow[a][l / PIF][l % PIF][NNZ/2*ch + k] = wdata[k];
    end
    @(negedge clk); we = 0;
  endtask

  task automatic rd_check(input int a);
    @(negedge clk); re = 1; raddr = 3'(a);
    @(negedge clk); re = 0;
    for (int o = 0; o < POF; o++) for (int c = 0; c < PIF; c++) for (int k = 0; k < NNZ; k++) begin
      checks++;
      if (rdata[o][c][k] != shadow[a][o][c][k]) begin
        failures++;
        if (failures < 10) $display("mismatch a=%0d o=%0d c=%0d k=%0d", a, o, c, k);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) for (int l = 0; l < POF*PIF; l++) for (int ch = 0; ch < 2; ch++)
      wr(a, l, ch);
    for (int a = 0; a < DEPTH; a++) rd_check(a);
    for (int n = 0; n < 20; n++) begin
      automatic int a = $urandom % DEPTH;
      wr(a, $urandom % (POF*PIF), $urandom % 2);
      rd_check(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
