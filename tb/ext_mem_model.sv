// ext_mem_model -- behavioural external memory on the SoC bus (testbench only).
//
// Word-addressed memory of DEPTH BUS_W-bit words behind the request/response
// bus used by the DMA: a request is accepted when req_valid && req_ready;
// writes update the word at once, reads return the word on rsp_valid in
// request order after a delay of 1..MAX_LAT cycles. req_ready is held low
// on random cycles when STALL is set, to exercise back-pressure. Addresses
// wrap at DEPTH. The testbench preloads and inspects `mem` directly.
module ext_mem_model
  import nvca_pkg::*;
#(
  parameter int DEPTH   = 4096,
  parameter int MAX_LAT = 3,
  parameter bit STALL   = 1
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [BUS_AW-1:0] req_addr,
  input  logic [BUS_W-1:0]  req_wdata,
  output logic              rsp_valid,
  output logic [BUS_W-1:0]  rsp_rdata
);
  logic [BUS_W-1:0] mem [DEPTH];
  logic [BUS_W-1:0] q_data [$];
  int               q_time [$];
  int               now = 0;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    req_ready = 1'b1; rsp_valid = 1'b0; rsp_rdata = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    rsp_valid <= 1'b0;
    if (q_data.size() > 0 && q_time[0] <= now) begin
      rsp_valid <= 1'b1;
      rsp_rdata <= q_data.pop_front();
      void'(q_time.pop_front());
    end
    if (req_valid && req_ready) begin
      if (req_we) mem[int'(req_addr) % DEPTH] <= req_wdata;
      else begin
        q_data.push_back(mem[int'(req_addr) % DEPTH]);
        q_time.push_back(now + 1 + int'($urandom % MAX_LAT));
      end
    end
    req_ready <= STALL ? ($urandom % 4 != 0) : 1'b1;
  end
endmodule
