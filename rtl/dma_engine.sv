// dma_engine -- DMA controller with the Scatter and Gather units and the SoC bus master.
//
// Moves data between external memory and the on-chip buffers, one bus word
// (BUS_W = 256 bits) per transfer:
//   Scatter (loads): the DMA reads external words and steers each to its
//     destination - Weight Buffer, Index Buffer (16 elements per word, one
//     per 16-bit field, indices in the low 6 bits), an Input Buffer bank
//     (PIF 12-bit activations per word) or the DCC input port.
//   Gather (stores): the DMA collects words from the Output Buffer or from the
//     DCC output port and writes them to external memory. The DEMUX below the
//     Output Buffer can instead send DeConv results to the DCC (to_dcc), where
//     they serve as DfConv offsets.
// External layout (this design's choice): a feature map row of width W with T
// channel tiles is T*W consecutive words, tile-major; a weight word k goes to
// buffer address k / (2*POF*PIF), lane (k/2) % (POF*PIF), chunk k % 2.
// Bus: request valid/ready with we/addr/wdata; read data return in order on
// rsp_valid. The engine keeps one request in flight (simple, not fast).
// The paper names DMA controller, Scatter, Gather and SoC bus interface; their
// behaviour here is the simplest that serves the buffers.
module dma_engine
  import nvca_pkg::*;
#(
  parameter int PIF      = 12,
  parameter int POF      = 12,
  parameter int W_MAX    = 64,
  parameter int WO_MAX   = 128,
  parameter int WB_DEPTH = 27,
  parameter int IB_DEPTH = 6 * W_MAX,
  parameter int OB_DEPTH = 6 * WO_MAX
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  dma_cmd_t                      cmd,
  output logic                          busy,
  output logic                          done,
  // SoC bus (master)
  output logic                          bus_req_valid,
  input  logic                          bus_req_ready,
  output logic                          bus_req_we,
  output logic [BUS_AW-1:0]             bus_req_addr,
  output logic [BUS_W-1:0]              bus_req_wdata,
  input  logic                          bus_rsp_valid,
  input  logic [BUS_W-1:0]              bus_rsp_rdata,
  // scatter: Weight / Index Buffer
  output logic                          wb_we,
  output logic                          xb_we,
  output logic [$clog2(WB_DEPTH)-1:0]   cb_waddr,
  output logic [$clog2(POF*PIF)-1:0]    cb_wlane,
  output logic                          cb_wchunk,
  output logic [NNZ/2-1:0][WGT_W-1:0]   cb_wdata,
  // scatter: Input Buffer
  output logic                          ib_we,
  output logic [3:0]                    ib_bank,
  output logic [$clog2(IB_DEPTH)-1:0]   ib_addr,
  output act_t [PIF-1:0]                ib_data,
  // gather: Output Buffer
  output logic                          ob_re,
  output logic [2:0]                    ob_bank,
  output logic [$clog2(OB_DEPTH)-1:0]   ob_addr,
  input  act_t [POF-1:0]                ob_data,
  // DCC side (scatter out, offset DEMUX out, gather in)
  output logic                          dcc_in_valid,
  output logic [BUS_W-1:0]              dcc_in_data,
  output logic                          dcc_off_valid,
  output act_t [POF-1:0]                dcc_off_data,
  input  logic                          dcc_out_valid,
  input  logic [BUS_W-1:0]              dcc_out_data,
  output logic                          dcc_out_ready
);
  typedef enum logic [2:0] {S_IDLE, S_REQ, S_RSP, S_OBRD, S_OBWR, S_DCCW} state_e;
  state_e   state;
  dma_cmd_t c;
  logic [15:0] k;          // word counter
  logic [15:0] total;
  logic [7:0]  col;
  logic [3:0]  tile;
  logic [2:0]  row;

  localparam int LANES = POF * PIF;

  always_comb begin
    case (c.kind)
      DMA_LOAD_ROW:  total = 16'(int'(c.width) * int'(c.tiles));
      DMA_STORE_WIN: total = 16'(6 * int'(c.width) * int'(c.tiles));
      default:       total = c.len;
    endcase
  end

  wire is_load = (c.kind == DMA_LOAD_WGT) || (c.kind == DMA_LOAD_IDX) ||
                 (c.kind == DMA_LOAD_ROW) || (c.kind == DMA_LOAD_DCC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; k <= '0; col <= '0; tile <= '0; row <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          c <= cmd; k <= '0; col <= '0; tile <= '0; row <= '0;
          state <= (cmd.kind == DMA_STORE_WIN) ? S_OBRD :
                   (cmd.kind == DMA_STORE_DCC) ? S_DCCW : S_REQ;
        end
        S_REQ: if (bus_req_ready) state <= is_load ? S_RSP : S_IDLE;
        S_RSP: if (bus_rsp_valid) begin
          k <= k + 16'd1;
          if (c.kind == DMA_LOAD_ROW) begin
            if (col == c.width - 8'd1) begin col <= '0; tile <= tile + 4'd1; end
            else col <= col + 8'd1;
          end
          if (k == total - 16'd1) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_REQ;
        end
        S_OBRD: state <= S_OBWR;            // Output Buffer read latency
        S_OBWR: if (c.to_dcc || bus_req_ready) begin
          k <= k + 16'd1;
          // order: tile, row, column
          if (col == c.width - 8'd1) begin
            col <= '0;
            if (row == 3'd5) begin row <= '0; tile <= tile + 4'd1; end
            else row <= row + 3'd1;
          end else col <= col + 8'd1;
          if (k == total - 16'd1) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_OBRD;
        end
        S_DCCW: if (dcc_out_valid && bus_req_ready) begin
          k <= k + 16'd1;
          if (k == total - 16'd1) begin state <= S_IDLE; done <= 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---- SoC bus requests ----
  logic [POF*ACT_W-1:0] ob_flat;
  always_comb begin
    ob_flat = '0;
    for (int o = 0; o < POF; o++) ob_flat[o*ACT_W +: ACT_W] = ob_data[o];
    bus_req_valid = 1'b0; bus_req_we = 1'b0; bus_req_wdata = '0;
    bus_req_addr  = c.ext_addr + BUS_AW'(k);
    case (state)
      S_REQ:  bus_req_valid = 1'b1;
      S_OBWR: begin
        bus_req_valid = !c.to_dcc; bus_req_we = 1'b1;
        bus_req_wdata = BUS_W'(ob_flat);
      end
      S_DCCW: begin
        bus_req_valid = dcc_out_valid; bus_req_we = 1'b1;
        bus_req_wdata = dcc_out_data;
      end
      default: ;
    endcase
  end
  assign dcc_out_ready = (state == S_DCCW) && bus_req_ready;

  // ---- Scatter ----
  wire rsp = (state == S_RSP) && bus_rsp_valid;
  always_comb begin
    wb_we     = rsp && (c.kind == DMA_LOAD_WGT);
    xb_we     = rsp && (c.kind == DMA_LOAD_IDX);
    cb_waddr  = $clog2(WB_DEPTH)'(int'(k) / (2 * LANES));
    cb_wlane  = $clog2(LANES)'((int'(k) / 2) % LANES);
    cb_wchunk = k[0];
    for (int e = 0; e < NNZ/2; e++) cb_wdata[e] = bus_rsp_rdata[e*16 +: 16];
    ib_we     = rsp && (c.kind == DMA_LOAD_ROW);
    ib_bank   = c.bank;
    ib_addr   = $clog2(IB_DEPTH)'(int'(tile) * W_MAX + int'(col));
    for (int p = 0; p < PIF; p++) ib_data[p] = act_t'(bus_rsp_rdata[p*ACT_W +: ACT_W]);
    dcc_in_valid = rsp && (c.kind == DMA_LOAD_DCC);
    dcc_in_data  = bus_rsp_rdata;
  end

  // ---- Gather side: Output Buffer reads and the offset DEMUX ----
  assign ob_re   = (state == S_OBRD);
  assign ob_bank = row;
  assign ob_addr = $clog2(OB_DEPTH)'(int'(tile) * WO_MAX + int'(col));
  assign dcc_off_valid = (state == S_OBWR) && c.to_dcc;
  assign dcc_off_data  = ob_data;
endmodule
