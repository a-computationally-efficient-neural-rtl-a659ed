// nvca_top -- neural video decoding accelerator: SFTC, controllers, DMA, bus side.
//
// Wires the blocks of the published top-level diagram: the Global Controller
// (top_ctrl: control-bus registers, Top Controller, layer-chaining scheduler),
// the SFTC Controller (sftc_ctrl), the DMA Controller with Scatter, Gather and
// the SoC bus master (dma_engine), and the Sparse Fast Transform Core (sftc).
// The Deformable Convolution Core and its controller are outside this RTL:
// their connections are ports (dcc_*): words the Scatter routes to the DCC,
// DeConv results the Output-Buffer DEMUX routes to it as offsets, and DCC
// results the Gather writes to external memory.
// Interface: cfg_* is the control bus (see top_ctrl), bus_* the SoC data bus to
// external memory (valid/ready requests, in-order read data), op_fire/op_cur
// report each chain operation as it is dispatched.
module nvca_top
  import nvca_pkg::*;
#(
  parameter int PIF      = 12,
  parameter int POF      = 12,
  parameter int CT_MAX   = 6,
  parameter int W_MAX    = 64,
  parameter int WO_MAX   = 2 * W_MAX,
  parameter int WB_DEPTH = 27
) (
  input  logic               clk,
  input  logic               rst_n,
  // control bus
  input  logic               cfg_we,
  input  logic [3:0]         cfg_addr,
  input  logic [31:0]        cfg_wdata,
  output logic [31:0]        cfg_rdata,
  // SoC data bus to external memory
  output logic               bus_req_valid,
  input  logic               bus_req_ready,
  output logic               bus_req_we,
  output logic [BUS_AW-1:0]  bus_req_addr,
  output logic [BUS_W-1:0]   bus_req_wdata,
  input  logic               bus_rsp_valid,
  input  logic [BUS_W-1:0]   bus_rsp_rdata,
  // Deformable Convolution Core connections
  output logic               dcc_in_valid,
  output logic [BUS_W-1:0]   dcc_in_data,
  output logic               dcc_off_valid,
  output act_t [POF-1:0]     dcc_off_data,
  input  logic               dcc_out_valid,
  input  logic [BUS_W-1:0]   dcc_out_data,
  output logic               dcc_out_ready,
  // chain observation
  output logic               op_fire,
  output chain_op_t          op_cur
);
  localparam int IB_DEPTH = CT_MAX * W_MAX;
  localparam int OB_DEPTH = CT_MAX * WO_MAX;

  logic      dma_start, dma_done, dma_busy;
  dma_cmd_t  dma_cmd;
  logic      sftc_start, sftc_done, sftc_busy;
  sftc_cmd_t sftc_cmd;
  sftc_ctl_t ctl;
  logic      res_valid;

  top_ctrl u_top_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .dma_start, .dma_cmd, .dma_done, .sftc_start, .sftc_cmd, .sftc_done,
    .op_fire, .op_cur);

  sftc_ctrl #(.W_MAX(W_MAX), .WO_MAX(WO_MAX)) u_sftc_ctrl (
    .clk, .rst_n, .start(sftc_start), .cmd(sftc_cmd), .res_valid, .busy(sftc_busy),
    .done(sftc_done), .ctl);

  logic                                wb_we, xb_we, cb_wchunk;
  logic [$clog2(WB_DEPTH)-1:0]         cb_waddr;
  logic [$clog2(POF*PIF)-1:0]          cb_wlane;
  logic [NNZ/2-1:0][WGT_W-1:0]         cb_wdata;
  logic                                ib_we;
  logic [3:0]                          ib_bank;
  logic [$clog2(IB_DEPTH)-1:0]         ib_addr;
  act_t [PIF-1:0]                      ib_data;
  logic                                ob_re;
  logic [2:0]                          ob_bank;
  logic [$clog2(OB_DEPTH)-1:0]         ob_addr;
  act_t [POF-1:0]                      ob_data;

  dma_engine #(.PIF(PIF), .POF(POF), .W_MAX(W_MAX), .WO_MAX(WO_MAX), .WB_DEPTH(WB_DEPTH),
               .IB_DEPTH(IB_DEPTH), .OB_DEPTH(OB_DEPTH)) u_dma (
    .clk, .rst_n, .start(dma_start), .cmd(dma_cmd), .busy(dma_busy), .done(dma_done),
    .bus_req_valid, .bus_req_ready, .bus_req_we, .bus_req_addr, .bus_req_wdata,
    .bus_rsp_valid, .bus_rsp_rdata,
    .wb_we, .xb_we, .cb_waddr, .cb_wlane, .cb_wchunk, .cb_wdata,
    .ib_we, .ib_bank, .ib_addr, .ib_data,
    .ob_re, .ob_bank, .ob_addr, .ob_data,
    .dcc_in_valid, .dcc_in_data, .dcc_off_valid, .dcc_off_data,
    .dcc_out_valid, .dcc_out_data, .dcc_out_ready);

  sftc #(.PIF(PIF), .POF(POF), .CT_MAX(CT_MAX), .W_MAX(W_MAX), .WO_MAX(WO_MAX),
         .WB_DEPTH(WB_DEPTH), .IB_DEPTH(IB_DEPTH), .OB_DEPTH(OB_DEPTH)) u_sftc (
    .clk, .rst_n, .ctl, .res_valid,
    .wb_we, .xb_we, .cb_waddr, .cb_wlane, .cb_wchunk, .cb_wdata,
    .ib_ext_we(ib_we), .ib_ext_bank(ib_bank), .ib_ext_addr(ib_addr), .ib_ext_data(ib_data),
    .ob_ext_re(ob_re), .ob_ext_bank(ob_bank), .ob_ext_addr(ob_addr), .ob_ext_data(ob_data));

endmodule
