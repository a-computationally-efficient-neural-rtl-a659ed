// sftc -- Sparse Fast Transform Core datapath.
//
// Executes sparse fast Convs (Winograd F(2x2,3x3)) and sparse fast DeConvs
// (T3(6x6,4x4), stride 2) with one set of hardware, chosen by the mode flag:
//   Input Buffer (10 banks) -> column FIFO -> PIF PreUs (B^T X B)
//   -> united PIF x POF SCU array (index-selected Hadamard products with the
//      non-zero transform-domain weights, adder tree over input channels,
//      psum register file over input-channel tiles)
//   -> POF PostUs (A^T U A) -> Reshuffle Network (+ requantisation)
//   -> DEMUX: Conv rows back into the Input Buffer, DeConv rows to the
//      Output Buffer.
// The Weight Buffer (16-bit) and Index Buffer (6-bit) hold the compressed
// coefficients. All control comes from sftc_ctrl through the `ctl` bundle;
// res_valid tells it that a reshuffled patch is ready.
// External ports: Weight/Index Buffer and Input Buffer write ports (fed by the
// scatter side of the DMA) and an Output Buffer read port (gather side).
// Block set and connections follow the published top-level diagram; buffer
// sizes and port formats are this design's choices.
// Pipeline from a compute beat to res_valid: PreU 1, SCU array 2, PostU 1,
// Reshuffle 1 cycle.
module sftc
  import nvca_pkg::*;
#(
  parameter int PIF      = 12,
  parameter int POF      = 12,
  parameter int CT_MAX   = 6,
  parameter int W_MAX    = 64,
  parameter int WO_MAX   = 128,
  parameter int WB_DEPTH = 27,
  parameter int IB_DEPTH = CT_MAX * W_MAX,
  parameter int OB_DEPTH = CT_MAX * WO_MAX
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  sftc_ctl_t                            ctl,
  output logic                                 res_valid,
  // Weight Buffer / Index Buffer write (16 elements per beat)
  input  logic                                 wb_we,
  input  logic                                 xb_we,
  input  logic [$clog2(WB_DEPTH)-1:0]          cb_waddr,
  input  logic [$clog2(POF*PIF)-1:0]           cb_wlane,
  input  logic                                 cb_wchunk,
  input  logic [NNZ/2-1:0][WGT_W-1:0]          cb_wdata,
  // Input Buffer write from the DMA
  input  logic                                 ib_ext_we,
  input  logic [3:0]                           ib_ext_bank,
  input  logic [$clog2(IB_DEPTH)-1:0]          ib_ext_addr,
  input  act_t [PIF-1:0]                       ib_ext_data,
  // Output Buffer read for the DMA
  input  logic                                 ob_ext_re,
  input  logic [2:0]                           ob_ext_bank,
  input  logic [$clog2(OB_DEPTH)-1:0]          ob_ext_addr,
  output act_t [POF-1:0]                       ob_ext_data
);
  localparam int WBA = $clog2(WB_DEPTH);
  localparam int IBA = $clog2(IB_DEPTH);
  localparam int OBA = $clog2(OB_DEPTH);
  localparam int CTA = $clog2(CT_MAX);

  // ---------------- Weight and Index Buffers ----------------
  logic [POF-1:0][PIF-1:0][NNZ-1:0][WGT_W-1:0] wb_rdata;
  logic [POF-1:0][PIF-1:0][NNZ-1:0][IDX_W-1:0] xb_rdata;
  logic [NNZ/2-1:0][IDX_W-1:0] xb_wdata;
  always_comb for (int k = 0; k < NNZ/2; k++) xb_wdata[k] = cb_wdata[k][IDX_W-1:0];

  coef_buffer #(.EW(WGT_W), .DEPTH(WB_DEPTH), .POF(POF), .PIF(PIF), .NNZ(NNZ)) u_weight_buf (
    .clk, .we(wb_we), .waddr(cb_waddr), .wlane(cb_wlane), .wchunk(cb_wchunk), .wdata(cb_wdata),
    .re(ctl.wb_re), .raddr(WBA'(ctl.wb_raddr)), .rdata(wb_rdata));
  coef_buffer #(.EW(IDX_W), .DEPTH(WB_DEPTH), .POF(POF), .PIF(PIF), .NNZ(NNZ)) u_index_buf (
    .clk, .we(xb_we), .waddr(cb_waddr), .wlane(cb_wlane), .wchunk(cb_wchunk), .wdata(xb_wdata),
    .re(ctl.wb_re), .raddr(WBA'(ctl.wb_raddr)), .rdata(xb_rdata));

  // ---------------- Input Buffer ----------------
  act_t [4:0][PIF-1:0] ib_rd_data;
  act_t [1:0][PIF-1:0] ib_wr_data;
  logic [1:0]          ib_wr_en;
  logic [1:0][3:0]     ib_wr_bank;
  logic [1:0][IBA-1:0] ib_wr_addr;
  act_t [5:0][7:0][POF-1:0] rows;

  // DEMUX, Input Buffer side: Conv results (POF channels) or DMA data.
  always_comb begin
    ib_wr_en   = ctl.ib_wr_en;
    ib_wr_bank = ctl.ib_wr_bank;
    ib_wr_addr = {IBA'(ctl.ib_wr_addr), IBA'(ctl.ib_wr_addr)};
    ib_wr_data = '0;
    for (int k = 0; k < PIF && k < POF; k++) begin
      ib_wr_data[0][k] = rows[0][ctl.wr_col][k];
      ib_wr_data[1][k] = rows[1][ctl.wr_col][k];
    end
    if (ib_ext_we) begin
      ib_wr_en[0]   = 1'b1;
      ib_wr_bank[0] = ib_ext_bank;
      ib_wr_addr[0] = ib_ext_addr;
      ib_wr_data[0] = ib_ext_data;
    end
  end

  input_buffer #(.PIF(PIF), .DEPTH(IB_DEPTH), .NR(5), .NW(2)) u_input_buf (
    .clk, .rd_en(ctl.ib_rd_en), .rd_bank(ctl.ib_rd_bank), .rd_addr(IBA'(ctl.ib_rd_addr)),
    .rd_data(ib_rd_data), .wr_en(ib_wr_en), .wr_bank(ib_wr_bank), .wr_addr(ib_wr_addr),
    .wr_data(ib_wr_data));

  // ---------------- Column FIFO ----------------
  act_t [PIF-1:0][15:0][4:0] window;
  logic [3:0] fifo_cnt;
  input_fifo #(.PIF(PIF), .CT_MAX(CT_MAX)) u_fifo (
    .clk, .rst_n, .mode(ctl.mode), .clear(ctl.fifo_clear),
    .push(ctl.fifo_push), .push_last(ctl.fifo_push_last), .push_ct(CTA'(ctl.fifo_push_ct)),
    .push_data(ctl.fifo_push_zero ? '0 : ib_rd_data),
    .pop(ctl.fifo_pop), .pop_n(ctl.fifo_pop_n), .rd_ct(CTA'(ctl.fifo_rd_ct)),
    .count(fifo_cnt), .window(window));

  // ---------------- PreU array ----------------
  logic [PIF-1:0] pre_v;
  tin_t [PIF-1:0][NPOS-1:0] h;
  for (genvar c = 0; c < PIF; c++) begin : g_preu
    preu u_preu (.clk, .rst_n, .mode(ctl.mode), .in_valid(ctl.pre_valid), .x(window[c]),
                 .out_valid(pre_v[c]), .y(h[c]));
  end

  logic first_q, last_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin first_q <= 1'b0; last_q <= 1'b0; end
    else begin first_q <= ctl.first; last_q <= ctl.last; end

  // ---------------- United SCU array ----------------
  wgt_t [POF-1:0][PIF-1:0][NNZ-1:0] w;
  idx_t [POF-1:0][PIF-1:0][NNZ-1:0] idx;
  always_comb begin
    for (int r = 0; r < POF; r++)
      for (int c = 0; c < PIF; c++)
        for (int j = 0; j < NNZ; j++) begin
          w[r][c][j]   = wgt_t'(wb_rdata[r][c][j]);
          idx[r][c][j] = idx_t'(xb_rdata[r][c][j]);
        end
  end

  logic sa_v;
  acc_t [POF-1:0][NPOS-1:0] u;
  scu_array #(.PIF(PIF), .POF(POF)) u_scu_array (
    .clk, .rst_n, .mode(ctl.mode), .in_valid(pre_v[0]), .first(first_q), .last(last_q),
    .h(h), .w(w), .idx(idx), .out_valid(sa_v), .u(u));

  // ---------------- PostU array ----------------
  logic [POF-1:0] post_v;
  out_t [POF-1:0][35:0] v;
  for (genvar o = 0; o < POF; o++) begin : g_postu
    postu u_postu (.clk, .rst_n, .mode(ctl.mode), .in_valid(sa_v), .u(u[o]),
                   .out_valid(post_v[o]), .v(v[o]));
  end

  // ---------------- Reshuffle Network ----------------
  reshuffle #(.POF(POF)) u_reshuffle (
    .clk, .rst_n, .mode(ctl.mode), .shift(ctl.shift), .relu(ctl.relu),
    .in_valid(post_v[0]), .v(v), .out_valid(res_valid), .rows(rows));

  // ---------------- Output Buffer (DEMUX, DeConv side) ----------------
  act_t [OB_BANKS-1:0][POF-1:0] ob_wr_data;
  always_comb for (int a = 0; a < OB_BANKS; a++) ob_wr_data[a] = rows[a][ctl.wr_col];

  output_buffer #(.POF(POF), .DEPTH(OB_DEPTH)) u_output_buf (
    .clk, .wr_en(ctl.ob_wr_en), .wr_addr(OBA'(ctl.ob_wr_addr)), .wr_data(ob_wr_data),
    .rd_en(ob_ext_re), .rd_bank(ob_ext_bank), .rd_addr(ob_ext_addr), .rd_data(ob_ext_data));
endmodule
