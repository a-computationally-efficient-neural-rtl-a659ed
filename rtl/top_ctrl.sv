// top_ctrl -- Global controller: control-bus registers, Top Controller sequencing,
// and the layer-chaining scheduler.
//
// The host programs the registers over the control bus and writes CTRL=1. The
// controller then (1) has the DMA load the Weight and Index Buffers,
// (2) runs the chain scheduler and dispatches each of its operations: loads
// of A rows and stores of D windows to the DMA controller, Conv and DeConv row
// operations to the SFTC controller, (3) reports done in STATUS.
// Registers (word address: meaning):
//   0 CTRL (write 1: start) / STATUS (read: bit0 busy, bit1 done, bit2 stuck)
//   1 A_BASE  2 D_BASE  3 WGT_BASE  4 IDX_BASE  5 COEF_WORDS (words per buffer)
//   6 HA (rows of A)  7 WA (width of A)
//   8, 9, 10 layer 0 (Conv), 1 (Conv), 2 (DeConv):
//       bits 3:0 input tiles, 7:4 output tiles, 15:8 buffer base, 21:16 shift, 24 ReLU
//   11 TO_DCC (bit 0: send DeConv results to the DCC as offsets)
// External layouts: A row i at A_BASE + i*WA*T0, D window q (six rows) at
// D_BASE + q*6*WD*T3 with WD = 2*(WA-4)-4. The register map and sequence are
// this design's choice; the paper names Global, Top, DMA, SFTC and DCC
// controllers without describing them.
module top_ctrl
  import nvca_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // control bus
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  // DMA controller
  output logic              dma_start,
  output dma_cmd_t          dma_cmd,
  input  logic              dma_done,
  // SFTC controller
  output logic              sftc_start,
  output sftc_cmd_t         sftc_cmd,
  input  logic              sftc_done,
  // observation of the chain (one cycle per dispatched operation)
  output logic              op_fire,
  output chain_op_t         op_cur
);
  typedef enum logic [2:0] {S_IDLE, S_LW, S_LI, S_CHAIN_START, S_CHAIN, S_OP, S_FIN} state_e;
  state_e state;

  logic [31:0] a_base, d_base, wgt_base, idx_base, coef_words, to_dcc;
  logic [9:0]  ha;
  logic [7:0]  wa;
  logic [2:0][31:0] lcfg;
  logic done_st, stuck_st;

  logic       cs_start, cs_op_valid, cs_op_done, cs_busy, cs_done, cs_stuck;
  chain_op_t  cs_op;

  chain_sched u_chain (
    .clk, .rst_n, .start(cs_start), .ha(ha), .op_valid(cs_op_valid), .op(cs_op),
    .op_done(cs_op_done), .busy(cs_busy), .done(cs_done), .stuck(cs_stuck));

  // register file
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_base <= '0; d_base <= '0; wgt_base <= '0; idx_base <= '0; coef_words <= '0;
      ha <= '0; wa <= '0; lcfg <= '0; to_dcc <= '0;
    end else if (cfg_we && state == S_IDLE) begin
      case (cfg_addr)
        4'd1:  a_base     <= cfg_wdata;
        4'd2:  d_base     <= cfg_wdata;
        4'd3:  wgt_base   <= cfg_wdata;
        4'd4:  idx_base   <= cfg_wdata;
        4'd5:  coef_words <= cfg_wdata;
        4'd6:  ha         <= cfg_wdata[9:0];
        4'd7:  wa         <= cfg_wdata[7:0];
        4'd8:  lcfg[0]    <= cfg_wdata;
        4'd9:  lcfg[1]    <= cfg_wdata;
        4'd10: lcfg[2]    <= cfg_wdata;
        4'd11: to_dcc     <= cfg_wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    case (cfg_addr)
      4'd0:  cfg_rdata = {29'd0, stuck_st, done_st, state != S_IDLE};
      4'd1:  cfg_rdata = a_base;
      4'd2:  cfg_rdata = d_base;
      4'd6:  cfg_rdata = 32'(ha);
      4'd7:  cfg_rdata = 32'(wa);
      default: cfg_rdata = '0;
    endcase
  end

  function automatic sftc_cmd_t layer_cmd(input int l, input mode_e m, input logic [7:0] w,
                                          input chain_op_t o);
    sftc_cmd_t s;
    s.mode     = m;
    s.in_bank  = o.in_bank;
    s.out_bank = o.out_bank;
    s.width    = w;
    s.ict      = lcfg[l][3:0];
    s.oct      = lcfg[l][7:4];
    s.wbase    = lcfg[l][15:8];
    s.shift    = lcfg[l][21:16];
    s.relu     = lcfg[l][24];
    return s;
  endfunction

  wire [7:0] wd = 8'(2 * (int'(wa) - 4) - 4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; dma_start <= 1'b0; dma_cmd <= '0; sftc_start <= 1'b0; sftc_cmd <= '0;
      cs_start <= 1'b0; cs_op_done <= 1'b0; done_st <= 1'b0; stuck_st <= 1'b0;
      op_fire <= 1'b0; op_cur <= '0;
    end else begin
      dma_start <= 1'b0; sftc_start <= 1'b0; cs_start <= 1'b0; cs_op_done <= 1'b0;
      op_fire <= 1'b0;
      case (state)
        S_IDLE: if (cfg_we && cfg_addr == 4'd0 && cfg_wdata[0]) begin
          done_st <= 1'b0; stuck_st <= 1'b0;
          dma_cmd <= '{kind: DMA_LOAD_WGT, ext_addr: wgt_base, len: coef_words[15:0],
                       bank: '0, width: '0, tiles: '0, to_dcc: 1'b0};
          dma_start <= 1'b1;
          state <= S_LW;
        end
        S_LW: if (dma_done) begin
          dma_cmd <= '{kind: DMA_LOAD_IDX, ext_addr: idx_base, len: coef_words[15:0],
                       bank: '0, width: '0, tiles: '0, to_dcc: 1'b0};
          dma_start <= 1'b1;
          state <= S_LI;
        end
        S_LI: if (dma_done) begin cs_start <= 1'b1; state <= S_CHAIN_START; end
        S_CHAIN_START: state <= S_CHAIN;
        S_CHAIN: begin
          if (cs_done) begin done_st <= 1'b1; state <= S_IDLE; end
          else if (cs_stuck) begin stuck_st <= 1'b1; state <= S_IDLE; end
          else if (cs_op_valid) begin
            op_fire <= 1'b1; op_cur <= cs_op;
            case (cs_op.kind)
              OP_LOAD: begin
                dma_cmd <= '{kind: DMA_LOAD_ROW,
                             ext_addr: a_base + 32'(int'(cs_op.row) * int'(wa) * int'(lcfg[0][3:0])),
                             len: '0, bank: cs_op.out_bank[0], width: wa,
                             tiles: lcfg[0][3:0], to_dcc: 1'b0};
                dma_start <= 1'b1;
              end
              OP_STORE: begin
                dma_cmd <= '{kind: DMA_STORE_WIN,
                             ext_addr: d_base + 32'(int'(cs_op.row) * 6 * int'(wd) * int'(lcfg[2][7:4])),
                             len: '0, bank: '0, width: wd, tiles: lcfg[2][7:4], to_dcc: to_dcc[0]};
                dma_start <= 1'b1;
              end
              OP_CONV1:  begin sftc_cmd <= layer_cmd(0, MODE_CONV,   wa,         cs_op); sftc_start <= 1'b1; end
              OP_CONV2:  begin sftc_cmd <= layer_cmd(1, MODE_CONV,   wa - 8'd2,  cs_op); sftc_start <= 1'b1; end
              default:   begin sftc_cmd <= layer_cmd(2, MODE_DECONV, wa - 8'd4,  cs_op); sftc_start <= 1'b1; end
            endcase
            state <= S_OP;
          end
        end
        S_OP: if (dma_done || sftc_done) begin cs_op_done <= 1'b1; state <= S_FIN; end
        S_FIN: state <= S_CHAIN;     // let the scheduler retire the operation
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
