// sftc_ctrl -- SFTC controller: sequences one row operation of the SFTC datapath.
//
// Given a command (sftc_cmd_t) it walks the output row in groups: four Conv
// patches (8 output columns, window 10 input columns, step 8) or one DeConv
// patch (6 output columns, window 5 input columns, step 3). For each group it
//   LOAD : reads the new input columns of every input-channel tile from the
//          Input Buffer (one column x all rows per cycle) into the column FIFO,
//          pushing zeros past the row end;
//   COMP : for each output-channel tile, issues one beat per input-channel
//          tile (PreU -> SCU array, psum accumulated over the tiles), reading
//          that step's weights and indices,
//   WAIT : waits for the requantised, reshuffled patch,
//   WRITE: writes it column by column - Conv results to two Input Buffer banks
//          (layer chaining), DeConv results to the six Output Buffer banks;
//          columns past the valid output width (Conv W-2, DeConv 2W-4) are
//          dropped,
// then pops the step from the FIFO. The output-channel loop sits inside the
// group loop so that a Conv may overwrite the banks of its own first two
// input rows: every input column is in the FIFO before its bank word is
// overwritten. Loop order, timing and address layout are this design's own;
// the paper names the controller only. done pulses for one cycle at the end.
module sftc_ctrl
  import nvca_pkg::*;
#(
  parameter int W_MAX  = 64,    // Input Buffer columns per channel tile
  parameter int WO_MAX = 128    // Output Buffer columns per channel tile
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  sftc_cmd_t  cmd,
  input  logic       res_valid,
  output logic       busy,
  output logic       done,
  output sftc_ctl_t  ctl
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LDRAIN, S_COMP, S_WAIT, S_WRITE, S_POP} state_e;
  state_e state;
  sftc_cmd_t c;

  logic [7:0] g, ngroups, col, lcol, ncols;
  logic [3:0] ct, ot;
  logic [2:0] wcol;
  logic [7:0] out_w;
  // delayed push (Input Buffer read latency)
  logic       pd_v, pd_last, pd_zero;
  logic [3:0] pd_ct;

  wire conv = (c.mode == MODE_CONV);
  wire [7:0] span = conv ? 8'd10 : 8'd5;
  wire [7:0] step = conv ? 8'd8  : 8'd3;
  wire [2:0] gcols = conv ? 3'd7 : 3'd5;   // output columns per group minus 1

  always_comb begin
    ngroups = conv ? 8'((int'(c.width) - 2 + 7) / 8) : 8'((int'(c.width) - 2 + 2) / 3);
    out_w   = conv ? c.width - 8'd2 : 8'(2 * int'(c.width) - 4);
    ncols   = (g == 0) ? span : step;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; g <= '0; col <= '0; lcol <= '0;
      ct <= '0; ot <= '0; wcol <= '0; done <= 1'b0;
      pd_v <= 1'b0; pd_last <= 1'b0; pd_zero <= 1'b0; pd_ct <= '0;
    end else begin
      done <= 1'b0;
      pd_v <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          c <= cmd; g <= '0; col <= '0; lcol <= '0; ct <= '0; ot <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          pd_v <= 1'b1; pd_ct <= ct; pd_zero <= (col >= c.width);
          pd_last <= (ct == c.ict - 4'd1);
          if (ct == c.ict - 4'd1) begin
            ct <= '0; col <= col + 8'd1; lcol <= lcol + 8'd1;
            if (lcol == ncols - 8'd1) state <= S_LDRAIN;
          end else ct <= ct + 4'd1;
        end
        S_LDRAIN: begin
          lcol <= '0; ct <= '0; ot <= '0; state <= S_COMP;
        end
        S_COMP: begin
          if (ct == c.ict - 4'd1) begin ct <= '0; state <= S_WAIT; end
          else ct <= ct + 4'd1;
        end
        S_WAIT: if (res_valid) begin wcol <= '0; state <= S_WRITE; end
        S_WRITE: begin
          wcol <= wcol + 3'd1;
          if (wcol == gcols) begin
            if (ot == c.oct - 4'd1) state <= S_POP;
            else begin ot <= ot + 4'd1; state <= S_COMP; end
          end
        end
        S_POP: begin
          g <= g + 8'd1;
          if (g == ngroups - 8'd1) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_LOAD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  logic [7:0]  ocol;
  always_comb begin
    ocol = conv ? 8'(8 * int'(g) + int'(wcol)) : 8'(6 * int'(g) + int'(wcol));
    ctl = '0;
    ctl.mode           = c.mode;
    ctl.shift          = c.shift;
    ctl.relu           = c.relu;
    // Input Buffer reads for the column FIFO
    ctl.ib_rd_en       = (state == S_LOAD) && (col < c.width);
    ctl.ib_rd_bank     = c.in_bank;
    ctl.ib_rd_addr     = 16'(int'(ct) * W_MAX + int'(col));
    ctl.fifo_clear     = (state == S_IDLE) && start;
    ctl.fifo_push      = pd_v;
    ctl.fifo_push_last = pd_last;
    ctl.fifo_push_zero = pd_zero;
    ctl.fifo_push_ct   = pd_ct;
    ctl.fifo_pop       = (state == S_POP);
    ctl.fifo_pop_n     = step[3:0];
    // compute beats
    ctl.pre_valid      = (state == S_COMP);
    ctl.fifo_rd_ct     = ct;
    ctl.first          = (state == S_COMP) && (ct == '0);
    ctl.last           = (state == S_COMP) && (ct == c.ict - 4'd1);
    ctl.wb_re          = (state == S_COMP);
    ctl.wb_raddr       = 8'(int'(c.wbase) + int'(ot) * int'(c.ict) + int'(ct));
    // result writes (DEMUX: Conv -> Input Buffer, DeConv -> Output Buffer)
    ctl.wr_col         = wcol;
    ctl.ib_wr_bank     = c.out_bank;
    ctl.ib_wr_addr     = 16'(int'(ot) * W_MAX + int'(ocol));
    ctl.ib_wr_en       = {2{(state == S_WRITE) && conv && (ocol < out_w)}};
    ctl.ob_wr_addr     = 16'(int'(ot) * WO_MAX + int'(ocol));
    ctl.ob_wr_en       = (state == S_WRITE) && !conv && (ocol < out_w);
  end
endmodule
