// chain_sched -- run-time scheduler of the heterogeneous layer chaining dataflow.
//
// A chain is Conv -> Conv -> DeConv (feature maps A -> B -> C -> D). Row i of
// A, B or C is always kept in Input Buffer bank i % 10; a bank is overwritten
// as soon as the row in it will not be read again, so the intermediate maps B
// and C never leave the chip and only A is read and D written off chip.
// Dependencies (valid 3x3 Conv producing two rows per step, T3 DeConv reading
// five rows per step of three):
//   B rows 2p,2p+1 need A rows 2p..2p+3;  C rows likewise from B;
//   D window q (six rows) needs C rows 3q..3q+4.
// A row is dead once the last operation reading it has been issued
// (A_i: Conv1 pair min(i/2, last); C_i: DeConv window min(i/3, last)).
// The scheduler runs phases LOAD -> CONV1 -> CONV2 -> DECONV(+STORE) in turn
// and in each phase issues operations while their inputs are present and
// their target banks are free; an operation may overwrite the rows it is
// itself the last reader of. For a 10-bank buffer this reproduces the
// published bank schedule step for step (A0-A9; B0-B7; C0-C5 and D0-D5;
// A10-A12; B8,B9; C6,C7 and D6-D11; A13-A15; B10-B13; C8-C11 ...).
// The bank mapping and schedule are the paper's; the phase rule that yields
// it, the handshake and the stall detection are this design's.
// Interface: start with ha = rows of A (even, ha-4 = 3k+2); op_valid/op is
// held until op_done; done pulses at the end; stuck is raised (and the
// scheduler stops) if a full round of phases can issue nothing.
module chain_sched
  import nvca_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [9:0]  ha,
  output logic        op_valid,
  output chain_op_t   op,
  input  logic        op_done,
  output logic        busy,
  output logic        done,
  output logic        stuck
);
  typedef enum logic [1:0] {PH_LOAD, PH_CONV1, PH_CONV2, PH_DEC} phase_e;
  typedef enum logic [1:0] {S_IDLE, S_PICK, S_WAIT, S_STORE} state_e;

  state_e     state;
  phase_e     phase;
  logic [9:0] n_a, p_b, p_c, q_d;          // progress counters
  logic [9:0] tot_b, tot_c, tot_d;         // totals (pairs / windows)
  logic [2:0] idle_phases;                 // consecutive phases without an issue
  logic       issued_in_phase;

  // Bank occupancy: valid, layer (0 = A, 1 = B, 2 = C) and row index.
  logic [IB_BANKS-1:0]       occ_v;
  logic [IB_BANKS-1:0][1:0]  occ_l;
  logic [IB_BANKS-1:0][9:0]  occ_r;

  function automatic logic [9:0] min10(input logic [9:0] a, input logic [9:0] b);
    return (a < b) ? a : b;
  endfunction

  // Is bank b free, given the counters after a candidate operation?
  function automatic logic bank_free(input int b, input logic [9:0] pb, input logic [9:0] pc,
                                     input logic [9:0] qd);
    if (!occ_v[b]) return 1'b1;
    case (occ_l[b])
      2'd0:    return pb > min10(occ_r[b] >> 1, tot_b - 10'd1);
      2'd1:    return pc > min10(occ_r[b] >> 1, tot_c - 10'd1);
      default: return qd > min10(10'(occ_r[b] / 3), tot_d - 10'd1);
    endcase
  endfunction

  function automatic logic [3:0] bank_of(input logic [9:0] r);
    return 4'(r % IB_BANKS);
  endfunction

  logic rdy_load, rdy_c1, rdy_c2, rdy_dec;
  always_comb begin
    rdy_load = (n_a < ha) && bank_free(int'(bank_of(n_a)), p_b, p_c, q_d);
    rdy_c1   = (p_b < tot_b) && (n_a >= 10'(2 * p_b + 4)) &&
               bank_free(int'(bank_of(10'(2 * p_b))),     p_b + 10'd1, p_c, q_d) &&
               bank_free(int'(bank_of(10'(2 * p_b + 1))), p_b + 10'd1, p_c, q_d);
    rdy_c2   = (p_c < tot_c) && (p_b >= p_c + 10'd2) &&
               bank_free(int'(bank_of(10'(2 * p_c))),     p_b, p_c + 10'd1, q_d) &&
               bank_free(int'(bank_of(10'(2 * p_c + 1))), p_b, p_c + 10'd1, q_d);
    rdy_dec  = (q_d < tot_d) && (10'(2 * p_c) >= 10'(3 * q_d + 5));
  end

  logic cur_rdy;
  always_comb begin
    case (phase)
      PH_LOAD:  cur_rdy = rdy_load;
      PH_CONV1: cur_rdy = rdy_c1;
      PH_CONV2: cur_rdy = rdy_c2;
      default:  cur_rdy = rdy_dec;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; phase <= PH_LOAD;
      n_a <= '0; p_b <= '0; p_c <= '0; q_d <= '0;
      tot_b <= '0; tot_c <= '0; tot_d <= '0;
      idle_phases <= '0; issued_in_phase <= 1'b0;
      occ_v <= '0; occ_l <= '0; occ_r <= '0;
      op_valid <= 1'b0; op <= '0; done <= 1'b0; stuck <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          n_a <= '0; p_b <= '0; p_c <= '0; q_d <= '0;
          tot_b <= (ha - 10'd2) >> 1;
          tot_c <= (ha - 10'd4) >> 1;
          tot_d <= 10'((int'(ha) - 6) / 3);
          occ_v <= '0; phase <= PH_LOAD; idle_phases <= '0;
          issued_in_phase <= 1'b0; stuck <= 1'b0;
          state <= S_PICK;
        end
        S_PICK: begin
          if (q_d == tot_d) begin
            state <= S_IDLE; done <= 1'b1;
          end else if (cur_rdy) begin
            op_valid <= 1'b1;
            issued_in_phase <= 1'b1;
            op.in_bank  <= '0;
            op.out_bank <= '0;
            case (phase)
              PH_LOAD: begin
                op.kind <= OP_LOAD; op.row <= n_a;
                op.out_bank[0] <= bank_of(n_a);
              end
              PH_CONV1, PH_CONV2: begin
                logic [9:0] p;
                p = (phase == PH_CONV1) ? p_b : p_c;
                op.kind <= (phase == PH_CONV1) ? OP_CONV1 : OP_CONV2;
                op.row  <= p;
                for (int k = 0; k < 4; k++) op.in_bank[k] <= bank_of(10'(2 * p + 10'(k)));
                op.out_bank[0] <= bank_of(10'(2 * p));
                op.out_bank[1] <= bank_of(10'(2 * p + 1));
              end
              default: begin
                op.kind <= OP_DECONV; op.row <= q_d;
                for (int k = 0; k < 5; k++) op.in_bank[k] <= bank_of(10'(3 * q_d + 10'(k)));
              end
            endcase
            state <= S_WAIT;
          end else begin
            // nothing more to do in this phase: go to the next one
            phase <= phase_e'(phase + 2'd1);
            issued_in_phase <= 1'b0;
            if (issued_in_phase) idle_phases <= '0;
            else if (idle_phases == 3'd4) begin stuck <= 1'b1; state <= S_IDLE; end
            else idle_phases <= idle_phases + 3'd1;
          end
        end
        S_WAIT: if (op_done) begin
          op_valid <= 1'b0;
          case (op.kind)
            OP_LOAD: begin
              n_a <= n_a + 10'd1;
              occ_v[op.out_bank[0]] <= 1'b1; occ_l[op.out_bank[0]] <= 2'd0;
              occ_r[op.out_bank[0]] <= op.row;
              state <= S_PICK;
            end
            OP_CONV1, OP_CONV2: begin
              if (op.kind == OP_CONV1) p_b <= p_b + 10'd1; else p_c <= p_c + 10'd1;
              for (int k = 0; k < 2; k++) begin
                occ_v[op.out_bank[k]] <= 1'b1;
                occ_l[op.out_bank[k]] <= (op.kind == OP_CONV1) ? 2'd1 : 2'd2;
                occ_r[op.out_bank[k]] <= 10'(2 * op.row + 10'(k));
              end
              state <= S_PICK;
            end
            OP_DECONV: begin
              q_d <= q_d + 10'd1;
              op_valid <= 1'b1; op.kind <= OP_STORE;
              state <= S_STORE;
            end
            default: state <= S_PICK;
          endcase
        end
        S_STORE: begin
          // STORE of the window just computed is presented from here on
          state <= S_WAIT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
