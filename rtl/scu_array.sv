// scu_array -- united SCU array with adder tree and psum register file.
//
// PIF x POF SCUs: column c receives the transformed patch of input channel c
// from PreU c, row r belongs to output channel r. Every SCU has its own
// compressed weights and indices, so the sparsity pattern may differ per
// (output, input) channel pair, as the transform-domain pruning produces it.
//   Conv mode: a stored kernel has 8 non-zeros in slots 0..7 with 4-bit indices
//     into a 4x4 patch; they are replicated to the four Conv patches
//     (slot 8p+j gets weight j and index 16p+idx[j]).
//   DeConv mode: the 32 slots are used as stored, 6-bit indices into 8x8.
// Pipeline: stage 1 registers the SCU products; stage 2 scatters each product
// back to its transform-domain position, sums over the PIF input channels
// (adder tree) and writes the psum register file, overwriting it on `first`
// and accumulating otherwise (input-channel tiles). The cycle after a `last`
// beat has been accumulated, out_valid is high for one cycle and u holds the
// POF complete 64-entry sums, which go to the PostU array.
// Latency: in_valid(last) -> out_valid two cycles. One beat per cycle.
// The scatter-before-sum and the two-stage pipeline are this design's choices;
// the array shape, adder tree and psum register file follow the paper.
module scu_array
  import nvca_pkg::*;
#(
  parameter int PIF = 12,
  parameter int POF = 12
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  mode_e                               mode,
  input  logic                                in_valid,
  input  logic                                first,
  input  logic                                last,
  input  tin_t  [PIF-1:0][NPOS-1:0]           h,
  input  wgt_t  [POF-1:0][PIF-1:0][NNZ-1:0]   w,
  input  idx_t  [POF-1:0][PIF-1:0][NNZ-1:0]   idx,
  output logic                                out_valid,
  output acc_t  [POF-1:0][NPOS-1:0]           u
);
  wgt_t  [POF-1:0][PIF-1:0][NNZ-1:0] w_x;
  idx_t  [POF-1:0][PIF-1:0][NNZ-1:0] idx_x;
  prod_t [POF-1:0][PIF-1:0][NNZ-1:0] m;

  // Conv-mode replication of the eight stored non-zeros to four patches.
  always_comb begin
    for (int r = 0; r < POF; r++)
      for (int c = 0; c < PIF; c++)
        for (int j = 0; j < NNZ; j++) begin
          if (mode == MODE_CONV) begin
            w_x[r][c][j]   = w[r][c][j % CONV_NNZ];
            idx_x[r][c][j] = idx_t'(16 * (j / CONV_NNZ)) | {2'b00, idx[r][c][j % CONV_NNZ][3:0]};
          end else begin
            w_x[r][c][j]   = w[r][c][j];
            idx_x[r][c][j] = idx[r][c][j];
          end
        end
  end

  for (genvar r = 0; r < POF; r++) begin : g_row
    for (genvar c = 0; c < PIF; c++) begin : g_col
      scu u_scu (.h(h[c]), .idx(idx_x[r][c]), .w(w_x[r][c]), .m(m[r][c]));
    end
  end

  // Stage 1 registers.
  prod_t [POF-1:0][PIF-1:0][NNZ-1:0] m_q;
  idx_t  [POF-1:0][PIF-1:0][NNZ-1:0] idx_q;
  logic v_q, first_q, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0;
      m_q <= '0;   idx_q <= '0;
    end else begin
      v_q <= in_valid; first_q <= first; last_q <= last;
      if (in_valid) begin
        m_q   <= m;
        idx_q <= idx_x;
      end
    end
  end

  // Stage 2: scatter to positions and adder tree over input channels.
  acc_t [POF-1:0][NPOS-1:0] tree;
  always_comb begin
    tree = '0;
    for (int r = 0; r < POF; r++)
      for (int c = 0; c < PIF; c++)
        for (int j = 0; j < NNZ; j++)
          tree[r][idx_q[r][c][j]] = tree[r][idx_q[r][c][j]] + ACC_W'($signed(m_q[r][c][j]));
  end

  // Psum register file: read psum, add, write psum.
  acc_t [POF-1:0][NPOS-1:0] psum;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= v_q && last_q;
      if (v_q) begin
        for (int r = 0; r < POF; r++)
          for (int k = 0; k < NPOS; k++)
            psum[r][k] <= first_q ? tree[r][k] : psum[r][k] + tree[r][k];
      end
    end
  end

  assign u = psum;
endmodule
