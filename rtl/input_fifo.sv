// input_fifo -- column FIFO between the Input Buffer and the PreU array.
//
// Holds up to 10 columns of up to 5 rows (all CT_MAX input-channel tiles of
// each), i.e. one Conv window (4 rows x 10 columns = four 4x4 patches with
// 2-column overlaps) or one DeConv window (5 x 5). Adjacent windows overlap
// (Conv: 2 columns, DeConv: 2 columns), so after a patch the controller pops
// only 8 (Conv) or 3 (DeConv) columns and the overlap stays here instead of
// being re-read from the Input Buffer; that is this design's reading of the
// FIFO placed beside the direct Input Buffer -> PreU path.
// push: one word per row for column position `cnt`, tile push_ct; push_last
// closes the column. pop: remove pop_n columns from the head (not together
// with push). clear: empty. The window of tile rd_ct is presented
// combinationally in the PreU input layout (see preu).
module input_fifo
  import nvca_pkg::*;
#(
  parameter int PIF    = 12,
  parameter int CT_MAX = 6
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  mode_e                       mode,
  input  logic                        clear,
  input  logic                        push,
  input  logic                        push_last,
  input  logic [$clog2(CT_MAX)-1:0]   push_ct,
  input  act_t [4:0][PIF-1:0]         push_data,
  input  logic                        pop,
  input  logic [3:0]                  pop_n,
  input  logic [$clog2(CT_MAX)-1:0]   rd_ct,
  output logic [3:0]                  count,
  output act_t [PIF-1:0][15:0][4:0]   window
);
  localparam int COLS = 10;
  act_t [PIF-1:0] mem [COLS][5][CT_MAX];
  logic [3:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (clear) begin
      cnt <= '0;
    end else if (pop) begin
      for (int c = 0; c < COLS; c++)
        if (c + int'(pop_n) < COLS)
          for (int r = 0; r < 5; r++)
            for (int t = 0; t < CT_MAX; t++)
              mem[c][r][t] <= mem[c + int'(pop_n)][r][t];
      cnt <= (cnt > pop_n) ? cnt - pop_n : '0;
    end else if (push) begin
      for (int r = 0; r < 5; r++) mem[cnt][r][push_ct] <= push_data[r];
      if (push_last) cnt <= cnt + 4'd1;
    end
  end

  assign count = cnt;

  // Window in PreU layout, per input channel.
  always_comb begin
    window = '0;
    for (int ch = 0; ch < PIF; ch++) begin
      if (mode == MODE_DECONV) begin
        for (int r = 0; r < 5; r++)
          for (int c = 0; c < 5; c++)
            window[ch][r][c] = mem[c][r][rd_ct][ch];
      end else begin
        for (int p = 0; p < 4; p++)
          for (int r = 0; r < 4; r++)
            for (int c = 0; c < 4; c++)
              window[ch][4*p+r][c] = mem[2*p+c][r][rd_ct][ch];
      end
    end
  end
endmodule
