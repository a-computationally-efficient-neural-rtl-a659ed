// nvca_pkg -- shared types and constants of the sparse fast-transform accelerator.
//
// Activations are 12-bit and weights 16-bit fixed point, as in the design's
// quantisation (weights FXP16, activations FXP12). Transform-domain input
// values grow by one bit per 1-D pre-transform stage (every row of B^T has at
// most two +/-1 entries), so 2-D transformed inputs are 14 bits. Products are
// 30 bits; the adder tree, psum accumulation and post-transform widths below
// are this design's own choice, sized so that nothing can overflow for up to
// 16 input-channel tiles. The mode flag selects F(2x2,3x3) Winograd
// convolution or T3(6x6,4x4) fast transposed convolution (stride 2).
package nvca_pkg;

  localparam int ACT_W   = 12;            // activation width (paper: FXP 12)
  localparam int WGT_W   = 16;            // weight width (paper: FXP 16)
  localparam int TIN_W   = ACT_W + 2;     // 2-D pre-transformed input
  localparam int PROD_W  = TIN_W + WGT_W; // SCU product
  localparam int ACC_W   = 40;            // psum accumulator (assumed)
  localparam int OUT_W   = ACC_W + 4;     // after 2-D post-transform (x3 per dim)

  localparam int NNZ     = 32;            // non-zero weights per SCU = 64*rho, rho = 50%
  localparam int NPOS    = 64;            // transform-domain positions per SCU (8x8)
  localparam int IDX_W   = 6;             // index into the 64 positions
  localparam int CONV_NNZ = 8;            // non-zeros of one 4x4 Winograd kernel at 50%

  localparam int IB_BANKS = 10;           // Input Buffer banks (paper: 10)
  localparam int OB_BANKS = 6;            // Output Buffer banks: one per DeConv output row

  typedef enum logic {MODE_CONV = 1'b0, MODE_DECONV = 1'b1} mode_e;

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [TIN_W-1:0]  tin_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [OUT_W-1:0]  out_t;
  typedef logic [IDX_W-1:0]         idx_t;




  localparam int BUS_W = 256;             // data bus width (assumed)
  localparam int BUS_AW = 32;             // external word address width (assumed)

  typedef enum logic [2:0] {
    DMA_LOAD_WGT  = 3'd0,   // external -> Weight Buffer
    DMA_LOAD_IDX  = 3'd1,   // external -> Index Buffer
    DMA_LOAD_ROW  = 3'd2,   // external -> one Input Buffer bank (one row, all tiles)
    DMA_STORE_WIN = 3'd3,   // Output Buffer (six rows) -> external or DCC
    DMA_LOAD_DCC  = 3'd4,   // external -> DCC input port
    DMA_STORE_DCC = 3'd5    // DCC output port -> external
  } dma_kind_e;

  typedef struct packed {
    dma_kind_e        kind;
    logic [BUS_AW-1:0] ext_addr;  // first external word
    logic [15:0]      len;        // words (LOAD_WGT/IDX/DCC, STORE_DCC)
    logic [3:0]       bank;       // LOAD_ROW: Input Buffer bank
    logic [7:0]       width;      // LOAD_ROW / STORE_WIN: row width in pixels
    logic [3:0]       tiles;      // LOAD_ROW / STORE_WIN: channel tiles
    logic             to_dcc;     // STORE_WIN: send to the DCC instead of memory
  } dma_cmd_t;

  // Operations of the heterogeneous layer chain (Conv -> Conv -> DeConv).
  typedef enum logic [2:0] {
    OP_LOAD   = 3'd0,   // fetch row `row` of layer A from external memory
    OP_CONV1  = 3'd1,   // compute rows 2p, 2p+1 of B from A rows 2p..2p+3
    OP_CONV2  = 3'd2,   // compute rows 2p, 2p+1 of C from B rows 2p..2p+3
    OP_DECONV = 3'd3,   // compute D rows 6q..6q+5 from C rows 3q..3q+4
    OP_STORE  = 3'd4    // move those six D rows to external memory
  } chain_op_e;

  typedef struct packed {
    chain_op_e        kind;
    logic [9:0]       row;       // LOAD: row; CONV: pair p; DECONV/STORE: window q
    logic [4:0][3:0]  in_bank;   // banks of the input rows
    logic [1:0][3:0]  out_bank;  // banks written (LOAD uses out_bank[0])
  } chain_op_t;

  // One row operation of the Sparse Fast Transform Core: a Conv producing two
  // output rows from four input rows, or a DeConv producing six output rows
  // from five input rows (issued by the layer-chaining scheduler).
  typedef struct packed {
    mode_e            mode;
    logic [4:0][3:0]  in_bank;   // Input Buffer banks of input rows 0..4 (Conv: 0..3)
    logic [1:0][3:0]  out_bank;  // Conv: banks of the two output rows
    logic [7:0]       width;     // input row width in pixels
    logic [3:0]       ict;       // input channel tiles (channels / PIF)
    logic [3:0]       oct;       // output channel tiles (channels / POF)
    logic [7:0]       wbase;     // Weight/Index Buffer address of the layer
    logic [5:0]       shift;     // requantisation shift
    logic             relu;      // ReLU before requantisation
  } sftc_cmd_t;

  // Control bundle from the SFTC controller to the SFTC datapath.
  typedef struct packed {
    mode_e            mode;
    logic             ib_rd_en;
    logic [4:0][3:0]  ib_rd_bank;
    logic [15:0]      ib_rd_addr;
    logic             fifo_clear;
    logic             fifo_push;
    logic             fifo_push_last;
    logic             fifo_push_zero;
    logic [3:0]       fifo_push_ct;
    logic             fifo_pop;
    logic [3:0]       fifo_pop_n;
    logic [3:0]       fifo_rd_ct;
    logic             pre_valid;
    logic             first;
    logic             last;
    logic             wb_re;
    logic [7:0]       wb_raddr;
    logic [5:0]       shift;
    logic             relu;
    logic [1:0]       ib_wr_en;
    logic [1:0][3:0]  ib_wr_bank;
    logic [15:0]      ib_wr_addr;
    logic             ob_wr_en;
    logic [15:0]      ob_wr_addr;
    logic [2:0]       wr_col;
  } sftc_ctl_t;

  // Requantisation of a post-transformed sum back to a 12-bit activation:
  // arithmetic right shift, optional ReLU, saturation.
  function automatic act_t requant(input out_t v, input logic [5:0] shift, input logic relu);
    out_t s;
    s = v >>> shift;
    if (relu && s < 0) s = '0;
    if (s > out_t'(2**(ACT_W-1)-1)) return act_t'(2**(ACT_W-1)-1);
    if (s < -out_t'(2**(ACT_W-1)))  return act_t'(-(2**(ACT_W-1)));
    return act_t'(s);
  endfunction

endpackage
