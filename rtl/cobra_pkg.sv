// cobra_pkg: types and default sizes shared by the binary transformer
// accelerator. The defaults are the BERT-base configuration evaluated on
// the larger board: hidden size 768, 12 heads, sequence length 512, FFN
// ratio 4, 32 RBMM processing elements and 13-bit integer outputs.
// The RBMM operation modes M1-M4, F1, F2 follow the paper; their binary
// encoding, the mask modes and the configuration record are this design's own.
package cobra_pkg;

  localparam int unsigned D_DEF   = 768;  // hidden dimension d
  localparam int unsigned H_DEF   = 12;   // heads h
  localparam int unsigned L_DEF   = 512;  // sequence length l
  localparam int unsigned R_DEF   = 4;    // FF_size = R * d
  localparam int unsigned NPE_DEF = 32;   // RBMM PEs
  localparam int unsigned BO_DEF  = 13;   // RBMM engine output width B_o
  localparam int unsigned AXI_DW  = 128;  // AXI data width (own choice)
  localparam int unsigned AXI_AW  = 32;   // AXI address width (own choice)

  // RBMM operation modes
  typedef enum logic [2:0] {
    MODE_M1 = 3'd0,  // Q/K/V projection, binary output
    MODE_M2 = 3'd1,  // attention score with SPS, h-bit concat output
    MODE_M3 = 3'd2,  // context = score x V, (0,1) A operand, binary output
    MODE_M4 = 3'd3,  // attention output linear layer, integer output
    MODE_F1 = 3'd4,  // FFN layer I with ReLU+unsigned binarisation
    MODE_F2 = 3'd5   // FFN layer II, (0,1) A operand, accumulating integer
  } rbmm_mode_e;

  // attention mask applied in M2
  typedef enum logic [1:0] {
    MASK_NONE   = 2'd0,
    MASK_PAD    = 2'd1,  // column index >= mask_len is masked
    MASK_CAUSAL = 2'd2   // column index > row index is masked
  } mask_mode_e;

  // destination buffer of an RBMM run
  typedef enum logic [2:0] {
    DST_Q   = 3'd0,  // binary Q rows
    DST_K   = 3'd1,  // binary K rows, banked as B operand of M2
    DST_V   = 3'd2,  // binary V, stored transposed as B operand of M3
    DST_S   = 3'd3,  // per-head attention score rows (M2)
    DST_CTX = 3'd4,  // binary context rows (M3)
    DST_E   = 3'd5,  // integer output (M4, F2)
    DST_H   = 3'd6   // binary FFN hidden rows (F1)
  } rbmm_dst_e;

  // regions of the A-operand row buffer
  typedef enum logic [1:0] {
    AREG_X   = 2'd0,  // binarised layer input / LayerNorm output
    AREG_Q   = 2'd1,
    AREG_CTX = 2'd2,
    AREG_H   = 2'd3
  } areg_e;

  // side band that travels with an RBMM invocation
  typedef struct packed {
    logic [7:0]  k;  // head (M3)
    logic [11:0] i;  // row
    logic [11:0] g;  // column group
  } rbmm_tag_t;

  // operations sequenced by the COBRA controller
  typedef enum logic [2:0] {
    OP_LOADX = 3'd0,  // DMA: layer input (16-bit) into the residual buffer
    OP_BINX  = 3'd1,  // binarise the residual buffer into A-operand rows
    OP_LOADW = 3'd2,  // DMA: one d x d binary weight matrix into the B buffer
    OP_LOADV = 3'd3,  // DMA: one d-long 16-bit vector (bias, gamma, beta)
    OP_RUN   = 3'd4,  // one RBMM run
    OP_LN    = 3'd5,  // residual add + LayerNorm over all rows
    OP_STORE = 3'd6   // DMA: residual buffer (layer output) to DDR
  } op_e;

  // vector slots of the parameter buffers
  typedef enum logic [1:0] {
    VS_BIAS  = 2'd0,
    VS_GAMMA = 2'd1,
    VS_BETA  = 2'd2
  } vslot_e;

  typedef struct packed {
    op_e        op;
    logic [4:0] mat;   // weight matrix index in DDR
    logic [4:0] vec;   // vector index in DDR
    vslot_e     slot;  // target of OP_LOADV
    rbmm_mode_e mode;
    rbmm_dst_e  dst;
    logic [3:0] r;     // FFN chunk
    logic       ln;    // which LayerNorm (0: attention, 1: FFN)
  } op_desc_t;

  // run-time configuration of one encoder layer
  typedef struct packed {
    logic [AXI_AW-1:0] x_addr;     // layer input, l x d Q8.8 values, row major
    logic [AXI_AW-1:0] y_addr;     // layer output, same layout
    logic [AXI_AW-1:0] w_addr;     // binary weight matrices
    logic [AXI_AW-1:0] p_addr;     // 16-bit parameter vectors
    mask_mode_e        mask_mode;  // attention mask of M2
    logic [15:0]       mask_len;   // padding mask: valid sequence length
    logic signed [15:0] scale1;    // Q8.8 scale of the M4 output
    logic signed [15:0] scale2;    // Q8.8 scale of the F2 output
  } cobra_cfg_t;

  // A operand is (0,1): AND path and DC INPUT are used
  function automatic logic mode_unsigned_a(rbmm_mode_e m);
    return (m == MODE_M3) || (m == MODE_F2);
  endfunction

endpackage
