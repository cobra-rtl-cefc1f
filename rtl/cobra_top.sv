// cobra_top: binary transformer encoder-layer accelerator.
// One quantisation-fused RBMM engine (NPE processing elements of H head
// PEs each) executes every matrix product of the layer in six modes
// (M1 Q/K/V, M2 scores with Shifted Polarized Softmax, M3 context, M4
// attention output, F1/F2 chunked FFN); a LayerNorm unit does the residual
// additions and normalisations; the data packing conversion unit writes
// the binary results back as datapacks; the controller sequences one layer;
// an AXI4 master moves weights, parameters and activations from and to DDR.
//
// On-chip buffers (all sdp_ram, one-cycle read latency):
//   abuf  4L x D    binary A-operand rows: regions X, Q, CTX, H
//   sbuf  H banks of L x L   per-head binary attention scores
//   bbuf  NPE banks of (2D/NPE + L/NPE) x D   B operands: weight columns,
//         K rows, transposed V columns; bank = column index mod NPE
//   ebuf  L*D/NPE x NPE*BO   integer RBMM output (M4, F2 accumulation)
//   rbuf  L*D/NPE x NPE*16   residual / layer values, Q8.8
//   bias, gamma, beta  D/NPE x NPE*16;  dch L x H*BO, dcf L x BO  DC counts
//
// DDR layout (byte addresses, 16-byte beats, DW = 128):
//   x_addr/y_addr: l*d 16-bit values, row major
//   w_addr + m*D*WB*16: matrix m, D column datapacks of WB = ceil(D/128)
//     beats, bit n of the datapack = row n; m = 0 Wq, 1 Wk, 2 Wv, 3 Wo,
//     4+2r Y_r (FFN I chunk r), 5+2r Z_r (FFN II chunk r: rows r*D to
//     r*D+D-1 of the FF x d matrix, bit n of column p = Z[r*D+n][p])
//   p_addr + v*D*2: vector v of D 16-bit values; v = 0..3 thresholds of
//     Q, K, V, context; 4+r F1 thresholds (ReLU folded); 4+R, 5+R gamma1,
//     beta1; 6+R, 7+R gamma2, beta2.
// start runs one layer; done pulses when the output is stored.
// The block structure, the modes, the FFN chunking and the DC mechanism
// follow the paper; buffer organisation, DDR layout, number formats and
// the handshakes are this design's own.
module cobra_top
  import cobra_pkg::*;
#(
  parameter int unsigned L   = 512,
  parameter int unsigned D   = 768,
  parameter int unsigned H   = 12,
  parameter int unsigned R   = 4,
  parameter int unsigned NPE = 32,
  parameter int unsigned BO  = 13,
  parameter int unsigned DW  = 128,
  parameter int unsigned AW  = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  input  cobra_cfg_t          cfg,
  input  logic signed [15:0]  sps_t [H],   // per-head SPS thresholds T_k
  output logic [7:0]          step,
  output logic                bus_err,
  // AXI4 master to DDR
  output logic [AW-1:0]       m_araddr,
  output logic [7:0]          m_arlen,
  output logic [2:0]          m_arsize,
  output logic [1:0]          m_arburst,
  output logic                m_arvalid,
  input  logic                m_arready,
  input  logic [DW-1:0]       m_rdata,
  input  logic                m_rlast,
  input  logic                m_rvalid,
  output logic                m_rready,
  output logic [AW-1:0]       m_awaddr,
  output logic [7:0]          m_awlen,
  output logic [2:0]          m_awsize,
  output logic [1:0]          m_awburst,
  output logic                m_awvalid,
  input  logic                m_awready,
  output logic [DW-1:0]       m_wdata,
  output logic [DW/8-1:0]     m_wstrb,
  output logic                m_wlast,
  output logic                m_wvalid,
  input  logic                m_wready,
  input  logic [1:0]          m_bresp,
  input  logic                m_bvalid,
  output logic                m_bready
);
  localparam int unsigned DH    = D / H;
  localparam int unsigned NG    = D / NPE;
  localparam int unsigned GL    = L / NPE;
  localparam int unsigned GH    = DH / NPE;
  localparam int unsigned EPB   = DW / 16;
  localparam int unsigned BPE   = NPE / EPB;
  localparam int unsigned WB    = (D + DW - 1) / DW;
  localparam int unsigned BYTES = DW / 8;
  localparam int unsigned BD    = 2 * NG + GL;
  localparam int unsigned BA    = $clog2(BD);
  localparam int unsigned RA    = $clog2(4 * L);
  localparam int unsigned EA    = $clog2(L * NG);
  localparam int unsigned IA    = $clog2(L);
  localparam int unsigned GA    = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned CW    = 24;
  localparam int unsigned TAGW  = $bits(rbmm_tag_t);

  initial begin
    assert (D % H == 0 && D % NPE == 0 && DH % NPE == 0 && L % NPE == 0)
      else $fatal(1, "D, D/H and L must be multiples of NPE");
    assert (NPE % EPB == 0) else $fatal(1, "NPE must be a multiple of DW/16");
    assert (L <= D) else $fatal(1, "the sequence length must not exceed d");
    assert (H <= BO) else $fatal(1, "M2 packs H bits into a BO-bit result");
  end

  // ------------------------------------------------------------------
  // controller
  // ------------------------------------------------------------------
  logic     op_start, op_done;
  op_desc_t op;
  cobra_ctrl #(.R(R)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .op_start, .op, .op_done, .step
  );

  wire is_loadx = (op.op == OP_LOADX);
  wire is_binx  = (op.op == OP_BINX);
  wire is_loadw = (op.op == OP_LOADW);
  wire is_loadv = (op.op == OP_LOADV);
  wire is_run   = (op.op == OP_RUN);
  wire is_ln    = (op.op == OP_LN);
  wire is_store = (op.op == OP_STORE);

  // ------------------------------------------------------------------
  // AXI master
  // ------------------------------------------------------------------
  logic          rd_start, rd_done, rd_busy, rd_bv;
  logic [AW-1:0] rd_addr;
  logic [CW-1:0] rd_beats, rd_bidx;
  logic [DW-1:0] rd_bdata;
  logic          wr_start, wr_done, wr_busy, src_req;
  logic [CW-1:0] wr_beats, src_idx;
  logic [DW-1:0] src_data;

  always_comb begin
    rd_addr  = cfg.x_addr;
    rd_beats = CW'(L * D / EPB);
    if (is_loadw) begin
      rd_addr  = cfg.w_addr + AW'(op.mat) * AW'(D * WB * BYTES);
      rd_beats = CW'(D * WB);
    end else if (is_loadv) begin
      rd_addr  = cfg.p_addr + AW'(op.vec) * AW'(D * 2);
      rd_beats = CW'(D / EPB);
    end
  end
  assign rd_start = op_start && (is_loadx || is_loadw || is_loadv);
  assign wr_start = op_start && is_store;
  assign wr_beats = CW'(L * D / EPB);

  axi_dma #(.DW(DW), .AW(AW), .CW(CW)) u_dma (
    .clk, .rst_n,
    .rd_start, .rd_addr, .rd_beats, .rd_busy, .rd_done,
    .rd_beat_valid(rd_bv), .rd_beat_idx(rd_bidx), .rd_beat_data(rd_bdata),
    .wr_start, .wr_addr(cfg.y_addr), .wr_beats, .wr_busy, .wr_done,
    .src_req, .src_idx, .src_data,
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready, .bus_err
  );

  // a beat of 16-bit values placed into an NPE-lane word
  logic [NPE*16-1:0] beat_word, beat_mask;
  always_comb begin
    int unsigned off;
    off       = (int'(rd_bidx) % BPE) * DW;
    beat_word = (NPE*16)'(rd_bdata) << off;
    beat_mask = (NPE*16)'({DW{1'b1}}) << off;
  end

  // ------------------------------------------------------------------
  // RBMM read/write control and engine
  // ------------------------------------------------------------------
  logic                 rw_busy, rw_done, iss_v, iss_first, iss_last;
  logic [$clog2(H)-1:0] iss_k;
  logic [IA-1:0]        iss_i;
  logic [15:0]          iss_g;
  logic [NPE-1:0]       iss_mask;

  rbmm_rw_ctrl #(.L(L), .D(D), .H(H), .NPE(NPE)) u_rw (
    .clk, .rst_n, .start(op_start && is_run), .mode(op.mode),
    .mask_mode(cfg.mask_mode), .mask_len(($clog2(L+1))'(cfg.mask_len)),
    .busy(rw_busy), .done(rw_done),
    .iss_valid(iss_v), .iss_first, .iss_last, .iss_k, .iss_i, .iss_g, .iss_mask
  );

  // buffer read data
  logic [D-1:0]            abuf_rdata;
  logic [L-1:0]            sbuf_rdata [H];
  logic [D-1:0]            bbuf_rdata [NPE];
  logic [NPE-1:0][BO-1:0]  ebuf_rdata;
  logic [NPE-1:0][15:0]    rbuf_rdata, bias_rdata, gamma_rdata, beta_rdata;
  logic [H-1:0][BO-1:0]    dch_rdata;
  logic [BO-1:0]           dcf_rdata;

  // issue stage -> engine (one cycle for the buffer reads)
  logic                 e_v, e_first, e_last;
  rbmm_tag_t            e_tag;
  logic [NPE-1:0]       e_mask;
  logic [$clog2(H)-1:0] e_k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_v <= 1'b0; e_first <= 1'b0; e_last <= 1'b0; e_tag <= '0; e_mask <= '0; e_k <= '0;
    end else begin
      e_v     <= iss_v;
      e_first <= iss_first;
      e_last  <= iss_last;
      e_tag   <= '{k: 8'(iss_k), i: 12'(iss_i), g: 12'(iss_g)};
      e_mask  <= iss_mask;
      e_k     <= iss_k;
    end
  end

  logic [D-1:0]         eng_a;
  logic signed [BO-1:0] eng_thr  [H];
  logic signed [BO-1:0] eng_bias [NPE];
  logic signed [BO-1:0] eng_prev [NPE];
  logic [BO-1:0]        eng_dcin;

  always_comb begin
    eng_a = (op.mode == MODE_M3) ? D'(sbuf_rdata[e_k]) : abuf_rdata;
    for (int k = 0; k < H; k++) begin
      unique case (op.mode)
        MODE_M2: eng_thr[k] = BO'(sps_t[k]) + BO'(DH);
        MODE_M3: eng_thr[k] = BO'(L / H);
        default: eng_thr[k] = BO'(DH);
      endcase
    end
    for (int p = 0; p < NPE; p++) begin
      unique case (op.mode)
        MODE_M1, MODE_F1: eng_bias[p] = BO'(signed'(bias_rdata[p]));
        MODE_M3:          eng_bias[p] = BO'(signed'(bias_rdata[p])) + BO'(L % H);
        default:          eng_bias[p] = '0;
      endcase
      eng_prev[p] = (op.mode == MODE_F2 && op.r != 0) ? signed'(ebuf_rdata[p]) : '0;
    end
    unique case (op.mode)
      MODE_M3: eng_dcin = dch_rdata[e_k];
      MODE_F2: eng_dcin = dcf_rdata;
      default: eng_dcin = '0;
    endcase
  end

  logic                 r_v, r_first, r_last;
  logic [TAGW-1:0]      r_tagw;
  logic signed [BO-1:0] r_out [NPE];
  logic [BO-1:0]        r_dch [H];
  logic [BO-1:0]        r_dcf;

  rbmm_engine #(.D(D), .H(H), .NPE(NPE), .BO(BO), .TAGW(TAGW)) u_engine (
    .clk, .rst_n,
    .in_valid(e_v), .in_first(e_first), .in_last(e_last), .in_tag(e_tag),
    .mode(op.mode), .mask(e_mask), .a(eng_a), .b(bbuf_rdata),
    .thr(eng_thr), .bias(eng_bias), .dc_in(eng_dcin), .prev(eng_prev),
    .out_valid(r_v), .out_first(r_first), .out_last(r_last), .out_tag(r_tagw),
    .out(r_out), .dc_head_sum(r_dch), .dc_full_sum(r_dcf)
  );

  // ------------------------------------------------------------------
  // LayerNorm and input binarisation
  // ------------------------------------------------------------------
  logic                 ln_busy, ln_done, ln_ov;
  logic [EA-1:0]        ln_res_raddr, ln_e_raddr, ln_oaddr;
  logic [GA-1:0]        ln_par_raddr, ln_og;
  logic [IA-1:0]        ln_orow;
  logic [NPE-1:0][15:0] ln_y;

  layernorm_unit #(.L(L), .D(D), .NPE(NPE), .BO(BO)) u_ln (
    .clk, .rst_n, .start(op_start && is_ln), .scale(op.ln ? cfg.scale2 : cfg.scale1),
    .busy(ln_busy), .done(ln_done),
    .res_raddr(ln_res_raddr), .res_rdata(rbuf_rdata),
    .e_raddr(ln_e_raddr), .e_rdata(ebuf_rdata),
    .par_raddr(ln_par_raddr), .gamma_rdata, .beta_rdata,
    .out_valid(ln_ov), .out_addr(ln_oaddr), .out_row(ln_orow), .out_g(ln_og), .out_y(ln_y)
  );

  // binarise the loaded input: walk all entries of the residual buffer
  logic          bx_run, bx_v, bx_done;
  logic [EA-1:0] bx_ptr, bx_ptr_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bx_run <= 1'b0; bx_v <= 1'b0; bx_done <= 1'b0; bx_ptr <= '0; bx_ptr_d <= '0;
    end else begin
      bx_done  <= 1'b0;
      bx_v     <= bx_run;
      bx_ptr_d <= bx_ptr;
      if (op_start && is_binx) begin
        bx_run <= 1'b1; bx_ptr <= '0;
      end else if (bx_run) begin
        if (bx_ptr == EA'(L * NG - 1)) bx_run <= 1'b0;
        else bx_ptr <= bx_ptr + 1'b1;
      end
      if (bx_v && !bx_run) bx_done <= 1'b1;
    end
  end

  // store: residual buffer beats towards the DMA
  logic [CW-1:0] src_idx_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) src_idx_d <= '0;
    else        src_idx_d <= src_idx;
  end
  logic [NPE*16-1:0] rbuf_flat;
  assign rbuf_flat = rbuf_rdata;
  assign src_data  = rbuf_flat[(int'(src_idx_d) % BPE) * DW +: DW];

  // ------------------------------------------------------------------
  // data packing conversion
  // ------------------------------------------------------------------
  logic                   c_row_we, c_s_we, c_e_we, c_dch_we, c_dcf_we;
  logic [RA-1:0]          c_row_addr;
  logic [D-1:0]           c_row_wdata, c_row_wmask;
  logic [NPE-1:0]         c_b_we;
  logic [BA-1:0]          c_b_addr;
  logic [D-1:0]           c_b_wdata [NPE];
  logic [D-1:0]           c_b_wmask;
  logic [IA-1:0]          c_s_addr, c_dc_addr;
  logic [L-1:0]           c_s_wdata [H];
  logic [L-1:0]           c_s_wmask;
  logic [EA-1:0]          c_e_addr;
  logic [NPE-1:0][BO-1:0] c_e_wdata;
  logic [H-1:0][BO-1:0]   c_dch_wdata;
  logic [BO-1:0]          c_dcf_wdata;

  logic                 x_valid;
  logic [IA-1:0]        x_row;
  logic [15:0]          x_g;
  always_comb begin
    x_valid = ln_ov || bx_v;
    x_row   = ln_ov ? ln_orow : IA'(int'(bx_ptr_d) / NG);
    x_g     = ln_ov ? 16'(ln_og) : 16'(int'(bx_ptr_d) % NG);
  end

  datapack_conv #(.L(L), .D(D), .H(H), .NPE(NPE), .BO(BO)) u_conv (
    .r_valid(r_v), .r_last, .r_dst(op.dst), .r_tag(rbmm_tag_t'(r_tagw)),
    .r_out, .r_dch, .r_dcf,
    .x_valid, .x_row, .x_g, .x_val(ln_ov ? ln_y : rbuf_rdata),
    .row_we(c_row_we), .row_addr(c_row_addr), .row_wdata(c_row_wdata), .row_wmask(c_row_wmask),
    .b_we(c_b_we), .b_addr(c_b_addr), .b_wdata(c_b_wdata), .b_wmask(c_b_wmask),
    .s_we(c_s_we), .s_addr(c_s_addr), .s_wdata(c_s_wdata), .s_wmask(c_s_wmask),
    .e_we(c_e_we), .e_addr(c_e_addr), .e_wdata(c_e_wdata),
    .dch_we(c_dch_we), .dcf_we(c_dcf_we), .dc_addr(c_dc_addr),
    .dch_wdata(c_dch_wdata), .dcf_wdata(c_dcf_wdata)
  );

  // ------------------------------------------------------------------
  // on-chip buffers
  // ------------------------------------------------------------------
  areg_e a_region;
  always_comb begin
    unique case (op.mode)
      MODE_M2: a_region = AREG_Q;
      MODE_M4: a_region = AREG_CTX;
      MODE_F2: a_region = AREG_H;
      default: a_region = AREG_X;
    endcase
  end

  sdp_ram #(.WIDTH(D), .DEPTH(4 * L)) u_abuf (
    .clk, .we(c_row_we), .waddr(c_row_addr), .wdata(c_row_wdata), .wmask(c_row_wmask),
    .raddr(RA'(int'(a_region) * L) + RA'(iss_i)), .rdata(abuf_rdata)
  );

  for (genvar k = 0; k < H; k++) begin : g_sbuf
    sdp_ram #(.WIDTH(L), .DEPTH(L)) u_s (
      .clk, .we(c_s_we), .waddr(c_s_addr), .wdata(c_s_wdata[k]), .wmask(c_s_wmask),
      .raddr(iss_i), .rdata(sbuf_rdata[k])
    );
  end

  // B buffer: DMA fills weight columns, the packer fills K and V^T
  logic [BA-1:0] b_raddr;
  always_comb begin
    unique case (op.mode)
      MODE_M2: b_raddr = BA'(NG) + BA'(iss_g);
      MODE_M3: b_raddr = BA'(NG + GL) + BA'(int'(iss_k) * GH) + BA'(iss_g);
      default: b_raddr = BA'(iss_g);
    endcase
  end

  for (genvar p = 0; p < NPE; p++) begin : g_bbuf
    logic          we;
    logic [BA-1:0] waddr;
    logic [D-1:0]  wdata, wmask;
    always_comb begin
      int unsigned col, part;
      col  = int'(rd_bidx) / WB;
      part = int'(rd_bidx) % WB;
      if (is_loadw) begin
        we    = rd_bv && (col % NPE == p);
        waddr = BA'(col / NPE);
        wdata = D'((WB*DW)'(rd_bdata) << (part * DW));
        wmask = D'((WB*DW)'({DW{1'b1}}) << (part * DW));
      end else begin
        we    = c_b_we[p];
        waddr = c_b_addr;
        wdata = c_b_wdata[p];
        wmask = c_b_wmask;
      end
    end
    sdp_ram #(.WIDTH(D), .DEPTH(BD)) u_b (
      .clk, .we, .waddr, .wdata, .wmask, .raddr(b_raddr), .rdata(bbuf_rdata[p])
    );
  end

  sdp_ram #(.WIDTH(NPE*BO), .DEPTH(L*NG)) u_ebuf (
    .clk, .we(c_e_we), .waddr(c_e_addr), .wdata(c_e_wdata), .wmask('1),
    .raddr(is_ln ? ln_e_raddr : EA'(int'(iss_i) * NG + int'(iss_g))), .rdata(ebuf_rdata)
  );

  logic          rbuf_we;
  logic [EA-1:0] rbuf_waddr, rbuf_raddr;
  logic [NPE*16-1:0] rbuf_wdata, rbuf_wmask;
  always_comb begin
    if (is_loadx) begin
      rbuf_we    = rd_bv;
      rbuf_waddr = EA'(int'(rd_bidx) / BPE);
      rbuf_wdata = beat_word;
      rbuf_wmask = beat_mask;
    end else begin
      rbuf_we    = ln_ov;
      rbuf_waddr = ln_oaddr;
      rbuf_wdata = ln_y;
      rbuf_wmask = '1;
    end
    if (is_ln)        rbuf_raddr = ln_res_raddr;
    else if (is_binx) rbuf_raddr = bx_ptr;
    else              rbuf_raddr = EA'(int'(src_idx) / BPE);
  end

  sdp_ram #(.WIDTH(NPE*16), .DEPTH(L*NG)) u_rbuf (
    .clk, .we(rbuf_we), .waddr(rbuf_waddr), .wdata(rbuf_wdata), .wmask(rbuf_wmask),
    .raddr(rbuf_raddr), .rdata(rbuf_rdata)
  );

  // parameter vectors
  wire [GA-1:0] v_waddr = GA'(int'(rd_bidx) / BPE);
  wire [GA-1:0] bias_raddr = (op.mode == MODE_M3) ? GA'(int'(iss_k) * GH + int'(iss_g)) : GA'(iss_g);

  sdp_ram #(.WIDTH(NPE*16), .DEPTH(NG)) u_bias (
    .clk, .we(is_loadv && op.slot == VS_BIAS && rd_bv), .waddr(v_waddr),
    .wdata(beat_word), .wmask(beat_mask), .raddr(bias_raddr), .rdata(bias_rdata)
  );
  sdp_ram #(.WIDTH(NPE*16), .DEPTH(NG)) u_gamma (
    .clk, .we(is_loadv && op.slot == VS_GAMMA && rd_bv), .waddr(v_waddr),
    .wdata(beat_word), .wmask(beat_mask), .raddr(ln_par_raddr), .rdata(gamma_rdata)
  );
  sdp_ram #(.WIDTH(NPE*16), .DEPTH(NG)) u_beta (
    .clk, .we(is_loadv && op.slot == VS_BETA && rd_bv), .waddr(v_waddr),
    .wdata(beat_word), .wmask(beat_mask), .raddr(ln_par_raddr), .rdata(beta_rdata)
  );

  sdp_ram #(.WIDTH(H*BO), .DEPTH(L)) u_dch (
    .clk, .we(c_dch_we), .waddr(c_dc_addr), .wdata(c_dch_wdata), .wmask('1),
    .raddr(iss_i), .rdata(dch_rdata)
  );
  sdp_ram #(.WIDTH(BO), .DEPTH(L)) u_dcf (
    .clk, .we(c_dcf_we), .waddr(c_dc_addr), .wdata(c_dcf_wdata), .wmask('1),
    .raddr(iss_i), .rdata(dcf_rdata)
  );

  // ------------------------------------------------------------------
  // completion of the current operation
  // ------------------------------------------------------------------
  assign op_done = rd_done || wr_done || rw_done || ln_done || bx_done;
endmodule
