// axi_dma: the accelerator's AXI4 high-performance master. It moves
// contiguous blocks between off-chip DDR and the on-chip buffers.
// Read: rd_start with a byte address and a beat count issues INCR bursts
// of at most MAXB beats (one burst outstanding) and delivers every beat on
// rd_beat_valid/rd_beat_idx/rd_beat_data; RREADY is always high, the sink
// must take a beat per cycle. rd_done pulses after the last beat.
// Write: wr_start issues AW bursts the same way; for every beat it asks the
// source with src_req/src_idx, takes src_data one cycle later, holds it on
// W until WREADY, and waits for each burst's B response. wr_done pulses
// after the last response. Addresses must be aligned so that a burst does
// not cross a 4 KiB boundary (base addresses 4 KiB aligned).
// The paper names only a master AXI interface; burst length, single
// outstanding burst and the data width are this design's own.
module axi_dma #(
  parameter int unsigned DW   = 128,
  parameter int unsigned AW   = 32,
  parameter int unsigned MAXB = 16,
  parameter int unsigned CW   = 24     // beat counter width
) (
  input  logic          clk,
  input  logic          rst_n,
  // read command
  input  logic          rd_start,
  input  logic [AW-1:0] rd_addr,
  input  logic [CW-1:0] rd_beats,
  output logic          rd_busy,
  output logic          rd_done,
  output logic          rd_beat_valid,
  output logic [CW-1:0] rd_beat_idx,
  output logic [DW-1:0] rd_beat_data,
  // write command
  input  logic          wr_start,
  input  logic [AW-1:0] wr_addr,
  input  logic [CW-1:0] wr_beats,
  output logic          wr_busy,
  output logic          wr_done,
  output logic          src_req,
  output logic [CW-1:0] src_idx,
  input  logic [DW-1:0] src_data,
  // AXI4 master
  output logic [AW-1:0] m_araddr,
  output logic [7:0]    m_arlen,
  output logic [2:0]    m_arsize,
  output logic [1:0]    m_arburst,
  output logic          m_arvalid,
  input  logic          m_arready,
  input  logic [DW-1:0] m_rdata,
  input  logic          m_rlast,
  input  logic          m_rvalid,
  output logic          m_rready,
  output logic [AW-1:0] m_awaddr,
  output logic [7:0]    m_awlen,
  output logic [2:0]    m_awsize,
  output logic [1:0]    m_awburst,
  output logic          m_awvalid,
  input  logic          m_awready,
  output logic [DW-1:0] m_wdata,
  output logic [DW/8-1:0] m_wstrb,
  output logic          m_wlast,
  output logic          m_wvalid,
  input  logic          m_wready,
  input  logic [1:0]    m_bresp,
  input  logic          m_bvalid,
  output logic          m_bready,
  output logic          bus_err     // sticky: a B response was not OKAY
);
  localparam int unsigned BYTES = DW / 8;
  localparam logic [2:0]  SIZE  = 3'($clog2(BYTES));

  function automatic logic [CW-1:0] burst_len(input logic [CW-1:0] left);
    return (left > CW'(MAXB)) ? CW'(MAXB) : left;
  endfunction

  // ---------------- read ----------------
  typedef enum logic [1:0] {R_IDLE, R_AR, R_DATA} rstate_e;
  rstate_e rs;
  logic [AW-1:0] r_addr;
  logic [CW-1:0] r_left, r_cnt, r_blen;

  assign m_arsize  = SIZE;
  assign m_arburst = 2'b01;
  assign m_rready  = 1'b1;
  assign m_araddr  = r_addr;
  assign m_arlen   = 8'(r_blen - 1'b1);
  assign m_arvalid = (rs == R_AR);
  assign rd_busy   = (rs != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; r_addr <= '0; r_left <= '0; r_cnt <= '0; r_blen <= '0;
      rd_done <= 1'b0; rd_beat_valid <= 1'b0; rd_beat_idx <= '0; rd_beat_data <= '0;
    end else begin
      rd_done <= 1'b0;
      rd_beat_valid <= 1'b0;
      unique case (rs)
        R_IDLE: if (rd_start) begin
          r_addr <= rd_addr; r_left <= rd_beats; r_cnt <= '0;
          r_blen <= burst_len(rd_beats);
          rs <= (rd_beats == 0) ? R_IDLE : R_AR;
          if (rd_beats == 0) rd_done <= 1'b1;
        end
        R_AR: if (m_arready) rs <= R_DATA;
        R_DATA: if (m_rvalid) begin
          rd_beat_valid <= 1'b1;
          rd_beat_idx   <= r_cnt;
          rd_beat_data  <= m_rdata;
          r_cnt  <= r_cnt + 1'b1;
          r_left <= r_left - 1'b1;
          if (m_rlast) begin
            if (r_left == 1) begin
              rs <= R_IDLE; rd_done <= 1'b1;
            end else begin
              r_addr <= r_addr + AW'(r_blen) * AW'(BYTES);
              r_blen <= burst_len(r_left - 1'b1);
              rs <= R_AR;
            end
          end
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  // ---------------- write ----------------
  typedef enum logic [2:0] {W_IDLE, W_AW, W_REQ, W_WAIT, W_DATA, W_RESP} wstate_e;
  wstate_e ws;
  logic [AW-1:0] w_addr;
  logic [CW-1:0] w_left, w_cnt, w_blen, w_bcnt;

  assign m_awsize  = SIZE;
  assign m_awburst = 2'b01;
  assign m_awaddr  = w_addr;
  assign m_awlen   = 8'(w_blen - 1'b1);
  assign m_awvalid = (ws == W_AW);
  assign m_wvalid  = (ws == W_DATA);
  assign m_wstrb   = '1;
  assign m_wlast   = (w_bcnt == w_blen - 1'b1);
  assign m_bready  = (ws == W_RESP);
  assign src_req   = (ws == W_REQ);
  assign src_idx   = w_cnt;
  assign wr_busy   = (ws != W_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= W_IDLE; w_addr <= '0; w_left <= '0; w_cnt <= '0; w_blen <= '0; w_bcnt <= '0;
      m_wdata <= '0; wr_done <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      unique case (ws)
        W_IDLE: if (wr_start) begin
          w_addr <= wr_addr; w_left <= wr_beats; w_cnt <= '0;
          w_blen <= burst_len(wr_beats);
          ws <= (wr_beats == 0) ? W_IDLE : W_AW;
          if (wr_beats == 0) wr_done <= 1'b1;
        end
        W_AW: if (m_awready) begin ws <= W_REQ; w_bcnt <= '0; end
        W_REQ:  ws <= W_WAIT;
        W_WAIT: begin m_wdata <= src_data; ws <= W_DATA; end
        W_DATA: if (m_wready) begin
          w_cnt  <= w_cnt + 1'b1;
          w_left <= w_left - 1'b1;
          w_bcnt <= w_bcnt + 1'b1;
          ws <= m_wlast ? W_RESP : W_REQ;
        end
        W_RESP: if (m_bvalid) begin
          if (w_left == 0) begin
            ws <= W_IDLE; wr_done <= 1'b1;
          end else begin
            w_addr <= w_addr + AW'(w_blen) * AW'(BYTES);
            w_blen <= burst_len(w_left);
            ws <= W_AW;
          end
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                               bus_err <= 1'b0;
    else if (m_bvalid && m_bready && m_bresp != 2'b00) bus_err <= 1'b1;
  end

  // AXI rules: a valid request holds until accepted
  property p_hold(v, r);
    @(posedge clk) disable iff (!rst_n) v && !r |=> v;
  endproperty
  a_ar_hold: assert property (p_hold(m_arvalid, m_arready));
  a_aw_hold: assert property (p_hold(m_awvalid, m_awready));
  a_w_hold:  assert property (p_hold(m_wvalid, m_wready));
  a_rlast: assert property (@(posedge clk) disable iff (!rst_n)
                            m_rvalid && m_rlast && rs == R_DATA |-> r_left >= 1);
endmodule
