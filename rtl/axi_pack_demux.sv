// axi_pack_demux: the adapter's AXI demultiplexer.
//
// Steers each AR and AW to one of three converter classes by its user bits:
//   0 base (pack = 0), 1 strided (pack = 1, indir = 0), 2 indirect (indir = 1)
// and merges the R and B channels back. Reads and writes are handled
// independently. To keep responses of one AXI ID in order without ID
// tracking, all outstanding bursts of a direction must target the same
// converter: a burst for another converter waits until the outstanding ones
// have completed (counted on R last / B). W beats follow the AW order; they
// are forwarded to the current write target only while an accepted AW still
// awaits data (W before AW is held back).
//
// Routing by the pack and indir user bits follows the protocol; how ordering
// is kept (waiting for outstanding bursts) is this design's own choice.
module axi_pack_demux
  import axi_pack_pkg::*;
(
  input  logic clk_i,
  input  logic rst_ni,
  // from the interconnect
  input  logic ar_valid_i,
  output logic ar_ready_o,
  input  ax_t  ar_i,
  output logic r_valid_o,
  input  logic r_ready_i,
  output r_t   r_o,
  input  logic aw_valid_i,
  output logic aw_ready_o,
  input  ax_t  aw_i,
  input  logic w_valid_i,
  output logic w_ready_o,
  input  w_t   w_i,
  output logic b_valid_o,
  input  logic b_ready_i,
  output b_t   b_o,
  // to the converters (index 0 base, 1 strided, 2 indirect)
  output logic [2:0] m_ar_valid_o,
  input  logic [2:0] m_ar_ready_i,
  output ax_t        m_ar_o,
  input  logic [2:0] m_r_valid_i,
  output logic [2:0] m_r_ready_o,
  input  r_t         m_r_i [3],
  output logic [2:0] m_aw_valid_o,
  input  logic [2:0] m_aw_ready_i,
  output ax_t        m_aw_o,
  output logic [2:0] m_w_valid_o,
  input  logic [2:0] m_w_ready_i,
  output w_t         m_w_o,
  input  logic [2:0] m_b_valid_i,
  output logic [2:0] m_b_ready_o,
  input  b_t         m_b_i [3]
);
  function automatic logic [1:0] target(user_t u);
    if (!user_pack(u)) return 2'd0;
    if (!user_indir(u)) return 2'd1;
    return 2'd2;
  endfunction

  // ------------------------------------------------------------------- reads
  logic [1:0] ar_sel, rd_tgt_q;
  logic [8:0] rd_cnt_q;
  logic       ar_ok, ar_hs, r_last_hs;

  assign ar_sel       = target(ar_i.user);
  assign ar_ok        = (rd_cnt_q == '0) || (rd_tgt_q == ar_sel);
  assign m_ar_o       = ar_i;
  assign m_ar_valid_o = (ar_valid_i && ar_ok) ? (3'b001 << ar_sel) : 3'b000;
  assign ar_ready_o   = ar_ok && m_ar_ready_i[ar_sel];
  assign ar_hs        = ar_valid_i && ar_ready_o;

  assign r_valid_o   = m_r_valid_i[rd_tgt_q];
  assign r_o         = m_r_i[rd_tgt_q];
  assign m_r_ready_o = r_ready_i ? (3'b001 << rd_tgt_q) : 3'b000;
  assign r_last_hs   = r_valid_o && r_ready_i && r_o.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_tgt_q <= '0;
      rd_cnt_q <= '0;
    end else begin
      if (ar_hs) rd_tgt_q <= ar_sel;
      rd_cnt_q <= rd_cnt_q + 9'(ar_hs) - 9'(r_last_hs);
    end
  end

  // ------------------------------------------------------------------ writes
  logic [1:0] aw_sel, wr_tgt_q;
  logic [8:0] wr_cnt_q, w_pend_q;
  logic       aw_ok, aw_hs, w_last_hs, b_hs;

  assign aw_sel       = target(aw_i.user);
  assign aw_ok        = (wr_cnt_q == '0) || (wr_tgt_q == aw_sel);
  assign m_aw_o       = aw_i;
  assign m_aw_valid_o = (aw_valid_i && aw_ok) ? (3'b001 << aw_sel) : 3'b000;
  assign aw_ready_o   = aw_ok && m_aw_ready_i[aw_sel];
  assign aw_hs        = aw_valid_i && aw_ready_o;

  assign m_w_o       = w_i;
  assign m_w_valid_o = (w_valid_i && w_pend_q != '0) ? (3'b001 << wr_tgt_q) : 3'b000;
  assign w_ready_o   = (w_pend_q != '0) && m_w_ready_i[wr_tgt_q];
  assign w_last_hs   = w_valid_i && w_ready_o && w_i.last;

  assign b_valid_o   = m_b_valid_i[wr_tgt_q];
  assign b_o         = m_b_i[wr_tgt_q];
  assign m_b_ready_o = b_ready_i ? (3'b001 << wr_tgt_q) : 3'b000;
  assign b_hs        = b_valid_o && b_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_tgt_q <= '0;
      wr_cnt_q <= '0;
      w_pend_q <= '0;
    end else begin
      if (aw_hs) wr_tgt_q <= aw_sel;
      wr_cnt_q <= wr_cnt_q + 9'(aw_hs) - 9'(b_hs);
      w_pend_q <= w_pend_q + 9'(aw_hs) - 9'(w_last_hs);
    end
  end

  // AXI handshake rule: a valid may not be withdrawn before it is taken
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    ar_valid_i && !ar_ready_o |=> ar_valid_i) else $error("AR valid dropped");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    aw_valid_i && !aw_ready_o |=> aw_valid_i) else $error("AW valid dropped");
endmodule
