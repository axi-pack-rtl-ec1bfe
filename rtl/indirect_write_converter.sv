// indirect_write_converter: serves packed indirect write bursts.
//
// Same two-stage structure as the indirect read converter, with the element
// datapath reversed: the index stage (a linear read converter) fetches the
// index lines, the element request generator forms one word address per lane
// and beat, and the beat unpacker supplies each lane's write word. Lanes whose
// strobes are all zero skip their access. Index reads and element writes
// share the n word ports through a per-lane round-robin arbiter. After the
// last word is issued and every write is acknowledged, one B response is sent.
//
// The structure mirrors the indirect read converter as the published
// description says; the B-after-all-acknowledged rule is this design's own.
module indirect_write_converter
  import axi_pack_pkg::*;
#(
  parameter int unsigned QueueDepth = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     aw_valid_i,
  output logic                     aw_ready_o,
  input  ax_t                      aw_i,
  input  logic                     w_valid_i,
  output logic                     w_ready_o,
  input  w_t                       w_i,
  output logic                     b_valid_o,
  input  logic                     b_ready_i,
  output b_t                       b_o,
  output logic      [NumPorts-1:0] mem_req_valid_o,
  input  logic      [NumPorts-1:0] mem_req_ready_i,
  output word_req_t [NumPorts-1:0] mem_req_o,
  input  logic      [NumPorts-1:0] mem_rsp_valid_i,
  input  word_t     [NumPorts-1:0] mem_rsp_data_i
);
  indir_cmd_t cmd;
  assign cmd = ax_to_indir(aw_i);

  logic       active_q;
  id_t        id_q;
  logic [8:0] wbeats_q;
  logic [4+$clog2(NumPorts):0] outst_q;

  // ---------------------------------------------------------------- index stage
  logic idx_ar_ready, erg_ready, idx_r_valid, idx_r_ready;
  r_t   idx_r;
  logic [NumPorts-1:0] idx_req_valid, idx_req_ready, idx_rsp_valid, idx_stall;
  word_req_t [NumPorts-1:0] idx_req;
  word_t [NumPorts-1:0] idx_rsp_data;

  assign aw_ready_o = idx_ar_ready && erg_ready && !active_q;

  strided_read_converter #(.QueueDepth(QueueDepth)) i_index_stage (
    .clk_i, .rst_ni,
    .ar_valid_i      (aw_valid_i && aw_ready_o),
    .ar_ready_o      (idx_ar_ready),
    .ar_i            (cmd.idx_ar),
    .r_valid_o       (idx_r_valid),
    .r_ready_i       (idx_r_ready),
    .r_o             (idx_r),
    .mem_req_valid_o (idx_req_valid),
    .mem_req_ready_i (idx_req_ready),
    .mem_req_o       (idx_req),
    .mem_rsp_valid_i (idx_rsp_valid),
    .mem_rsp_data_i  (idx_rsp_data),
    .regu_stall_o    (idx_stall)
  );

  logic  line_full, line_empty, line_pop;
  data_t line_head;
  assign idx_r_ready = !line_full;

  ap_fifo #(.Depth(2), .T(data_t)) i_line_q (
    .clk_i, .rst_ni,
    .push_i (idx_r_valid && idx_r_ready), .data_i (idx_r.data), .full_o (line_full),
    .pop_i  (line_pop), .data_o (line_head), .empty_o (line_empty), .count_o ()
  );

  // -------------------------------------------------------------- element stage
  logic [NumPorts-1:0] erg_valid, erg_ready_l, el_req_valid, el_req_ready, el_rsp_valid;
  logic [NumPorts-1:0] has, take;
  addr_t  [NumPorts-1:0] erg_addr;
  word_req_t [NumPorts-1:0] el_req;
  word_t  [NumPorts-1:0] el_rsp_data, word;
  wstrb_t [NumPorts-1:0] strb;
  logic beat_adv, beat_last, beat_done;

  elem_req_gen i_erg (
    .clk_i, .rst_ni,
    .cmd_valid_i  (aw_valid_i && aw_ready_o),
    .cmd_ready_o  (erg_ready),
    .cmd_base_i   (cmd.base),
    .cmd_size_i   (cmd.size),
    .cmd_isz_i    (cmd.isz),
    .cmd_beats_i  (cmd.beats),
    .cmd_pos_i    (cmd.pos),
    .line_valid_i (!line_empty),
    .line_i       (line_head),
    .line_pop_o   (line_pop),
    .lane_valid_o (erg_valid),
    .lane_addr_o  (erg_addr),
    .lane_ready_i (erg_ready_l),
    .adv_ok_i     (1'b1),
    .beat_adv_o   (beat_adv),
    .beat_last_o  (beat_last)
  );

  beat_unpacker i_unpacker (
    .clk_i, .rst_ni,
    .accept_i    (wbeats_q != '0),
    .w_valid_i, .w_ready_o, .w_i,
    .has_o       (has),
    .word_o      (word),
    .strb_o      (strb),
    .take_i      (take),
    .beat_done_o (beat_done)
  );

  for (genvar i = 0; i < NumPorts; i++) begin : g_lane
    assign el_req_valid[i] = erg_valid[i] && has[i] && (strb[i] != '0);
    assign erg_ready_l[i]  = has[i] && ((strb[i] == '0) || el_req_ready[i]);
    assign take[i]         = erg_valid[i] && erg_ready_l[i];
    assign el_req[i]       = '{addr: erg_addr[i], we: 1'b1, wdata: word[i], strb: strb[i]};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0;
      id_q     <= '0;
      wbeats_q <= '0;
      outst_q  <= '0;
    end else begin
      if (aw_valid_i && aw_ready_o) begin
        active_q <= 1'b1;
        id_q     <= aw_i.id;
        wbeats_q <= cmd.beats;
      end else begin
        if (w_valid_i && w_ready_o) wbeats_q <= wbeats_q - 9'd1;
        if (b_valid_o && b_ready_i) active_q <= 1'b0;
      end
      outst_q <= outst_q + $bits(outst_q)'($countones(el_req_valid & el_req_ready))
                         - $bits(outst_q)'($countones(el_rsp_valid));
    end
  end

  assign b_valid_o = active_q && erg_ready && idx_ar_ready && (wbeats_q == '0) && (outst_q == '0);
  assign b_o       = '{id: id_q, resp: 2'b00};

  // ------------------------------------------------- round-robin port sharing
  logic      [NumPorts-1:0] mx_valid [2], mx_ready [2], mx_rsp_valid [2];
  word_req_t [NumPorts-1:0] mx_req [2];
  word_t     [NumPorts-1:0] mx_rsp_data [2];

  assign mx_valid[0] = idx_req_valid;
  assign mx_req[0]   = idx_req;
  assign mx_valid[1] = el_req_valid;
  assign mx_req[1]   = el_req;
  assign idx_req_ready = mx_ready[0];
  assign el_req_ready  = mx_ready[1];
  assign idx_rsp_valid = mx_rsp_valid[0];
  assign idx_rsp_data  = mx_rsp_data[0];
  assign el_rsp_valid  = mx_rsp_valid[1];
  assign el_rsp_data   = mx_rsp_data[1];

  word_port_mux #(.NumIn(2)) i_share (
    .clk_i, .rst_ni,
    .in_valid_i     (mx_valid),
    .in_ready_o     (mx_ready),
    .in_req_i       (mx_req),
    .in_rsp_valid_o (mx_rsp_valid),
    .in_rsp_data_o  (mx_rsp_data),
    .out_valid_o    (mem_req_valid_o),
    .out_ready_i    (mem_req_ready_i),
    .out_req_o      (mem_req_o),
    .out_rsp_valid_i(mem_rsp_valid_i),
    .out_rsp_data_i (mem_rsp_data_i)
  );

  logic unused;
  assign unused = idx_r.last ^ (|idx_r.id) ^ (|idx_r.resp) ^ beat_done ^ beat_adv ^ beat_last
                ^ (|el_rsp_data) ^ (|idx_stall);
endmodule
