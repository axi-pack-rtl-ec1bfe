// indirect_read_converter: serves packed indirect read bursts.
//
// Two stages share the converter's n word ports through a per-lane
// round-robin arbiter (word_port_mux):
//   index stage   a linear read converter fetches the index array as whole
//                 bus lines (contiguous word requests) into a small line queue
//   element stage the element request generator turns the indices into word
//                 addresses (base + index << size), a request regulator
//                 protects the element word queues, and a beat packer forms
//                 the R beats from the queues and the per-beat info queue.
// The AR address is the address of the index array; the element size is
// AR.size, the index size and the element base address come from the user
// field. One indirect burst is processed at a time; the index fetch of a
// burst overlaps with its element accesses.
//
// The index stage, element stage and round-robin sharing of the word ports
// follow the published indirect converter figure; the two-line index buffer
// and the alignment rules are this design's own.
module indirect_read_converter
  import axi_pack_pkg::*;
#(
  parameter int unsigned QueueDepth = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     ar_valid_i,
  output logic                     ar_ready_o,
  input  ax_t                      ar_i,
  output logic                     r_valid_o,
  input  logic                     r_ready_i,
  output r_t                       r_o,
  output logic      [NumPorts-1:0] mem_req_valid_o,
  input  logic      [NumPorts-1:0] mem_req_ready_i,
  output word_req_t [NumPorts-1:0] mem_req_o,
  input  logic      [NumPorts-1:0] mem_rsp_valid_i,
  input  word_t     [NumPorts-1:0] mem_rsp_data_i,
  output logic      [NumPorts-1:0] regu_stall_o
);
  indir_cmd_t cmd;
  assign cmd = ax_to_indir(ar_i);

  // ---------------------------------------------------------------- index stage
  logic idx_ar_ready, erg_ready, idx_r_valid, idx_r_ready;
  r_t   idx_r;
  logic [NumPorts-1:0] idx_req_valid, idx_req_ready, idx_rsp_valid, idx_stall;
  word_req_t [NumPorts-1:0] idx_req;
  word_t [NumPorts-1:0] idx_rsp_data;
  logic [8:0] info_cnt_q;
  id_t        id_q;

  assign ar_ready_o = idx_ar_ready && erg_ready && (info_cnt_q == '0);

  strided_read_converter #(.QueueDepth(QueueDepth)) i_index_stage (
    .clk_i, .rst_ni,
    .ar_valid_i      (ar_valid_i && ar_ready_o),
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
  addr_t [NumPorts-1:0] erg_addr;
  word_req_t [NumPorts-1:0] el_req;
  word_t [NumPorts-1:0] el_rsp_data;
  logic beat_adv, beat_last, info_full, info_empty, info_pop;
  logic [IdWidth:0] info_head;

  elem_req_gen i_erg (
    .clk_i, .rst_ni,
    .cmd_valid_i  (ar_valid_i && ar_ready_o),
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
    .adv_ok_i     (!info_full),
    .beat_adv_o   (beat_adv),
    .beat_last_o  (beat_last)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      info_cnt_q <= '0;
      id_q       <= '0;
    end else if (ar_valid_i && ar_ready_o) begin
      info_cnt_q <= cmd.beats;
      id_q       <= ar_i.id;
    end else if (beat_adv) begin
      info_cnt_q <= info_cnt_q - 9'd1;
    end
  end

  ap_fifo #(.Depth(QueueDepth), .T(logic [IdWidth:0])) i_info_q (
    .clk_i, .rst_ni,
    .push_i (beat_adv), .data_i ({id_q, beat_last}), .full_o (info_full),
    .pop_i  (info_pop), .data_o (info_head), .empty_o (info_empty), .count_o ()
  );

  logic [NumPorts-1:0] word_pop, word_empty, el_stall;
  word_t [NumPorts-1:0] word_head;

  req_regulator #(.NumLanes(NumPorts), .QueueDepth(QueueDepth)) i_regu (
    .clk_i, .rst_ni,
    .in_valid_i  (erg_valid),
    .in_ready_o  (erg_ready_l),
    .out_valid_o (el_req_valid),
    .out_ready_i (el_req_ready),
    .pop_i       (word_pop),
    .stall_o     (el_stall)
  );
  assign regu_stall_o = el_stall | idx_stall;

  for (genvar i = 0; i < NumPorts; i++) begin : g_lane
    assign el_req[i] = '{addr: erg_addr[i], we: 1'b0, wdata: '0, strb: '0};
    ap_fifo #(.Depth(QueueDepth), .T(word_t)) i_word_q (
      .clk_i, .rst_ni,
      .push_i (el_rsp_valid[i]), .data_i (el_rsp_data[i]), .full_o (),
      .pop_i  (word_pop[i]), .data_o (word_head[i]), .empty_o (word_empty[i]), .count_o ()
    );
  end

  beat_packer i_packer (
    .info_valid_i (!info_empty),
    .info_i       (info_head),
    .info_pop_o   (info_pop),
    .word_valid_i (~word_empty),
    .word_i       (word_head),
    .word_pop_o   (word_pop),
    .r_valid_o,
    .r_ready_i,
    .r_o
  );

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
  assign unused = idx_r.last ^ (|idx_r.id) ^ (|idx_r.resp);
endmodule
