// strided_write_converter: serves packed strided write bursts (and, in linear
// mode, plain AXI4 INCR/FIXED write bursts) over n parallel word ports.
//
// It mirrors the strided read converter with the datapath reversed: the
// per-lane request generator (req_gen) supplies one address per lane and
// beat, the beat unpacker supplies that lane's word and strobes, and the lane
// issues a word write. A lane whose four strobe bits are all zero skips the
// access. Write acknowledgements are counted; when every word of the burst
// has been issued and acknowledged, one B response is sent. One burst is in
// flight at a time; a write needs no regulator because acks are not queued.
//
// The unpacker-driven write path follows the published description; skipping
// zero-strobe words and the B timing are this design's choices.
module strided_write_converter
  import axi_pack_pkg::*;
(
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
  gen_cmd_t cmd;
  logic     gen_ready, gen_idle;
  logic [NumPorts-1:0] lane_valid, lane_ready, has, take;
  addr_t  [NumPorts-1:0] lane_addr;
  word_t  [NumPorts-1:0] word;
  wstrb_t [NumPorts-1:0] strb;

  logic       active_q;
  id_t        id_q;
  logic [8:0] wbeats_q;
  logic [4+$clog2(NumPorts):0] outst_q;
  logic       beat_done;

  assign cmd        = ax_to_cmd(aw_i);
  assign aw_ready_o = gen_ready && !active_q;

  req_gen i_req_gen (
    .clk_i, .rst_ni,
    .cmd_valid_i  (aw_valid_i && aw_ready_o),
    .cmd_ready_o  (gen_ready),
    .cmd_ptr_i    (cmd.ptr),
    .cmd_step_i   (cmd.step),
    .cmd_linear_i (cmd.linear),
    .cmd_size_i   (cmd.size),
    .cmd_beats_i  (cmd.beats),
    .lane_valid_o (lane_valid),
    .lane_addr_o  (lane_addr),
    .lane_ready_i (lane_ready),
    .idle_o       (gen_idle)
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
    assign mem_req_valid_o[i] = lane_valid[i] && has[i] && (strb[i] != '0);
    assign lane_ready[i]      = has[i] && ((strb[i] == '0) || mem_req_ready_i[i]);
    assign take[i]            = lane_valid[i] && lane_ready[i];
    assign mem_req_o[i]       = '{addr: lane_addr[i], we: 1'b1, wdata: word[i], strb: strb[i]};
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
      outst_q <= outst_q + $bits(outst_q)'($countones(mem_req_valid_o & mem_req_ready_i))
                         - $bits(outst_q)'($countones(mem_rsp_valid_i));
    end
  end

  assign b_valid_o = active_q && gen_idle && (wbeats_q == '0) && (outst_q == '0);
  assign b_o       = '{id: id_q, resp: 2'b00};

  logic unused;
  assign unused = beat_done ^ (|mem_rsp_data_i);
endmodule
