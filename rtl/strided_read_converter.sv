// strided_read_converter: serves packed strided read bursts (and, in linear
// mode, plain AXI4 INCR/FIXED read bursts) from n parallel word ports.
//
// Structure, following the strided read converter figure of the design:
//   req gen       n pointers, one per word lane, loaded from AR (req_gen)
//   info queue    one {id, last} entry per beat, produced by a beat counter
//   req regu      per-lane credit counters so responses never overflow
//   word queues   one QueueDepth-deep queue per lane, filled by responses
//   beat packer   pops one word per lane plus one info entry per R beat
// Lanes issue independently, so a bank conflict on one lane does not stall
// the others. A new AR is accepted once the previous burst has issued all
// its requests and info entries, so requests of two bursts never interleave.
// Timing: the first R beat can leave two cycles after AR is accepted (one
// cycle to load the pointers, one cycle of memory latency).
//
// Request generator, info queue, regulator, word queues and beat packer follow
// the published figure; the queue depth and the one-burst-at-a-time issue rule
// are this design's choices.
module strided_read_converter
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
  gen_cmd_t cmd;
  logic     gen_ready, gen_idle;
  logic [NumPorts-1:0] lane_valid, lane_ready;
  addr_t [NumPorts-1:0] lane_addr;

  // info generator state
  logic [8:0] info_cnt_q;
  id_t        id_q;
  logic       info_full, info_empty, info_pop;
  logic [IdWidth:0] info_head;
  logic       info_push;

  assign cmd        = ax_to_cmd(ar_i);
  assign ar_ready_o = gen_ready && (info_cnt_q == '0);

  req_gen i_req_gen (
    .clk_i, .rst_ni,
    .cmd_valid_i  (ar_valid_i && ar_ready_o),
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

  // info queue: one entry per beat
  assign info_push = (info_cnt_q != '0) && !info_full;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      info_cnt_q <= '0;
      id_q       <= '0;
    end else if (ar_valid_i && ar_ready_o) begin
      info_cnt_q <= cmd.beats;
      id_q       <= ar_i.id;
    end else if (info_push) begin
      info_cnt_q <= info_cnt_q - 9'd1;
    end
  end

  ap_fifo #(.Depth(QueueDepth), .T(logic [IdWidth:0])) i_info_q (
    .clk_i, .rst_ni,
    .push_i (info_push), .data_i ({id_q, info_cnt_q == 9'd1}), .full_o (info_full),
    .pop_i  (info_pop),  .data_o (info_head), .empty_o (info_empty), .count_o ()
  );

  // request regulator
  logic [NumPorts-1:0] word_pop, word_empty;
  word_t [NumPorts-1:0] word_head;

  req_regulator #(.NumLanes(NumPorts), .QueueDepth(QueueDepth)) i_regu (
    .clk_i, .rst_ni,
    .in_valid_i  (lane_valid),
    .in_ready_o  (lane_ready),
    .out_valid_o (mem_req_valid_o),
    .out_ready_i (mem_req_ready_i),
    .pop_i       (word_pop),
    .stall_o     (regu_stall_o)
  );

  for (genvar i = 0; i < NumPorts; i++) begin : g_lane
    assign mem_req_o[i] = '{addr: lane_addr[i], we: 1'b0, wdata: '0, strb: '0};
    ap_fifo #(.Depth(QueueDepth), .T(word_t)) i_word_q (
      .clk_i, .rst_ni,
      .push_i (mem_rsp_valid_i[i]), .data_i (mem_rsp_data_i[i]), .full_o (),
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

  logic unused;
  assign unused = gen_idle;
endmodule
