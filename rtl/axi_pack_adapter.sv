// axi_pack_adapter: translates AXI-Pack and AXI4 bursts into sequences of n
// parallel word accesses.
//
// An AXI demux forwards each burst to one of five converters, which may all
// work concurrently: the base AXI4 converter, the strided read and write
// converters and the indirect read and write converters. A bank port mux
// (per-lane round robin) shares the n word ports among the five converters.
// The word ports follow the fixed one-cycle-latency protocol of
// axi_pack_pkg and connect to the n x m bank crossbar. The regulator stall
// outputs report lanes held back by a full word queue.
//
// The five converters and the demux follow the published controller figure;
// the single port mux and the per-direction ordering rule are this design's
// own choices.
module axi_pack_adapter
  import axi_pack_pkg::*;
#(
  parameter int unsigned QueueDepth = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
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
  output logic      [NumPorts-1:0] mem_req_valid_o,
  input  logic      [NumPorts-1:0] mem_req_ready_i,
  output word_req_t [NumPorts-1:0] mem_req_o,
  input  logic      [NumPorts-1:0] mem_rsp_valid_i,
  input  word_t     [NumPorts-1:0] mem_rsp_data_i,
  output logic      [NumPorts-1:0] regu_stall_o
);
  logic [2:0] ar_v, ar_r, r_v, r_r, aw_v, aw_r, w_v, w_r, b_v, b_r;
  ax_t ar, aw;
  w_t  w;
  r_t  r  [3];
  b_t  b  [3];

  axi_pack_demux i_demux (
    .clk_i, .rst_ni,
    .ar_valid_i, .ar_ready_o, .ar_i, .r_valid_o, .r_ready_i, .r_o,
    .aw_valid_i, .aw_ready_o, .aw_i, .w_valid_i, .w_ready_o, .w_i,
    .b_valid_o, .b_ready_i, .b_o,
    .m_ar_valid_o (ar_v), .m_ar_ready_i (ar_r), .m_ar_o (ar),
    .m_r_valid_i  (r_v),  .m_r_ready_o  (r_r),  .m_r_i  (r),
    .m_aw_valid_o (aw_v), .m_aw_ready_i (aw_r), .m_aw_o (aw),
    .m_w_valid_o  (w_v),  .m_w_ready_i  (w_r),  .m_w_o  (w),
    .m_b_valid_i  (b_v),  .m_b_ready_o  (b_r),  .m_b_i  (b)
  );

  // converter ports: 0 base, 1 strided read, 2 strided write,
  // 3 indirect read, 4 indirect write
  logic      [NumPorts-1:0] cv_valid [5], cv_ready [5], cv_rsp_valid [5];
  word_req_t [NumPorts-1:0] cv_req [5];
  word_t     [NumPorts-1:0] cv_rsp_data [5];
  logic      [NumPorts-1:0] st_s, st_i, st_b;

  base_converter #(.QueueDepth(QueueDepth)) i_base (
    .clk_i, .rst_ni,
    .ar_valid_i (ar_v[0]), .ar_ready_o (ar_r[0]), .ar_i (ar),
    .r_valid_o  (r_v[0]),  .r_ready_i  (r_r[0]),  .r_o  (r[0]),
    .aw_valid_i (aw_v[0]), .aw_ready_o (aw_r[0]), .aw_i (aw),
    .w_valid_i  (w_v[0]),  .w_ready_o  (w_r[0]),  .w_i  (w),
    .b_valid_o  (b_v[0]),  .b_ready_i  (b_r[0]),  .b_o  (b[0]),
    .mem_req_valid_o (cv_valid[0]), .mem_req_ready_i (cv_ready[0]), .mem_req_o (cv_req[0]),
    .mem_rsp_valid_i (cv_rsp_valid[0]), .mem_rsp_data_i (cv_rsp_data[0])
  );
  assign st_b = '0;

  strided_read_converter #(.QueueDepth(QueueDepth)) i_str_rd (
    .clk_i, .rst_ni,
    .ar_valid_i (ar_v[1]), .ar_ready_o (ar_r[1]), .ar_i (ar),
    .r_valid_o  (r_v[1]),  .r_ready_i  (r_r[1]),  .r_o  (r[1]),
    .mem_req_valid_o (cv_valid[1]), .mem_req_ready_i (cv_ready[1]), .mem_req_o (cv_req[1]),
    .mem_rsp_valid_i (cv_rsp_valid[1]), .mem_rsp_data_i (cv_rsp_data[1]),
    .regu_stall_o (st_s)
  );

  strided_write_converter i_str_wr (
    .clk_i, .rst_ni,
    .aw_valid_i (aw_v[1]), .aw_ready_o (aw_r[1]), .aw_i (aw),
    .w_valid_i  (w_v[1]),  .w_ready_o  (w_r[1]),  .w_i  (w),
    .b_valid_o  (b_v[1]),  .b_ready_i  (b_r[1]),  .b_o  (b[1]),
    .mem_req_valid_o (cv_valid[2]), .mem_req_ready_i (cv_ready[2]), .mem_req_o (cv_req[2]),
    .mem_rsp_valid_i (cv_rsp_valid[2]), .mem_rsp_data_i (cv_rsp_data[2])
  );

  indirect_read_converter #(.QueueDepth(QueueDepth)) i_ind_rd (
    .clk_i, .rst_ni,
    .ar_valid_i (ar_v[2]), .ar_ready_o (ar_r[2]), .ar_i (ar),
    .r_valid_o  (r_v[2]),  .r_ready_i  (r_r[2]),  .r_o  (r[2]),
    .mem_req_valid_o (cv_valid[3]), .mem_req_ready_i (cv_ready[3]), .mem_req_o (cv_req[3]),
    .mem_rsp_valid_i (cv_rsp_valid[3]), .mem_rsp_data_i (cv_rsp_data[3]),
    .regu_stall_o (st_i)
  );

  indirect_write_converter #(.QueueDepth(QueueDepth)) i_ind_wr (
    .clk_i, .rst_ni,
    .aw_valid_i (aw_v[2]), .aw_ready_o (aw_r[2]), .aw_i (aw),
    .w_valid_i  (w_v[2]),  .w_ready_o  (w_r[2]),  .w_i  (w),
    .b_valid_o  (b_v[2]),  .b_ready_i  (b_r[2]),  .b_o  (b[2]),
    .mem_req_valid_o (cv_valid[4]), .mem_req_ready_i (cv_ready[4]), .mem_req_o (cv_req[4]),
    .mem_rsp_valid_i (cv_rsp_valid[4]), .mem_rsp_data_i (cv_rsp_data[4])
  );

  assign regu_stall_o = st_s | st_i | st_b;

  word_port_mux #(.NumIn(5)) i_bank_port_mux (
    .clk_i, .rst_ni,
    .in_valid_i     (cv_valid),
    .in_ready_o     (cv_ready),
    .in_req_i       (cv_req),
    .in_rsp_valid_o (cv_rsp_valid),
    .in_rsp_data_o  (cv_rsp_data),
    .out_valid_o    (mem_req_valid_o),
    .out_ready_i    (mem_req_ready_i),
    .out_req_o      (mem_req_o),
    .out_rsp_valid_i(mem_rsp_valid_i),
    .out_rsp_data_i (mem_rsp_data_i)
  );
endmodule
