// base_converter: serves plain AXI4 bursts (pack bit clear) on the n word
// ports, so the controller stays fully backward compatible.
//
// A read engine and a write engine, each a linear-mode strided converter
// (strided_read_converter / strided_write_converter with the pack bit clear),
// run concurrently and share the n word ports through a per-lane round-robin
// arbiter. Every beat reads or writes the whole bus line its address falls
// in: narrow reads return the full line (the AXI4 byte lanes of the
// address carry the data), narrow and partial writes use the W strobes, and
// words without any strobe are skipped. INCR and FIXED bursts are supported;
// WRAP bursts are treated as INCR.
//
// A dedicated converter for regular bursts follows the published adapter;
// reusing the linear mode of the strided converters and treating WRAP as INCR
// are this design's choices.
module base_converter
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
  ax_t ar_lin, aw_lin;
  always_comb begin
    ar_lin = ar_i;
    ar_lin.user = '0;
    if (ar_i.burst == BURST_WRAP) ar_lin.burst = BURST_INCR;
    aw_lin = aw_i;
    aw_lin.user = '0;
    if (aw_i.burst == BURST_WRAP) aw_lin.burst = BURST_INCR;
  end

  logic      [NumPorts-1:0] mx_valid [2], mx_ready [2], mx_rsp_valid [2], stall;
  word_req_t [NumPorts-1:0] mx_req [2];
  word_t     [NumPorts-1:0] mx_rsp_data [2];

  strided_read_converter #(.QueueDepth(QueueDepth)) i_read (
    .clk_i, .rst_ni,
    .ar_valid_i, .ar_ready_o, .ar_i (ar_lin),
    .r_valid_o, .r_ready_i, .r_o,
    .mem_req_valid_o (mx_valid[0]),
    .mem_req_ready_i (mx_ready[0]),
    .mem_req_o       (mx_req[0]),
    .mem_rsp_valid_i (mx_rsp_valid[0]),
    .mem_rsp_data_i  (mx_rsp_data[0]),
    .regu_stall_o    (stall)
  );

  strided_write_converter i_write (
    .clk_i, .rst_ni,
    .aw_valid_i, .aw_ready_o, .aw_i (aw_lin),
    .w_valid_i, .w_ready_o, .w_i,
    .b_valid_o, .b_ready_i, .b_o,
    .mem_req_valid_o (mx_valid[1]),
    .mem_req_ready_i (mx_ready[1]),
    .mem_req_o       (mx_req[1]),
    .mem_rsp_valid_i (mx_rsp_valid[1]),
    .mem_rsp_data_i  (mx_rsp_data[1])
  );

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
  assign unused = |stall;
endmodule
