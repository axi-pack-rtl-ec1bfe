// axi_pack_controller: banked memory controller serving AXI-Pack bursts.
//
// The AXI-Pack adapter turns every burst into n parallel word accesses; an
// n x m crossbar maps them onto m word-interleaved SRAM banks (default 8 word
// ports, 17 banks of 32-bit words). Bank accesses take one cycle; bank
// conflicts stall only the losing word lane. Conflict and regulator-stall
// indicators are brought out for performance monitoring.
//
// Adapter, n x m crossbar and banks with 8 ports and 17 banks follow the
// published system; the bank depth (1024 rows) and queue depth (4) are this
// design's choices.
module axi_pack_controller
  import axi_pack_pkg::*;
#(
  parameter int unsigned NumBanks   = 17,
  parameter int unsigned BankRows   = 1024,
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
  output logic [NumBanks-1:0] bank_conflict_o,
  output logic [NumPorts-1:0] regu_stall_o
);
  logic      [NumPorts-1:0] req_valid, req_ready, rsp_valid;
  word_req_t [NumPorts-1:0] req;
  word_t     [NumPorts-1:0] rsp_data;

  axi_pack_adapter #(.QueueDepth(QueueDepth)) i_adapter (
    .clk_i, .rst_ni,
    .ar_valid_i, .ar_ready_o, .ar_i, .r_valid_o, .r_ready_i, .r_o,
    .aw_valid_i, .aw_ready_o, .aw_i, .w_valid_i, .w_ready_o, .w_i,
    .b_valid_o, .b_ready_i, .b_o,
    .mem_req_valid_o (req_valid),
    .mem_req_ready_i (req_ready),
    .mem_req_o       (req),
    .mem_rsp_valid_i (rsp_valid),
    .mem_rsp_data_i  (rsp_data),
    .regu_stall_o
  );

  logic   [NumBanks-1:0] bank_req, bank_we;
  logic   [$clog2(BankRows)-1:0] bank_addr [NumBanks];
  word_t  [NumBanks-1:0] bank_wdata, bank_rdata;
  wstrb_t [NumBanks-1:0] bank_strb;

  bank_xbar #(.NumBanks(NumBanks), .BankRows(BankRows)) i_xbar (
    .clk_i, .rst_ni,
    .port_valid_i     (req_valid),
    .port_ready_o     (req_ready),
    .port_req_i       (req),
    .port_rsp_valid_o (rsp_valid),
    .port_rsp_data_o  (rsp_data),
    .bank_req_o       (bank_req),
    .bank_we_o        (bank_we),
    .bank_addr_o      (bank_addr),
    .bank_wdata_o     (bank_wdata),
    .bank_strb_o      (bank_strb),
    .bank_rdata_i     (bank_rdata),
    .conflict_o       (bank_conflict_o)
  );

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    sram_bank #(.Rows(BankRows)) i_bank (
      .clk_i,
      .req_i   (bank_req[b]),
      .we_i    (bank_we[b]),
      .addr_i  (bank_addr[b]),
      .wdata_i (bank_wdata[b]),
      .strb_i  (bank_strb[b]),
      .rdata_o (bank_rdata[b])
    );
  end
endmodule
