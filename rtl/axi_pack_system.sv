// axi_pack_system: the memory side of an AXI-Pack vector system.
//
// The address generator of the extended vector load-store unit turns vector
// memory instructions (unit-stride, strided, in-memory indexed) into AXI-Pack
// bursts, which travel over a 256-bit AXI-Pack bus straight to the banked
// AXI-Pack memory controller (8 word ports, 17 banks). The vector lanes that
// consume R beats and produce W beats, the scalar core and any interconnect
// in between are outside this module: the R, W and B channels are ports.
// Bank-conflict and regulator-stall indicators are exported for monitoring.
//
// The pairing of an AXI-Pack vector load-store unit with the banked controller
// follows the published system; the host core, the vector lanes and the
// interconnect are not part of this RTL, so data and operations are ports.
module axi_pack_system
  import axi_pack_pkg::*;
#(
  parameter int unsigned NumBanks   = 17,
  parameter int unsigned BankRows   = 1024,
  parameter int unsigned QueueDepth = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // vector memory instructions from the sequencer
  input  logic     op_valid_i,
  output logic     op_ready_o,
  input  vmem_op_t op_i,
  output logic     addrgen_busy_o,
  // load data towards the vector lanes
  output logic     r_valid_o,
  input  logic     r_ready_i,
  output r_t       r_o,
  // store data from the vector lanes
  input  logic     w_valid_i,
  output logic     w_ready_o,
  input  w_t       w_i,
  output logic     b_valid_o,
  input  logic     b_ready_i,
  output b_t       b_o,
  // monitoring
  output logic [NumBanks-1:0] bank_conflict_o,
  output logic [NumPorts-1:0] regu_stall_o,
  output logic     ar_fire_o,
  output logic     aw_fire_o,
  output ax_t      ar_mon_o,
  output ax_t      aw_mon_o
);
  logic ar_valid, ar_ready, aw_valid, aw_ready;
  ax_t  ar, aw;

  vlsu_pack_addrgen i_addrgen (
    .clk_i, .rst_ni,
    .op_valid_i, .op_ready_o, .op_i,
    .ar_valid_o (ar_valid), .ar_ready_i (ar_ready), .ar_o (ar),
    .aw_valid_o (aw_valid), .aw_ready_i (aw_ready), .aw_o (aw),
    .busy_o     (addrgen_busy_o)
  );

  axi_pack_controller #(
    .NumBanks (NumBanks), .BankRows (BankRows), .QueueDepth (QueueDepth)
  ) i_ctrl (
    .clk_i, .rst_ni,
    .ar_valid_i (ar_valid), .ar_ready_o (ar_ready), .ar_i (ar),
    .r_valid_o, .r_ready_i, .r_o,
    .aw_valid_i (aw_valid), .aw_ready_o (aw_ready), .aw_i (aw),
    .w_valid_i, .w_ready_o, .w_i,
    .b_valid_o, .b_ready_i, .b_o,
    .bank_conflict_o, .regu_stall_o
  );

  assign ar_fire_o = ar_valid && ar_ready;
  assign aw_fire_o = aw_valid && aw_ready;
  assign ar_mon_o  = ar;
  assign aw_mon_o  = aw;
endmodule
