// req_gen: the per-lane pointer request generator of the read and write
// converters ("req gen" with pointer0 .. pointer n-1).
//
// A command loads one pointer per word lane and a common step. Each lane then
// issues one word request per beat, independently of the other lanes, until
// it has issued `beats` requests; after each granted request it adds the step
// to its pointer. Two address modes exist:
//   strided: the lane address is the pointer itself; pointer += step.
//            For strided bursts the step is the element stride scaled to one
//            beat, stride << (size + log2(elements per beat)).
//   linear : the lane address is word i of the bus line the pointer falls in;
//            pointer = align(pointer, size) + step. This gives plain AXI4
//            INCR (step = 2^size) and FIXED (step = 0) bursts, including
//            narrow and unaligned ones, and the contiguous index fetches.
// A new command is accepted once every lane has finished the previous one.
//
// Per-lane address pointers advanced by the stride shifted by (size + log2 n)
// follow the published request generator; the linear mode is this design's
// addition for plain bursts and index fetches.
module req_gen
  import axi_pack_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 cmd_valid_i,
  output logic                 cmd_ready_o,
  input  addr_t [NumPorts-1:0] cmd_ptr_i,
  input  addr_t                cmd_step_i,
  input  logic                 cmd_linear_i,
  input  logic [2:0]           cmd_size_i,
  input  logic [8:0]           cmd_beats_i,   // 1 .. 256
  output logic [NumPorts-1:0]  lane_valid_o,
  output addr_t [NumPorts-1:0] lane_addr_o,
  input  logic [NumPorts-1:0]  lane_ready_i,
  output logic                 idle_o
);
  addr_t [NumPorts-1:0] ptr_q;
  logic  [8:0]          cnt_q [NumPorts];
  addr_t                step_q;
  logic                 linear_q;
  logic [2:0]           size_q;
  logic [NumPorts-1:0]  busy;

  for (genvar i = 0; i < NumPorts; i++) begin : g_busy
    assign busy[i] = (cnt_q[i] != '0);
  end
  assign idle_o       = ~|busy;
  assign cmd_ready_o  = idle_o;
  assign lane_valid_o = busy;

  function automatic addr_t align_size(addr_t a, logic [2:0] sz);
    return (a >> sz) << sz;
  endfunction

  for (genvar i = 0; i < NumPorts; i++) begin : g_lane
    always_comb begin
      if (linear_q) begin
        lane_addr_o[i] = {ptr_q[i][AddrWidth-1:LineShift], PortShift'(i), WordShift'(0)};
      end else begin
        lane_addr_o[i] = {ptr_q[i][AddrWidth-1:WordShift], WordShift'(0)};
      end
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        ptr_q[i] <= '0;
        cnt_q[i] <= '0;
      end else if (cmd_valid_i && cmd_ready_o) begin
        ptr_q[i] <= cmd_ptr_i[i];
        cnt_q[i] <= cmd_beats_i;
      end else if (lane_valid_o[i] && lane_ready_i[i]) begin
        ptr_q[i] <= linear_q ? align_size(ptr_q[i], size_q) + step_q : ptr_q[i] + step_q;
        cnt_q[i] <= cnt_q[i] - 9'd1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      step_q   <= '0;
      linear_q <= 1'b0;
      size_q   <= '0;
    end else if (cmd_valid_i && cmd_ready_o) begin
      step_q   <= cmd_step_i;
      linear_q <= cmd_linear_i;
      size_q   <= cmd_size_i;
    end
  end
endmodule
