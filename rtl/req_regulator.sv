// req_regulator: the "request regulator" of the read converters.
//
// Each of the n word lanes owns a response queue of QueueDepth entries. The
// memory always delivers a response one cycle after a grant and the queues
// cannot push back, so a lane may only issue a request while it still has a
// free queue slot. The regulator keeps one credit counter per lane: it counts
// up when a request is granted and down when the beat packer pops the lane's
// queue; a lane's request is passed on only while the counter is below
// QueueDepth. Purely combinational gating plus one counter per lane; the
// counter approach is this implementation's choice, the paper only states
// the purpose (no word queue overflow).
//
// The request regulator's purpose follows the published converter; the credit-
// counter form is this design's choice.
module req_regulator #(
  parameter int unsigned NumLanes   = 8,
  parameter int unsigned QueueDepth = 4
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // from the request generator
  input  logic [NumLanes-1:0] in_valid_i,
  output logic [NumLanes-1:0] in_ready_o,
  // towards the bank ports
  output logic [NumLanes-1:0] out_valid_o,
  input  logic [NumLanes-1:0] out_ready_i,
  // word queue pops (one per lane)
  input  logic [NumLanes-1:0] pop_i,
  // lanes held back this cycle by a full credit counter (for statistics)
  output logic [NumLanes-1:0] stall_o
);
  localparam int unsigned CntW = $clog2(QueueDepth + 1);
  logic [CntW-1:0] cnt_q [NumLanes];
  logic [NumLanes-1:0] credit;

  for (genvar i = 0; i < NumLanes; i++) begin : g_lane
    assign credit[i]      = (cnt_q[i] < CntW'(QueueDepth));
    assign out_valid_o[i] = in_valid_i[i] && credit[i];
    assign in_ready_o[i]  = out_ready_i[i] && credit[i];
    assign stall_o[i]     = in_valid_i[i] && !credit[i];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) cnt_q[i] <= '0;
      else cnt_q[i] <= cnt_q[i] + CntW'(out_valid_o[i] && out_ready_i[i]) - CntW'(pop_i[i]);
    end

    assert property (@(posedge clk_i) disable iff (!rst_ni)
      !(pop_i[i] && cnt_q[i] == '0)) else $error("req_regulator: pop without credit");
  end
endmodule
