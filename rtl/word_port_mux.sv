// word_port_mux: shares n word ports among NumIn requestors.
//
// Used as the adapter's "bank port mux" (five converters onto the n ports to
// the bank crossbar) and inside the base and indirect converters, where two
// engines share one converter's ports. Every word lane arbitrates on its own
// with a round-robin arbiter. The winner's index is registered so that the
// response, which arrives exactly one cycle after the grant, is routed back
// to the requestor that issued it; the fixed latency is preserved.
//
// Round-robin sharing of the word ports follows the published indirect
// converter; per-lane arbitration and its use as the adapter's port mux are
// this design's own.
module word_port_mux
  import axi_pack_pkg::*;
#(
  parameter int unsigned NumIn = 5
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic      [NumPorts-1:0] in_valid_i [NumIn],
  output logic      [NumPorts-1:0] in_ready_o [NumIn],
  input  word_req_t [NumPorts-1:0] in_req_i   [NumIn],
  output logic      [NumPorts-1:0] in_rsp_valid_o [NumIn],
  output word_t     [NumPorts-1:0] in_rsp_data_o  [NumIn],
  output logic      [NumPorts-1:0] out_valid_o,
  input  logic      [NumPorts-1:0] out_ready_i,
  output word_req_t [NumPorts-1:0] out_req_o,
  input  logic      [NumPorts-1:0] out_rsp_valid_i,
  input  word_t     [NumPorts-1:0] out_rsp_data_i
);
  localparam int unsigned SelW = (NumIn > 1) ? $clog2(NumIn) : 1;

  for (genvar l = 0; l < NumPorts; l++) begin : g_lane
    logic [SelW-1:0] rr_q, sel, rsp_sel_q;
    logic            found;

    // round robin: first requesting input at or after rr_q
    always_comb begin
      sel   = '0;
      found = 1'b0;
      for (int unsigned k = 0; k < NumIn; k++) begin
        int unsigned j;
        j = (int'(rr_q) + k) % NumIn;
        if (!found && in_valid_i[j][l]) begin
          sel   = SelW'(j);
          found = 1'b1;
        end
      end
    end

    assign out_valid_o[l] = found;
    assign out_req_o[l]   = in_req_i[sel][l];

    for (genvar k = 0; k < NumIn; k++) begin : g_in
      assign in_ready_o[k][l]     = found && (sel == SelW'(k)) && out_ready_i[l];
      assign in_rsp_valid_o[k][l] = out_rsp_valid_i[l] && (rsp_sel_q == SelW'(k));
      assign in_rsp_data_o[k][l]  = out_rsp_data_i[l];
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rr_q      <= '0;
        rsp_sel_q <= '0;
      end else if (found && out_ready_i[l]) begin
        rr_q      <= (int'(sel) == NumIn - 1) ? '0 : SelW'(sel + 1'b1);
        rsp_sel_q <= sel;
      end
    end
  end
endmodule
