// bank_xbar: n x m crossbar from the word ports to m word-interleaved banks.
//
// Word address w = addr / 4 maps to bank w mod NumBanks, row w / NumBanks.
// The default of 17 banks is prime so that strided streams spread over the
// banks; a power-of-two bank count reduces the modulo and division to bit
// selects. Each bank grants one port per cycle by round robin; a port that
// loses (a bank conflict) keeps its request and retries. The bank read data
// returns one cycle after the grant and is steered back by the registered
// port index of that bank.
//
// The n x m word-interleaved crossbar and the prime default of 17 banks follow
// the published system; per-bank round robin and the one-cycle response are
// this design's choices.
module bank_xbar
  import axi_pack_pkg::*;
#(
  parameter int unsigned NumBanks = 17,
  parameter int unsigned BankRows = 1024
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic      [NumPorts-1:0] port_valid_i,
  output logic      [NumPorts-1:0] port_ready_o,
  input  word_req_t [NumPorts-1:0] port_req_i,
  output logic      [NumPorts-1:0] port_rsp_valid_o,
  output word_t     [NumPorts-1:0] port_rsp_data_o,
  output logic   [NumBanks-1:0]    bank_req_o,
  output logic   [NumBanks-1:0]    bank_we_o,
  output logic   [$clog2(BankRows)-1:0] bank_addr_o [NumBanks],
  output word_t  [NumBanks-1:0]    bank_wdata_o,
  output wstrb_t [NumBanks-1:0]    bank_strb_o,
  input  word_t  [NumBanks-1:0]    bank_rdata_i,
  output logic   [NumBanks-1:0]    conflict_o
);
  localparam int unsigned RowW  = $clog2(BankRows);
  localparam int unsigned BankW = (NumBanks > 1) ? $clog2(NumBanks) : 1;
  localparam int unsigned PortW = $clog2(NumPorts);
  localparam int unsigned WAddrW = AddrWidth - WordShift;

  logic [BankW-1:0] port_bank [NumPorts];
  logic [RowW-1:0]  port_row  [NumPorts];

  for (genvar p = 0; p < NumPorts; p++) begin : g_map
    logic [WAddrW-1:0] waddr;
    assign waddr        = port_req_i[p].addr[AddrWidth-1:WordShift];
    assign port_bank[p] = BankW'(waddr % WAddrW'(NumBanks));
    assign port_row[p]  = RowW'(waddr / WAddrW'(NumBanks));
  end

  logic [PortW-1:0] bank_sel [NumBanks];
  logic [NumPorts-1:0] rsp_to [NumBanks];
  logic [NumBanks-1:0] bank_found;

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    logic [PortW-1:0] rr_q, rsp_port_q;
    logic             rsp_valid_q;
    logic [NumPorts-1:0] want;

    for (genvar p = 0; p < NumPorts; p++) begin : g_want
      assign want[p] = port_valid_i[p] && (port_bank[p] == BankW'(b));
    end

    always_comb begin
      bank_sel[b]   = '0;
      bank_found[b] = 1'b0;
      for (int unsigned k = 0; k < NumPorts; k++) begin
        logic [PortW-1:0] j;
        j = PortW'(rr_q + PortW'(k));
        if (!bank_found[b] && want[j]) begin
          bank_sel[b]   = j;
          bank_found[b] = 1'b1;
        end
      end
    end

    assign conflict_o[b]   = $countones(want) > 1;
    assign bank_req_o[b]   = bank_found[b];
    assign bank_we_o[b]    = port_req_i[bank_sel[b]].we;
    assign bank_addr_o[b]  = port_row[bank_sel[b]];
    assign bank_wdata_o[b] = port_req_i[bank_sel[b]].wdata;
    assign bank_strb_o[b]  = port_req_i[bank_sel[b]].strb;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rr_q        <= '0;
        rsp_port_q  <= '0;
        rsp_valid_q <= 1'b0;
      end else begin
        rsp_valid_q <= bank_found[b];
        if (bank_found[b]) begin
          rsp_port_q <= bank_sel[b];
          rr_q       <= PortW'(bank_sel[b] + 1'b1);
        end
      end
    end

    // response steering, collected per port below
    for (genvar p = 0; p < NumPorts; p++) begin : g_rsp
      assign rsp_to[b][p] = rsp_valid_q && (rsp_port_q == PortW'(p));
    end
  end

  for (genvar p = 0; p < NumPorts; p++) begin : g_port
    assign port_ready_o[p] = port_valid_i[p] && bank_found[port_bank[p]]
                          && (bank_sel[port_bank[p]] == PortW'(p));
    always_comb begin
      port_rsp_valid_o[p] = 1'b0;
      port_rsp_data_o[p]  = '0;
      for (int unsigned b = 0; b < NumBanks; b++) begin
        if (rsp_to[b][p]) begin
          port_rsp_valid_o[p] = 1'b1;
          port_rsp_data_o[p]  = bank_rdata_i[b];
        end
      end
    end
  end
endmodule
