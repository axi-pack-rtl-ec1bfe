// sram_bank: one word-wide SRAM bank of the banked memory.
//
// Single port, one access per cycle, byte write strobes, read data valid one
// cycle after the request (synchronous read). Written as an array so it maps
// to a memory macro or inferred RAM; the memory is not reset.
//
// Single-cycle word banks follow the published memory; the byte strobes and
// the row count are this design's choices.
module sram_bank
  import axi_pack_pkg::*;
#(
  parameter int unsigned Rows = 1024
) (
  input  logic                    clk_i,
  input  logic                    req_i,
  input  logic                    we_i,
  input  logic [$clog2(Rows)-1:0] addr_i,
  input  word_t                   wdata_i,
  input  wstrb_t                  strb_i,
  output word_t                   rdata_o
);
  word_t mem [Rows];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned b = 0; b < WordStrb; b++) begin
          if (strb_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
        end
      end
      rdata_o <= mem[addr_i];
    end
  end
endmodule
