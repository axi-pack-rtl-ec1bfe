// beat_unpacker: splits W beats into per-lane words for the write converters.
//
// Holds one W beat. Word lane i sees its 32-bit word and 4 strobe bits and
// takes it independently of the other lanes (take_i). Once every lane has
// taken its word the beat is released and, in the same cycle, the next W beat
// can be loaded, so a beat per cycle is sustained when no lane stalls.
// accept_i lets the owner block W beats that belong to a later burst.
//
// The beat unpacker follows the published write converter description; its
// handshake details are this design's own.
module beat_unpacker
  import axi_pack_pkg::*;
(
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   accept_i,
  input  logic                   w_valid_i,
  output logic                   w_ready_o,
  input  w_t                     w_i,
  output logic   [NumPorts-1:0]  has_o,
  output word_t  [NumPorts-1:0]  word_o,
  output wstrb_t [NumPorts-1:0]  strb_o,
  input  logic   [NumPorts-1:0]  take_i,
  output logic                   beat_done_o
);
  logic                valid_q;
  w_t                  beat_q;
  logic [NumPorts-1:0] taken_q;

  assign has_o       = valid_q ? ~taken_q : '0;
  assign beat_done_o = valid_q && (&(taken_q | take_i));
  assign w_ready_o   = accept_i && (!valid_q || beat_done_o);

  for (genvar i = 0; i < NumPorts; i++) begin : g_lane
    assign word_o[i] = beat_q.data[i*WordWidth +: WordWidth];
    assign strb_o[i] = beat_q.strb[i*WordStrb +: WordStrb];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0;
      beat_q  <= '0;
      taken_q <= '0;
    end else if (w_valid_i && w_ready_o) begin
      valid_q <= 1'b1;
      beat_q  <= w_i;
      taken_q <= '0;
    end else if (beat_done_o) begin
      valid_q <= 1'b0;
      taken_q <= '0;
    end else if (valid_q) begin
      taken_q <= taken_q | take_i;
    end
  end
endmodule
