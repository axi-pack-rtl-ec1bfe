// elem_req_gen: the "element request generator" of the indirect converters.
//
// Consumes index lines (one bus line of packed indices each) from the index
// stage and produces, for every beat of the indirect burst, one word address
// per lane. For lane i the element is j = i / k (k = words per element) and
// the index is entry pos + j of the current line; the lane address is
//     base + (index << size) + 4 * (i mod k)
// i.e. indices are element indices, shifted by the element size and added to
// the base address carried in the AXI-Pack user field. The lanes of a beat
// issue independently; when all have issued (and adv_ok allows it) the beat
// advances by E = n / k indices. A line is released when it is used up or
// after the last beat. Index sizes of 8, 16 and 32 bit are supported.
// All indices of a beat come from one line, so the index array must start on
// a multiple of E indices (the start position is rounded down to one).
//
// Shifting indices and adding them to the base address follows the published
// indirect converter; the per-lane element assignment and the index buffer
// handling are this design's own.
module elem_req_gen
  import axi_pack_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 cmd_valid_i,
  output logic                 cmd_ready_o,
  input  addr_t                cmd_base_i,
  input  logic [2:0]           cmd_size_i,   // element size, 2 .. 5
  input  logic [1:0]           cmd_isz_i,    // log2 index bytes, 0 .. 2
  input  logic [8:0]           cmd_beats_i,
  input  logic [5:0]           cmd_pos_i,    // first index within first line
  input  logic                 line_valid_i,
  input  data_t                line_i,
  output logic                 line_pop_o,
  output logic [NumPorts-1:0]  lane_valid_o,
  output addr_t [NumPorts-1:0] lane_addr_o,
  input  logic [NumPorts-1:0]  lane_ready_i,
  input  logic                 adv_ok_i,
  output logic                 beat_adv_o,
  output logic                 beat_last_o
);
  addr_t      base_q;
  logic [2:0] size_q;
  logic [1:0] isz_q;
  logic [8:0] beats_q;
  logic [5:0] pos_q;
  logic [NumPorts-1:0] done_q;

  logic        active;
  int unsigned lk;
  logic [5:0]  epb, ipl, pos_next;   // elements per beat, indices per line
  logic [NumPorts-1:0] hs;

  assign active      = (beats_q != '0);
  assign cmd_ready_o = !active;
  assign lk          = int'(size_q) - WordShift;
  assign epb         = 6'(NumPorts >> lk);
  assign ipl         = 6'(LineBytes >> isz_q);
  assign pos_next    = pos_q + epb;
  assign beat_last_o = (beats_q == 9'd1);

  for (genvar i = 0; i < NumPorts; i++) begin : g_lane
    logic [5:0]  j;
    data_t       shifted;
    word_t       idx;
    assign j       = pos_q + 6'(i >> lk);
    assign shifted = line_i >> ({j, 3'b000} << isz_q);
    always_comb begin
      unique case (isz_q)
        2'd0:    idx = word_t'(shifted[7:0]);
        2'd1:    idx = word_t'(shifted[15:0]);
        default: idx = shifted[31:0];
      endcase
    end
    assign lane_addr_o[i]  = base_q + (addr_t'(idx) << size_q)
                           + addr_t'((i & ((1 << lk) - 1)) << WordShift);
    assign lane_valid_o[i] = active && line_valid_i && !done_q[i];
    assign hs[i]           = lane_valid_o[i] && lane_ready_i[i];
  end

  assign beat_adv_o = active && line_valid_i && (&(done_q | hs)) && adv_ok_i;
  assign line_pop_o = beat_adv_o && ((pos_next >= ipl) || beat_last_o);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      base_q  <= '0;
      size_q  <= 3'(WordShift);
      isz_q   <= '0;
      beats_q <= '0;
      pos_q   <= '0;
      done_q  <= '0;
    end else if (cmd_valid_i && cmd_ready_o) begin
      base_q  <= cmd_base_i;
      size_q  <= cmd_size_i;
      isz_q   <= cmd_isz_i;
      beats_q <= cmd_beats_i;
      pos_q   <= cmd_pos_i;
      done_q  <= '0;
    end else if (beat_adv_o) begin
      beats_q <= beats_q - 9'd1;
      pos_q   <= line_pop_o ? '0 : pos_next;
      done_q  <= '0;
    end else begin
      done_q  <= done_q | hs;
    end
  end
endmodule
