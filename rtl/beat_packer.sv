// beat_packer: forms one R beat from the heads of the n word queues.
//
// The request generators of this design place word i of every beat on word
// lane i, so packing reduces to waiting until the info queue and all n word
// queues hold an entry, then concatenating the queue heads (lane 0 in the
// least significant word) and popping them all on the R handshake. The info
// entry supplies the AXI ID and the last flag of the beat.
//
// The beat packer and its info queue follow the published converter figure;
// the info format {id, last} is this design's own.
module beat_packer
  import axi_pack_pkg::*;
(
  input  logic                  info_valid_i,
  input  logic [IdWidth:0]       info_i,     // {id, last}
  output logic                  info_pop_o,
  input  logic [NumPorts-1:0]   word_valid_i,
  input  word_t [NumPorts-1:0]  word_i,
  output logic [NumPorts-1:0]   word_pop_o,
  output logic                  r_valid_o,
  input  logic                  r_ready_i,
  output r_t                    r_o
);
  logic fire;
  assign r_valid_o  = info_valid_i && (&word_valid_i);
  assign fire       = r_valid_o && r_ready_i;
  assign info_pop_o = fire;
  assign word_pop_o = {NumPorts{fire}};

  always_comb begin
    r_o      = '0;
    r_o.data = data_t'(word_i);
    {r_o.id, r_o.last} = info_i;
    r_o.resp = 2'b00;
  end
endmodule
