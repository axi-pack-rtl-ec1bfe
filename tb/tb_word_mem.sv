// tb_word_mem: behavioural word memory for the converter testbenches.
//
// n word ports with the fixed-latency protocol of axi_pack_pkg: a request is
// taken when valid and ready are high, the response (read data or write ack)
// follows one cycle later. Each port's ready is randomly withheld StallPct
// percent of the time to emulate bank conflicts. The memory starts with
// init_word(word address), so testbenches can compute expected data.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_word_mem
  import axi_pack_pkg::*;
#(
  parameter int unsigned Words    = 16384,
  parameter int unsigned StallPct = 30
) (
  input  logic                     clk_i,
  input  logic      [NumPorts-1:0] req_valid_i,
  output logic      [NumPorts-1:0] req_ready_o,
  input  word_req_t [NumPorts-1:0] req_i,
  output logic      [NumPorts-1:0] rsp_valid_o,
  output word_t     [NumPorts-1:0] rsp_data_o
);
  word_t mem [Words];
  int unsigned stall_pct = StallPct;

  function automatic word_t init_word(int unsigned w);
    return {w[15:0] ^ 16'hA5C3, w[15:0]};
  endfunction

  initial begin
    for (int unsigned w = 0; w < Words; w++) mem[w] = init_word(w);
    req_ready_o = '1;
    rsp_valid_o = '0;
    rsp_data_o  = '0;
  end

  always @(negedge clk_i) begin
    for (int i = 0; i < NumPorts; i++) req_ready_o[i] <= (($urandom % 100) >= stall_pct);
  end

  always @(posedge clk_i) begin
    for (int i = 0; i < NumPorts; i++) begin
      int unsigned w;
      w = (req_i[i].addr >> 2) % Words;
      rsp_valid_o[i] <= req_valid_i[i] && req_ready_o[i];
      rsp_data_o[i]  <= mem[w];
      if (req_valid_i[i] && req_ready_o[i] && req_i[i].we) begin
        for (int b = 0; b < 4; b++) if (req_i[i].strb[b]) mem[w][b*8 +: 8] = req_i[i].wdata[b*8 +: 8];
      end
    end
  end
endmodule
