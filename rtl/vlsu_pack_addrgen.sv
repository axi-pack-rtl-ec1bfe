// vlsu_pack_addrgen: address generator of a vector load-store unit extended
// for AXI-Pack.
//
// Takes one vector memory instruction at a time and emits the AXI requests
// for it, one burst per cycle on AR (loads) or AW (stores):
//   unit-stride (vle/vse)     plain AXI4 INCR bursts of full bus width,
//                             split at 4 KiB boundaries;
//   strided (vlse/vsse)       packed strided bursts; the byte stride of rs2 is
//                             converted to an element stride (rs2 >> eew);
//   in-memory indexed         packed indirect bursts (vlimxei/vsimxei): the
//   (vlimxei/vsimxei)         AR/AW address is the index array (rs2), the
//                             user field carries the index size and the
//                             element base address (rs1).
// Packed bursts carry E = 32 / 2^eew elements per 256-bit beat, start aligned
// to the bus and are at most 256 beats long; longer vectors are split. The
// last beat may be partly filled; the data side masks the extra elements.
// Elements narrower than 32 bits are not packed by the controller; such
// strided/indexed accesses are issued with a 32-bit element size.
//
// Issuing strided and in-memory indexed vector accesses as single packed
// bursts follows the published processor extension; the decoded operation
// format, the 4 KiB and 256-beat splits and the handling of narrow elements
// are this design's choices.
module vlsu_pack_addrgen
  import axi_pack_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     op_valid_i,
  output logic     op_ready_o,
  input  vmem_op_t op_i,
  output logic     ar_valid_o,
  input  logic     ar_ready_i,
  output ax_t      ar_o,
  output logic     aw_valid_o,
  input  logic     aw_ready_i,
  output ax_t      aw_o,
  output logic     busy_o
);
  vmem_op_t   op_q;
  logic       active_q;
  addr_t      addr_q;     // running base (unit, strided) or index address (indirect)
  logic [16:0] rem_q;     // elements left

  logic [2:0]  esz;
  logic [5:0]  epb;                   // elements per beat
  logic [8:0]  beats, max_beats;
  logic [16:0] beats_needed, covered, full_cover;
  addr_t       next_addr, stride_el;
  ax_t         ax;
  logic        fire;

  assign esz       = (op_q.mode == VMEM_UNIT) ? 3'(LineShift)
                   : ((op_q.eew < 2'd2) ? 3'(WordShift) : {1'b0, op_q.eew});
  assign epb       = 6'(LineBytes >> esz);
  assign stride_el = op_q.rs2 >> esz;

  always_comb begin
    beats_needed      = '0;
    max_beats         = 9'd256;
    full_cover        = '0;
    if (op_q.mode == VMEM_UNIT) begin
      // bytes from the start of the first line to the end of the data
      beats_needed = 17'((32'(addr_q[LineShift-1:0]) + (32'(rem_q) << op_q.eew) + LineBytes - 1)
                         >> LineShift);
      max_beats    = 9'(128 - int'(addr_q[11:LineShift]));
    end else begin
      beats_needed = (rem_q + 17'(epb) - 17'd1) / 17'(epb);
    end
    beats = (beats_needed > 17'(max_beats)) ? max_beats : beats_needed[8:0];
    if (op_q.mode == VMEM_UNIT) begin
      full_cover = 17'(((32'(beats) << LineShift) - 32'(addr_q[LineShift-1:0])) >> op_q.eew);
    end else begin
      full_cover = 17'(beats) * 17'(epb);
    end
    covered = (full_cover > rem_q) ? rem_q : full_cover;
    unique case (op_q.mode)
      VMEM_STRIDED: next_addr = addr_q + addr_t'(covered) * op_q.rs2;
      VMEM_INDIR:   next_addr = addr_q + (addr_t'(covered) << op_q.idx_eew);
      default:      next_addr = addr_q + (addr_t'(covered) << op_q.eew);
    endcase
    ax       = '0;
    ax.id    = op_q.id;
    ax.addr  = addr_q;
    ax.len   = 8'(beats - 9'd1);
    ax.size  = esz;
    ax.burst = BURST_INCR;
    unique case (op_q.mode)
      VMEM_STRIDED: ax.user = make_strided_user(stride_el);
      VMEM_INDIR:   ax.user = make_indir_user({2'b00, op_q.idx_eew}, op_q.rs1);
      default:      ax.user = '0;
    endcase
  end

  assign op_ready_o = !active_q;
  assign busy_o     = active_q;
  assign ar_valid_o = active_q && !op_q.store;
  assign aw_valid_o = active_q &&  op_q.store;
  assign ar_o       = ax;
  assign aw_o       = ax;
  assign fire       = (ar_valid_o && ar_ready_i) || (aw_valid_o && aw_ready_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      op_q     <= '0;
      active_q <= 1'b0;
      addr_q   <= '0;
      rem_q    <= '0;
    end else if (op_valid_i && op_ready_o) begin
      op_q     <= op_i;
      active_q <= (op_i.vl != '0);
      addr_q   <= (op_i.mode == VMEM_INDIR) ? op_i.rs2 : op_i.rs1;
      rem_q    <= {1'b0, op_i.vl};
    end else if (fire) begin
      addr_q   <= next_addr;
      rem_q    <= rem_q - covered;
      if (rem_q == covered) active_q <= 1'b0;
    end
  end
endmodule
