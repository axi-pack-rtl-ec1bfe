// axi_pack_pkg: shared constants and types of the AXI-Pack memory controller.
//
// AXI-Pack adds strided and indirect ("packed") bursts to AXI4 through the AR/AW
// user field. The user field layout follows the protocol figure of the design:
//   bit 0      pack  : 1 = irregular (packed) burst, 0 = plain AXI4 burst
//   bit 1      indir : 1 = indirect burst, 0 = strided burst
//   bits 30:2  stride: element stride, in elements           (strided bursts)
//   bits 5:2   idx size: log2 of the index size in bytes     (indirect bursts)
//   bits 30:6  idx base offset: byte base address of the element array (indirect)
// The 256-bit data bus, 32-bit words and hence n = 8 word ports are the
// evaluated configuration. Address width (32), ID width (4) and the index-size
// encoding are this implementation's choices.
//
// Word ports use a fixed-latency request/grant protocol: a request is taken
// when req_valid and req_ready are both high; exactly one cycle later the port
// sees rsp_valid with the read data (for writes rsp_valid is the write ack).
//
// Field positions of the user signal follow the published protocol figure; the
// index size code (log2 of bytes), the ID width and the decoded vector
// operation format are this design's choices.
package axi_pack_pkg;

  parameter int unsigned AddrWidth = 32;
  parameter int unsigned DataWidth = 256;               // D, AXI-Pack data bus
  parameter int unsigned WordWidth = 32;                // W, bank word
  parameter int unsigned NumPorts  = DataWidth / WordWidth;  // n = D/W
  parameter int unsigned IdWidth   = 4;
  parameter int unsigned UserWidth = 31;
  parameter int unsigned StrbWidth = DataWidth / 8;
  parameter int unsigned WordStrb  = WordWidth / 8;
  parameter int unsigned LineBytes = DataWidth / 8;     // 32 bytes per beat
  parameter int unsigned LineShift = $clog2(LineBytes); // 5
  parameter int unsigned WordShift = $clog2(WordStrb);  // 2
  parameter int unsigned PortShift = $clog2(NumPorts);  // 3

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [IdWidth-1:0]   id_t;
  typedef logic [UserWidth-1:0] user_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [StrbWidth-1:0] strb_t;
  typedef logic [WordWidth-1:0] word_t;
  typedef logic [WordStrb-1:0]  wstrb_t;

  typedef enum logic [1:0] {
    BURST_FIXED = 2'b00,
    BURST_INCR  = 2'b01,
    BURST_WRAP  = 2'b10
  } burst_e;

  // AR and AW request (AXI4 subset used by the controller)
  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    burst_e     burst;
    user_t      user;
  } ax_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } w_t;

  typedef struct packed {
    id_t        id;
    data_t      data;
    logic [1:0] resp;
    logic       last;
  } r_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } b_t;

  // one word access on a bank port; addr is a byte address (low 2 bits ignored)
  typedef struct packed {
    addr_t  addr;
    logic   we;
    word_t  wdata;
    wstrb_t strb;
  } word_req_t;

  // decoded AXI-Pack user field
  function automatic logic user_pack(user_t u);
    return u[0];
  endfunction

  function automatic logic user_indir(user_t u);
    return u[1];
  endfunction

  function automatic addr_t user_stride(user_t u);
    return addr_t'(u[30:2]);
  endfunction

  function automatic logic [3:0] user_idx_size(user_t u);
    return u[5:2];
  endfunction

  function automatic addr_t user_idx_base(user_t u);
    return addr_t'(u[30:6]);
  endfunction

  function automatic user_t make_strided_user(addr_t stride);
    return {stride[28:0], 1'b0, 1'b1};
  endfunction

  function automatic user_t make_indir_user(logic [3:0] idx_size, addr_t base);
    return {base[24:0], idx_size, 1'b1, 1'b1};
  endfunction

  // command for the per-lane request generator (see req_gen)
  typedef addr_t [NumPorts-1:0] lane_addr_t;
  typedef struct packed {
    lane_addr_t ptr;
    addr_t      step;
    logic       linear;
    logic [2:0] size;
    logic [8:0] beats;
  } gen_cmd_t;

  // element size actually used by packed bursts: elements narrower than a
  // word are not supported and are treated as one word; at most one beat
  function automatic logic [2:0] elem_size(logic [2:0] size);
    if (size < 3'(WordShift)) return 3'(WordShift);
    if (size > 3'(LineShift)) return 3'(LineShift);
    return size;
  endfunction

  // translate an AR/AW request into per-lane pointers. Packed strided bursts
  // start bus-aligned: element j of the burst goes to beat j / E, word lanes
  // (j % E) * k .. (j % E) * k + k - 1, where k = words per element and
  // E = n / k elements per beat. Element j sits at addr + j * stride * 2^size.
  function automatic gen_cmd_t ax_to_cmd(ax_t ax);
    gen_cmd_t   c;
    logic [2:0] esz;
    int unsigned lk;
    c.size  = ax.size;
    c.beats = {1'b0, ax.len} + 9'd1;
    if (user_pack(ax.user) && !user_indir(ax.user)) begin
      esz      = elem_size(ax.size);
      lk       = int'(esz) - WordShift;
      c.size   = esz;
      c.linear = 1'b0;
      for (int unsigned i = 0; i < NumPorts; i++) begin
        c.ptr[i] = ax.addr + ((addr_t'(i >> lk) * user_stride(ax.user)) << esz)
                 + addr_t'((i & ((1 << lk) - 1)) << WordShift);
      end
      c.step = user_stride(ax.user) << (int'(esz) + PortShift - lk);
    end else begin
      c.linear = 1'b1;
      for (int unsigned i = 0; i < NumPorts; i++) c.ptr[i] = ax.addr;
      c.step = (ax.burst == BURST_FIXED) ? '0 : (addr_t'(1) << ax.size);
    end
    return c;
  endfunction

  // split an indirect AR/AW into the contiguous index fetch of the index
  // stage and the command of the element request generator. The index array
  // starts at ax.addr; its start is rounded down to a multiple of one beat's
  // worth of indices (E indices) so that no beat straddles two index lines.
  typedef struct packed {
    ax_t        idx_ar;
    addr_t      base;
    logic [2:0] size;
    logic [1:0] isz;
    logic [8:0] beats;
    logic [5:0] pos;
  } indir_cmd_t;

  function automatic indir_cmd_t ax_to_indir(ax_t ax);
    indir_cmd_t  c;
    logic [2:0]  esz;
    int unsigned lk, epb, total;
    esz     = elem_size(ax.size);
    lk      = int'(esz) - WordShift;
    epb     = NumPorts >> lk;
    c.size  = esz;
    c.isz   = (user_idx_size(ax.user) > 4'd2) ? 2'd2 : user_idx_size(ax.user)[1:0];
    c.beats = {1'b0, ax.len} + 9'd1;
    c.base  = user_idx_base(ax.user);
    c.pos   = 6'((int'(ax.addr[LineShift-1:0]) >> c.isz) & ~(epb - 1));
    total   = ((int'(c.pos) + int'(c.beats) * epb) << c.isz);   // bytes from line start
    c.idx_ar.id    = ax.id;
    c.idx_ar.addr  = {ax.addr[AddrWidth-1:LineShift], LineShift'(0)};
    c.idx_ar.len   = 8'(((total + LineBytes - 1) >> LineShift) - 1);
    c.idx_ar.size  = 3'(LineShift);
    c.idx_ar.burst = BURST_INCR;
    c.idx_ar.user  = '0;
    return c;
  endfunction

  // vector memory access kinds of the extended vector load-store unit
  typedef enum logic [1:0] {
    VMEM_UNIT    = 2'd0,   // vle / vse: contiguous
    VMEM_STRIDED = 2'd1,   // vlse / vsse: byte stride in rs2
    VMEM_INDIR   = 2'd2    // vlimxei / vsimxei: index array address in rs2
  } vmem_mode_e;

  typedef struct packed {
    logic       store;
    vmem_mode_e mode;
    addr_t      rs1;       // base address
    addr_t      rs2;       // byte stride or index array address
    logic [1:0] eew;       // log2 element bytes
    logic [1:0] idx_eew;   // log2 index bytes
    logic [15:0] vl;       // number of elements
    id_t        id;
  } vmem_op_t;

endpackage
