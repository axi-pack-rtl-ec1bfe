// tb_axi_pack_system: end-to-end test of the AXI-Pack memory system at its
// default parameters (256-bit bus, 8 word ports, 17 banks of 1024 words,
// queue depth 4). Vector memory instructions enter the address generator as
// a vector unit would issue them: unit-stride stores fill the memory, then
// unit-stride, strided (vlse/vsse) and in-memory indexed (vlimxei/vsimxei)
// loads and stores run with 32 and 64-bit elements. Loaded elements are
// unpacked from the R beats (E elements per beat, each burst starting on a
// new beat) and compared with a reference memory kept here; stores are checked
// by loading the data back. Long vectors exercise burst splitting. Counts of
// every mechanism (each burst kind, split bursts, bank conflicts, regulator
// stalls) are checked to be non-zero.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_axi_pack_system;
  import axi_pack_pkg::*;
  localparam int unsigned MemWords = 8192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     op_valid, op_ready, busy, r_valid, r_ready, w_valid, w_ready, b_valid, b_ready;
  logic     ar_fire, aw_fire;
  vmem_op_t op;
  r_t       r;
  w_t       w;
  b_t       b;
  ax_t      ar_mon, aw_mon;
  logic [16:0] conflict;
  logic [NumPorts-1:0] stall;

  axi_pack_system dut (
    .clk_i (clk), .rst_ni (rst_n),
    .op_valid_i (op_valid), .op_ready_o (op_ready), .op_i (op), .addrgen_busy_o (busy),
    .r_valid_o (r_valid), .r_ready_i (r_ready), .r_o (r),
    .w_valid_i (w_valid), .w_ready_o (w_ready), .w_i (w),
    .b_valid_o (b_valid), .b_ready_i (b_ready), .b_o (b),
    .bank_conflict_o (conflict), .regu_stall_o (stall),
    .ar_fire_o (ar_fire), .aw_fire_o (aw_fire), .ar_mon_o (ar_mon), .aw_mon_o (aw_mon)
  );

  int checks = 0, failures = 0;
  word_t shadow [MemWords];
  int n_kind_r [3] = '{0, 0, 0};
  int n_kind_w [3] = '{0, 0, 0};
  int n_conflict = 0, n_stall = 0, n_split = 0;
  ax_t aw_q [$];

  always @(posedge clk) begin
    if (|conflict) n_conflict++;
    if (|stall) n_stall++;
    if (ar_fire) n_kind_r[ar_mon.user[0] ? (ar_mon.user[1] ? 2 : 1) : 0]++;
    if (aw_fire) begin
      n_kind_w[aw_mon.user[0] ? (aw_mon.user[1] ? 2 : 1) : 0]++;
      aw_q.push_back(aw_mon);
    end
  end

  // byte address of element j of an operation
  function automatic int unsigned elem_addr(vmem_op_t o, int j);
    case (o.mode)
      VMEM_STRIDED: return o.rs1 + j * o.rs2;
      VMEM_INDIR: begin
        int unsigned ba, idx;
        ba  = o.rs2 + (j << o.idx_eew);
        idx = (o.idx_eew == 2) ? shadow[ba >> 2] : shadow[ba >> 2][(ba % 4) * 8 +: 16];
        return o.rs1 + (idx << o.eew);
      end
      default: return o.rs1 + (j << o.eew);
    endcase
  endfunction

  task automatic issue(vmem_op_t o);
    @(negedge clk); op = o; op_valid = 1;
    do @(posedge clk); while (!op_ready);
    @(negedge clk); op_valid = 0;
  endtask

  // load: collect elements from the R beats
  task automatic vload(vmem_op_t o);
    int got = 0, ewords, epb, in_burst = 0;
    word_t elems [$];
    ewords = (o.eew == 3) ? 2 : 1;
    epb    = NumPorts / ewords;
    issue(o);
    r_ready = 1;
    while (got < o.vl) begin
      @(posedge clk);
      if (r_valid && r_ready) begin
        if (o.mode == VMEM_UNIT) begin
          // whole lines: pick the words of the vector
          for (int i = 0; i < NumPorts; i++) elems.push_back(r.data[i*32 +: 32]);
          if (r.last) got = o.vl;
        end else begin
          for (int e = 0; e < epb; e++) begin
            if (got < o.vl) begin
              for (int q = 0; q < ewords; q++) elems.push_back(r.data[(e * ewords + q) * 32 +: 32]);
              got++;
            end
          end
          in_burst++;
          if (r.last) in_burst = 0;
        end
      end
    end
    // drain a unit-stride load that was split into several bursts
    if (o.mode == VMEM_UNIT) begin
      int need;
      need = ((o.rs1 % 32) + (o.vl << o.eew) + 31) / 32 * 8;
      while (elems.size() < need) begin
        @(posedge clk);
        if (r_valid && r_ready) for (int i = 0; i < NumPorts; i++) elems.push_back(r.data[i*32 +: 32]);
      end
      for (int j = 0; j < o.vl * ewords; j++) begin
        checks++;
        if (elems[(o.rs1 % 32) / 4 + j] !== shadow[o.rs1 / 4 + j]) failures++;
      end
    end else begin
      for (int j = 0; j < o.vl; j++) begin
        for (int q = 0; q < ewords; q++) begin
          word_t exp;
          exp = shadow[elem_addr(o, j) / 4 + q];
          checks++;
          if (elems[j * ewords + q] !== exp) begin
            failures++;
            if (failures < 10) $display("LOAD MISMATCH mode %0d elem %0d: got %h exp %h",
                                        o.mode, j, elems[j * ewords + q], exp);
          end
        end
      end
    end
    @(negedge clk); r_ready = 0;
    while (busy) @(posedge clk);
  endtask

  // store: feed W beats burst by burst as the AW requests appear
  task automatic vstore(vmem_op_t o, bit keep = 0);
    int sent = 0, ewords, epb, bursts = 0, acks = 0;
    ewords = (o.eew == 3) ? 2 : 1;
    epb    = NumPorts / ewords;
    aw_q.delete();
    fork
      issue(o);
      begin
        while (sent < o.vl) begin
          ax_t a;
          while (aw_q.size() == 0) @(posedge clk);
          a = aw_q.pop_front();
          bursts++;
          for (int bt = 0; bt <= a.len; bt++) begin
            w_t x;
            x = '0;
            if (o.mode == VMEM_UNIT) begin
              for (int i = 0; i < NumPorts; i++) begin
                int signed off;
                off = ((a.addr / 32) * 32 + bt * 32 + i * 4 - int'(o.rs1)) / 4;
                if ((a.addr / 32) * 32 + bt * 32 + i * 4 >= o.rs1 && off < int'(o.vl) * ewords) begin
                  x.data[i*32 +: 32] = keep ? shadow[(a.addr / 32) * 8 + bt * 8 + i] : $urandom;
                  x.strb[i*4 +: 4] = '1;
                  shadow[(a.addr / 32) * 8 + bt * 8 + i] = x.data[i*32 +: 32];
                  if (off % ewords == ewords - 1) sent++;
                end
              end
            end else begin
              for (int e = 0; e < epb; e++) begin
                if (sent < o.vl) begin
                  int unsigned ea;
                  ea = elem_addr(o, sent);
                  for (int q = 0; q < ewords; q++) begin
                    x.data[(e * ewords + q) * 32 +: 32] = $urandom;
                    x.strb[(e * ewords + q) * 4 +: 4] = '1;
                    shadow[ea / 4 + q] = x.data[(e * ewords + q) * 32 +: 32];
                  end
                  sent++;
                end
              end
            end
            x.last = (bt == a.len);
            @(negedge clk); w = x; w_valid = 1;
            do @(posedge clk); while (!w_ready);
            @(negedge clk); w_valid = 0;
          end
        end
      end
      begin
        b_ready = 1;
        forever begin
          @(posedge clk);
          if (b_valid) acks++;
          if (sent >= o.vl && acks == bursts && !busy && aw_q.size() == 0) break;
        end
        b_ready = 0;
      end
    join
    if (bursts > 1) n_split++;
  endtask

  function automatic vmem_op_t mk_op(bit store, vmem_mode_e mode, int unsigned rs1,
                                     int unsigned rs2, int eew, int idx_eew, int vl);
    vmem_op_t o;
    o = '0;
    o.store = store; o.mode = mode; o.rs1 = rs1; o.rs2 = rs2;
    o.eew = 2'(eew); o.idx_eew = 2'(idx_eew); o.vl = 16'(vl); o.id = 4'(vl % 16);
    return o;
  endfunction

  initial begin
    op_valid = 0; r_ready = 0; w_valid = 0; b_ready = 0; op = '0; w = '0;
    for (int q = 0; q < MemWords; q++) shadow[q] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill 32 KiB with unit-stride stores (split at 4 KiB boundaries)
    vstore(mk_op(1, VMEM_UNIT, 0, 0, 2, 0, MemWords));
    // unit-stride loads, aligned and unaligned
    vload(mk_op(0, VMEM_UNIT, 32'h0100, 0, 2, 0, 100));
    vload(mk_op(0, VMEM_UNIT, 32'h0F84, 0, 2, 0, 300));
    // strided loads (vlse32: byte strides), a long one split into bursts
    vload(mk_op(0, VMEM_STRIDED, 32'h0000, 4 * 17, 2, 0, 37));
    vload(mk_op(0, VMEM_STRIDED, 32'h0040, 4 * 3, 2, 0, 2100));
    vload(mk_op(0, VMEM_STRIDED, 32'h0200, 8 * 5, 3, 0, 40));
    // strided store, then load back strided and contiguous
    vstore(mk_op(1, VMEM_STRIDED, 32'h5000, 4 * 7, 2, 0, 90));
    vload(mk_op(0, VMEM_STRIDED, 32'h5000, 4 * 7, 2, 0, 90));
    vload(mk_op(0, VMEM_UNIT, 32'h5000, 0, 2, 0, 7 * 90));
    // in-memory indexed: index array of distinct 32-bit indices at 0x6000
    begin
      int unsigned perm [$];
      for (int j = 0; j < 1024; j++) perm.push_back(j);
      perm.shuffle();
      for (int j = 0; j < 256; j++) shadow[(32'h6000 >> 2) + j] = perm[j];
      for (int j = 0; j < 128; j++) shadow[(32'h6400 >> 2) + j] = {perm[2*j+1][15:0], perm[2*j][15:0]};
    end
    vstore(mk_op(1, VMEM_UNIT, 32'h6000, 0, 2, 0, 256 + 128), 1);
    vload(mk_op(0, VMEM_INDIR, 32'h0000, 32'h6000, 2, 2, 200));
    vload(mk_op(0, VMEM_INDIR, 32'h1000, 32'h6400, 2, 1, 256));
    vstore(mk_op(1, VMEM_INDIR, 32'h7000, 32'h6000, 2, 2, 64));
    vload(mk_op(0, VMEM_INDIR, 32'h7000, 32'h6000, 2, 2, 64));
    $display("bursts: AR base %0d strided %0d indirect %0d; AW base %0d strided %0d indirect %0d",
             n_kind_r[0], n_kind_r[1], n_kind_r[2], n_kind_w[0], n_kind_w[1], n_kind_w[2]);
    $display("split stores %0d, bank-conflict cycles %0d, regulator-stall cycles %0d",
             n_split, n_conflict, n_stall);
    for (int k = 0; k < 3; k++) begin
      checks += 2;
      if (n_kind_r[k] == 0) failures++;
      if (n_kind_w[k] == 0) failures++;
    end
    checks += 3;
    if (n_split == 0) failures++;
    if (n_conflict == 0) failures++;
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
