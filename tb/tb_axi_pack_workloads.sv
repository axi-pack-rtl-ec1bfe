// tb_axi_pack_workloads: runs small versions of two evaluated workloads on
// the full system at default parameters, with integer data in place of FP32.
//   ismt  in-situ transpose of a 32 x 32 matrix: for every row i, the part
//         right of the diagonal (unit-stride load) and the column part below
//         it (strided load, vlse) are swapped by a unit-stride and a strided
//         store (vsse). The result is compared with the transpose of the
//         original matrix kept in the bench.
//   spmv  y = A x for a random 48-row CSR matrix with up to 40 nonzeros per
//         row, each row padded to start on a bus line: per row, the values are loaded unit-stride and the x entries
//         are gathered in memory with an indexed load (vlimxei) whose index
//         array is the row's slice of the column index array. Each y is
//         compared with a product computed directly from the generated arrays.
// Every load is also checked word by word against a reference memory.
// Sizes are this bench's choice, small enough for the 68 KiB memory; the
// published runs use 256 x 256 matrices and SuiteSparse matrices.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_axi_pack_workloads;
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
  word_t wsrc [$];       // data for the next store (else random)
  word_t loaded [$];     // words of the last load, in element order

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
    loaded.delete();
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
        loaded.push_back(elems[(o.rs1 % 32) / 4 + j]);
      end
    end else begin
      for (int j = 0; j < o.vl; j++) begin
        for (int q = 0; q < ewords; q++) begin
          word_t exp;
          exp = shadow[elem_addr(o, j) / 4 + q];
          loaded.push_back(elems[j * ewords + q]);
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
                  x.data[i*32 +: 32] = keep ? shadow[(a.addr / 32) * 8 + bt * 8 + i]
                                     : (wsrc.size() > 0 ? wsrc.pop_front() : $urandom);
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
                    x.data[(e * ewords + q) * 32 +: 32] = (wsrc.size() > 0) ? wsrc.pop_front() : $urandom;
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

  localparam int unsigned N = 32;              // ismt matrix dimension
  localparam int unsigned MatA = 32'h0000;     // N x N row-major FP32 matrix
  localparam int unsigned Rows = 48;           // spmv matrix rows
  localparam int unsigned ValA = 32'h2000, ColA = 32'h4000, XA = 32'h6000;

  word_t orig [N][N];
  int    rptr [Rows + 1];
  int    rlen [Rows];
  word_t vals [$], cols [$], xv [$];

  initial begin
    int n_ismt_ok, n_spmv_ok;
    op_valid = 0; r_ready = 0; w_valid = 0; b_ready = 0; op = '0; w = '0;
    for (int q = 0; q < MemWords; q++) shadow[q] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- ismt: in-situ transpose of an N x N matrix
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      orig[i][j] = $urandom;
      wsrc.push_back(orig[i][j]);
    end
    vstore(mk_op(1, VMEM_UNIT, MatA, 0, 2, 0, N * N));
    // for each i: swap row i right of the diagonal with column i below it
    for (int i = 0; i < N - 1; i++) begin
      word_t row_part [$], col_part [$];
      int len;
      len = N - 1 - i;
      vload(mk_op(0, VMEM_UNIT, MatA + (i * N + i + 1) * 4, 0, 2, 0, len));
      row_part = loaded;
      vload(mk_op(0, VMEM_STRIDED, MatA + ((i + 1) * N + i) * 4, N * 4, 2, 0, len));
      col_part = loaded;
      wsrc = col_part;
      vstore(mk_op(1, VMEM_UNIT, MatA + (i * N + i + 1) * 4, 0, 2, 0, len));
      wsrc = row_part;
      vstore(mk_op(1, VMEM_STRIDED, MatA + ((i + 1) * N + i) * 4, N * 4, 2, 0, len));
    end
    vload(mk_op(0, VMEM_UNIT, MatA, 0, 2, 0, N * N));
    n_ismt_ok = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      checks++;
      if (loaded[i * N + j] !== orig[j][i]) failures++;
      else n_ismt_ok++;
    end
    $display("ismt %0dx%0d: %0d of %0d elements transposed", N, N, n_ismt_ok, N * N);

    // ---------------- spmv: y = A x with A in CSR, indices resolved in memory
    rptr[0] = 0;
    for (int r = 0; r < Rows; r++) begin
      int nnz;
      nnz = 1 + $urandom % 40;
      // rows start on a multiple of 8 entries (one bus line of 32-bit
      // indices); padding entries are zero and never read
      rptr[r + 1] = ((rptr[r] + nnz + 7) / 8) * 8;
      for (int k = 0; k < rptr[r + 1] - rptr[r]; k++) begin
        vals.push_back((k < nnz) ? $urandom % 1000 : 0);
        cols.push_back((k < nnz) ? $urandom % 256 : 0);
      end
      rlen[r] = nnz;
    end
    for (int k = 0; k < 256; k++) xv.push_back($urandom % 1000);
    wsrc = vals; vstore(mk_op(1, VMEM_UNIT, ValA, 0, 2, 0, vals.size()));
    wsrc = cols; vstore(mk_op(1, VMEM_UNIT, ColA, 0, 2, 0, cols.size()));
    wsrc = xv;   vstore(mk_op(1, VMEM_UNIT, XA, 0, 2, 0, xv.size()));
    n_spmv_ok = 0;
    for (int r = 0; r < Rows; r++) begin
      word_t a_row [$], x_row [$];
      word_t y, y_ref;
      int nnz;
      nnz = rlen[r];
      vload(mk_op(0, VMEM_UNIT, ValA + rptr[r] * 4, 0, 2, 0, nnz));
      a_row = loaded;
      vload(mk_op(0, VMEM_INDIR, XA, ColA + rptr[r] * 4, 2, 2, nnz));  // vlimxei
      x_row = loaded;
      y = 0; y_ref = 0;
      for (int k = 0; k < nnz; k++) begin
        y     += a_row[k] * x_row[k];
        y_ref += vals[rptr[r] + k] * xv[cols[rptr[r] + k]];
      end
      checks++;
      if (y !== y_ref) begin
        failures++;
        if (failures < 10) $display("spmv row %0d: %0d vs %0d", r, y, y_ref);
      end else n_spmv_ok++;
    end
    $display("spmv %0d rows, %0d padded entries: %0d rows right", Rows, vals.size(), n_spmv_ok);
    $display("bursts: AR base %0d strided %0d indirect %0d; AW base %0d strided %0d indirect %0d",
             n_kind_r[0], n_kind_r[1], n_kind_r[2], n_kind_w[0], n_kind_w[1], n_kind_w[2]);
    checks += 3;
    if (n_kind_r[1] == 0 || n_kind_w[1] == 0) failures++;
    if (n_kind_r[2] == 0) failures++;
    if (n_conflict == 0) failures++;
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
