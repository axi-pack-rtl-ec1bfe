// tb_indirect_read_converter: self-checking test of the indirect read
// converter. Places random index arrays (8, 16 and 32-bit indices) in the
// memory, issues packed indirect bursts with 32, 64 and 128-bit elements and
// checks every R word against the memory word at
// base + (index << size) + 4 * (word within element), computed here.
// Memory and R channel stall randomly; a stall-free run checks the bound of
// one index line per r data beats (r = element size / index size).
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_indirect_read_converter;
  import axi_pack_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ar_valid, ar_ready, r_valid, r_ready;
  ax_t  ar;
  r_t   r;
  logic      [NumPorts-1:0] mreq_valid, mreq_ready, mrsp_valid, stall;
  word_req_t [NumPorts-1:0] mreq;
  word_t     [NumPorts-1:0] mrsp_data;

  indirect_read_converter dut (
    .clk_i (clk), .rst_ni (rst_n),
    .ar_valid_i (ar_valid), .ar_ready_o (ar_ready), .ar_i (ar),
    .r_valid_o (r_valid), .r_ready_i (r_ready), .r_o (r),
    .mem_req_valid_o (mreq_valid), .mem_req_ready_i (mreq_ready), .mem_req_o (mreq),
    .mem_rsp_valid_i (mrsp_valid), .mem_rsp_data_i (mrsp_data), .regu_stall_o (stall)
  );

  tb_word_mem #(.StallPct(30)) mem (
    .clk_i (clk), .req_valid_i (mreq_valid), .req_ready_o (mreq_ready), .req_i (mreq),
    .rsp_valid_o (mrsp_valid), .rsp_data_o (mrsp_data)
  );

  int checks = 0, failures = 0, rstall_pct = 30;

  // read index number j of the array at byte address ia with 2^isz-byte indices
  function automatic int unsigned get_index(int unsigned ia, int isz, int j);
    int unsigned ba;
    word_t wd;
    ba = ia + (j << isz);
    wd = mem.mem[(ba >> 2) % 16384];
    case (isz)
      0: return wd[(ba % 4) * 8 +: 8];
      1: return wd[(ba % 4) * 8 +: 16];
      default: return wd;
    endcase
  endfunction

  task automatic fill_indices(int unsigned ia, int isz, int n, int unsigned maxidx);
    for (int j = 0; j < n; j++) begin
      int unsigned ba, v;
      ba = ia + (j << isz);
      v = $urandom % maxidx;
      case (isz)
        0: mem.mem[(ba >> 2) % 16384][(ba % 4) * 8 +: 8] = v[7:0];
        1: mem.mem[(ba >> 2) % 16384][(ba % 4) * 8 +: 16] = v[15:0];
        default: mem.mem[(ba >> 2) % 16384] = v;
      endcase
    end
  endtask

  task automatic run_burst(ax_t a, output int cycles);
    int bt = 0, t0, k, e, isz;
    int unsigned base;
    k = 1 << (a.size - 2);
    e = NumPorts / k;
    isz = a.user[5:2];
    base = a.user[30:6];
    @(negedge clk); ar = a; ar_valid = 1;
    t0 = $time / 10;
    do @(posedge clk); while (!ar_ready);
    @(negedge clk); ar_valid = 0;
    while (1) begin
      @(negedge clk);
      r_ready = (($urandom % 100) >= rstall_pct);
      @(posedge clk);
      if (r_valid && r_ready) begin
        for (int i = 0; i < NumPorts; i++) begin
          int unsigned idx, ea;
          word_t exp;
          idx = get_index(a.addr, isz, bt * e + i / k);
          ea  = base + (idx << a.size) + (i % k) * 4;
          exp = mem.mem[(ea >> 2) % 16384];
          checks++;
          if (r.data[i*32 +: 32] !== exp) begin
            failures++;
            if (failures < 10) $display("MISMATCH beat %0d lane %0d idx %0d: got %h exp %h",
                                        bt, i, idx, r.data[i*32 +: 32], exp);
          end
        end
        checks++;
        if (r.last !== (bt == a.len) || r.id !== a.id) failures++;
        if (r.last) break;
        bt++;
      end
    end
    cycles = $time / 10 - t0;
  endtask

  initial begin
    ax_t a;
    int cyc;
    ar_valid = 0; r_ready = 0; ar = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int isz = 0; isz <= 2; isz++) begin
      for (int sz = 2; sz <= 4; sz++) begin
        int e, nb;
        e  = NumPorts >> (sz - 2);
        nb = 3 + isz + sz;
        a = '0; a.id = 4'(isz * 3 + sz); a.addr = 32'h8000 + 32'h400 * isz; a.len = 8'(nb - 1);
        a.size = 3'(sz); a.burst = BURST_INCR;
        a.user = make_indir_user(4'(isz), 32'h1000);
        fill_indices(a.addr, isz, nb * e, (isz == 0) ? 256 : 1024);
        run_burst(a, cyc);
      end
    end
    // rate without stalls: 32-bit elements and 32-bit indices, one index line
    // per data beat, so 32 beats need about 64 port cycles
    mem.stall_pct = 0; rstall_pct = 0;
    a = '0; a.id = 1; a.addr = 32'h9000; a.len = 31; a.size = 2; a.burst = BURST_INCR;
    a.user = make_indir_user(4'd2, 32'h2000);
    fill_indices(a.addr, 2, 32 * 8, 1024);
    run_burst(a, cyc);
    checks++;
    $display("32-beat indirect burst: %0d cycles", cyc);
    if (cyc > 32 * 2 + 24) begin failures++; $display("indirect rate too low"); end
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
