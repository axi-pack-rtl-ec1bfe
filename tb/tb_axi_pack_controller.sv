// tb_axi_pack_controller: end-to-end test of the banked AXI-Pack controller
// (adapter, crossbar and 17 SRAM banks). The test region is first written
// with plain AXI4 bursts, then exercised with plain, strided and indirect
// reads and writes of several element and index sizes; all R data and the
// final memory contents are checked against a reference memory kept here.
// It counts how often each mechanism occurred (each converter, bank
// conflicts, request-regulator stalls, two converters active at once) and
// fails if one never did.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_axi_pack_controller;
  import axi_pack_pkg::*;
  localparam int unsigned ShadowWords = 8192;   // 32 KiB test region

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  ax_t  ar, aw;
  r_t   r;
  w_t   w;
  b_t   b;
  logic [16:0] conflict;
  logic [NumPorts-1:0] stall;
  int checks = 0, failures = 0;
  word_t shadow [ShadowWords];

  axi_pack_controller dut (
    .clk_i (clk), .rst_ni (rst_n),
    .ar_valid_i (ar_valid), .ar_ready_o (ar_ready), .ar_i (ar),
    .r_valid_o (r_valid), .r_ready_i (r_ready), .r_o (r),
    .aw_valid_i (aw_valid), .aw_ready_o (aw_ready), .aw_i (aw),
    .w_valid_i (w_valid), .w_ready_o (w_ready), .w_i (w),
    .b_valid_o (b_valid), .b_ready_i (b_ready), .b_o (b),
    .bank_conflict_o (conflict), .regu_stall_o (stall)
  );

  `include "tb_axi_tasks.svh"

  // mechanism counters
  int n_conflict = 0, n_stall = 0, n_overlap = 0;
  int n_ar [3] = '{0, 0, 0};
  int n_aw [3] = '{0, 0, 0};
  always @(posedge clk) begin
    if (|conflict) n_conflict++;
    if (|stall) n_stall++;
    if ((|dut.i_adapter.cv_valid[1]) && (|dut.i_adapter.cv_valid[2])) n_overlap++;
    for (int k = 0; k < 3; k++) begin
      if (dut.i_adapter.ar_v[k] && dut.i_adapter.ar_r[k]) n_ar[k]++;
      if (dut.i_adapter.aw_v[k] && dut.i_adapter.aw_r[k]) n_aw[k]++;
    end
  end

  // distinct random indices for the indirect tests
  task automatic put_indices(int unsigned ia, int isz, int n, int unsigned span);
    int unsigned perm [$];
    for (int j = 0; j < span; j++) perm.push_back(j);
    perm.shuffle();
    for (int j = 0; j < n; j++) begin
      int unsigned ba;
      ba = ia + (j << isz);
      case (isz)
        0: shadow[ba >> 2][(ba % 4) * 8 +: 8] = perm[j][7:0];
        1: shadow[ba >> 2][(ba % 4) * 8 +: 16] = perm[j][15:0];
        default: shadow[ba >> 2] = perm[j];
      endcase
    end
    // write the index array into the memory with plain bursts (whole lines)
    for (int l = 0; l < ((n << isz) + 31) / 32; l++) begin
      ax_t a;
      w_t x;
      a = mk_ax(0, ia + l * 32, 0, 5, BURST_INCR, '0);
      for (int i = 0; i < NumPorts; i++) x.data[i*32 +: 32] = shadow[((ia + l * 32) >> 2) + i];
      x.strb = '1; x.last = 1;
      @(negedge clk); aw = a; aw_valid = 1; w = x; w_valid = 1;
      fork
        begin do @(posedge clk); while (!aw_ready); @(negedge clk); aw_valid = 0; end
        begin do @(posedge clk); while (!w_ready);  @(negedge clk); w_valid = 0; end
      join
      @(negedge clk); b_ready = 1;
      do @(posedge clk); while (!b_valid);
      @(negedge clk); b_ready = 0;
    end
  endtask

  initial begin
    ar_valid = 0; aw_valid = 0; w_valid = 0; r_ready = 0; b_ready = 0; ar = '0; aw = '0; w = '0;
    for (int q = 0; q < ShadowWords; q++) shadow[q] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise the region with plain 256-beat bursts
    for (int q = 0; q < ShadowWords / (256 * 8); q++)
      axi_write(mk_ax(q, q * 8192, 255, 5, BURST_INCR, '0), 0);
    // plain reads, narrow read, partial write
    axi_read (mk_ax(1, 32'h0040, 15, 5, BURST_INCR, '0), 10);
    axi_read (mk_ax(2, 32'h0106, 9, 2, BURST_INCR, '0), 0);
    axi_write(mk_ax(3, 32'h0200, 3, 5, BURST_INCR, '0), 1);
    axi_read (mk_ax(4, 32'h0200, 3, 5, BURST_INCR, '0), 0);
    // strided reads: strides 0 .. 20, 32-bit elements, and larger elements
    for (int s = 0; s <= 20; s++)
      axi_read(mk_ax(s, 32'h1000 + 4 * s, 7, 2, BURST_INCR, make_strided_user(s)), 0);
    axi_read(mk_ax(5, 32'h1000, 31, 2, BURST_INCR, make_strided_user(16)), 60);
    axi_read(mk_ax(6, 32'h0800, 5, 3, BURST_INCR, make_strided_user(3)), 0);
    axi_read(mk_ax(7, 32'h0800, 5, 4, BURST_INCR, make_strided_user(2)), 0);
    // strided writes, then read back with plain and strided reads
    axi_write(mk_ax(8, 32'h3000, 7, 2, BURST_INCR, make_strided_user(3)), 0);
    axi_write(mk_ax(9, 32'h3800, 3, 3, BURST_INCR, make_strided_user(5)), 1);
    axi_read (mk_ax(10, 32'h3000, 23, 5, BURST_INCR, '0), 0);
    axi_read (mk_ax(11, 32'h3000, 7, 2, BURST_INCR, make_strided_user(3)), 0);
    // a strided read and a strided write in flight together
    fork
      axi_read (mk_ax(12, 32'h0000, 31, 2, BURST_INCR, make_strided_user(2)), 0);
      axi_write(mk_ax(13, 32'h5000, 31, 2, BURST_INCR, make_strided_user(2)), 0);
    join
    // indirect reads with 8/16/32-bit indices
    for (int isz = 0; isz <= 2; isz++) begin
      put_indices(32'h6000 + isz * 32'h200, isz, 64, 1024);
      axi_read(mk_ax(14 + isz, 32'h6000 + isz * 32'h200, 7, 2, BURST_INCR,
                     make_indir_user(4'(isz), 32'h0)), 10);
    end
    put_indices(32'h6800, 2, 32, 512);
    axi_read(mk_ax(1, 32'h6800, 7, 3, BURST_INCR, make_indir_user(4'd2, 32'h1000)), 0);
    // indirect write, read back
    put_indices(32'h6C00, 1, 64, 256);
    axi_write(mk_ax(2, 32'h6C00, 7, 2, BURST_INCR, make_indir_user(4'd1, 32'h4000)), 0);
    axi_read (mk_ax(3, 32'h4000, 31, 5, BURST_INCR, '0), 0);
    axi_read (mk_ax(4, 32'h6C00, 7, 2, BURST_INCR, make_indir_user(4'd1, 32'h4000)), 0);
    // mechanism coverage
    $display("base AR %0d AW %0d, strided AR %0d AW %0d, indirect AR %0d AW %0d",
             n_ar[0], n_aw[0], n_ar[1], n_aw[1], n_ar[2], n_aw[2]);
    $display("bank-conflict cycles %0d, regulator-stall cycles %0d, strided R/W overlap cycles %0d",
             n_conflict, n_stall, n_overlap);
    for (int k = 0; k < 3; k++) begin
      checks += 2;
      if (n_ar[k] == 0) failures++;
      if (n_aw[k] == 0) failures++;
    end
    checks += 3;
    if (n_conflict == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_overlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
