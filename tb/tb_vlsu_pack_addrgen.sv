// tb_vlsu_pack_addrgen: checks the vector load-store address generator.
//
// Random unit-stride, strided and indexed loads and stores are issued. A
// reference model in this bench, written from the burst rules (not from the
// design's code), predicts every AR/AW burst: address, len, size, burst type,
// user bits and ID. Unit-stride bursts are split at 4 KiB and carry full
// 256-bit beats; packed bursts carry 32 / element-bytes elements per beat and
// at most 256 beats. The AR/AW ready lines are stalled at random. It also
// checks that no burst appears on the wrong channel, that a unit-stride burst
// never crosses a 4 KiB page, and that zero-length instructions emit nothing.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_vlsu_pack_addrgen;
  import axi_pack_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     op_valid, op_ready, ar_valid, ar_ready, aw_valid, aw_ready, busy;
  vmem_op_t op;
  ax_t      ar, aw;

  vlsu_pack_addrgen dut (
    .clk_i (clk), .rst_ni (rst_n), .op_valid_i (op_valid), .op_ready_o (op_ready), .op_i (op),
    .ar_valid_o (ar_valid), .ar_ready_i (ar_ready), .ar_o (ar),
    .aw_valid_o (aw_valid), .aw_ready_i (aw_ready), .aw_o (aw), .busy_o (busy)
  );

  int checks = 0, failures = 0, n_split4k = 0, n_split256 = 0;
  ax_t exp_q [$];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  // reference model: list of bursts for one instruction
  task automatic model(vmem_op_t o);
    longint unsigned a, left, bytes_left, beats, covr;
    int esz, epb;
    ax_t x;
    a = (o.mode == VMEM_INDIR) ? o.rs2 : o.rs1;
    left = o.vl;
    esz = (o.eew < 2) ? 2 : o.eew;
    epb = 32 >> esz;
    while (left > 0) begin
      x = '0;
      x.id = o.id; x.burst = BURST_INCR; x.addr = 32'(a);
      if (o.mode == VMEM_UNIT) begin
        bytes_left = left << o.eew;
        beats = ((a % 32) + bytes_left + 31) / 32;
        if (beats > 128 - ((a % 4096) / 32)) begin beats = 128 - ((a % 4096) / 32); n_split4k++; end
        covr = (beats * 32 - (a % 32)) >> o.eew;
        x.size = 3'd5; x.user = '0;
      end else begin
        beats = (left + epb - 1) / epb;
        if (beats > 256) begin beats = 256; n_split256++; end
        covr = beats * epb;
        x.size = 3'(esz);
        if (o.mode == VMEM_STRIDED) x.user = {o.rs2[28 + esz -: 29], 1'b0, 1'b1};
        else                        x.user = {o.rs1[24:0], 2'b00, o.idx_eew, 1'b1, 1'b1};
      end
      if (covr > left) covr = left;
      x.len = 8'(beats - 1);
      exp_q.push_back(x);
      left -= covr;
      if (o.mode == VMEM_UNIT)         a += covr << o.eew;
      else if (o.mode == VMEM_STRIDED) a += covr * o.rs2;
      else                             a += covr << o.idx_eew;
      a = a % (64'd1 << 32);
    end
  endtask

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (ar_valid && ar_ready || aw_valid && aw_ready) begin
      ax_t got, e;
      got = ar_valid ? ar : aw;
      check(!(ar_valid && aw_valid), "AR and AW valid together");
      check(exp_q.size() > 0, "unexpected burst");
      if (exp_q.size() > 0) begin
        e = exp_q.pop_front();
        checks++;
        if (got !== e) begin
          failures++;
          if (failures < 10)
            $display("FAIL burst: got addr %h len %0d size %0d user %h, exp addr %h len %0d size %0d user %h",
                     got.addr, got.len, got.size, got.user, e.addr, e.len, e.size, e.user);
        end
      end
      if (got.size == 3'd5)
        check((got.addr % 4096) / 32 + got.len + 1 <= 128, "unit burst crosses 4 KiB");
    end
  end

  logic is_store;
  always @(negedge clk) begin
    ar_ready <= ($urandom % 4) != 0;
    aw_ready <= ($urandom % 4) != 0;
  end

  task automatic issue(vmem_op_t o);
    model(o);
    is_store = o.store;
    @(negedge clk);
    op = o; op_valid = 1;
    @(posedge clk);
    while (!op_ready) @(posedge clk);
    @(negedge clk); op_valid = 0;
    // the op must appear on the right channel only
    while (busy) begin
      check(!(o.store ? ar_valid : aw_valid), "burst on wrong channel");
      @(negedge clk);
    end
    check(exp_q.size() == 0, "missing bursts");
    exp_q.delete();
  endtask

  initial begin
    vmem_op_t o;
    op_valid = 0; op = '0; ar_ready = 0; aw_ready = 0; is_store = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: unit-stride crossing a page, long strided, indexed, vl = 0
    o = '0; o.mode = VMEM_UNIT; o.rs1 = 32'h0000_0F84; o.eew = 2; o.vl = 100; o.id = 4'd3;
    issue(o);
    o = '0; o.mode = VMEM_STRIDED; o.rs1 = 32'h100; o.rs2 = 32'd12; o.eew = 2; o.vl = 3000; o.store = 1;
    issue(o);
    o = '0; o.mode = VMEM_INDIR; o.rs1 = 32'h8000; o.rs2 = 32'h200; o.eew = 3; o.idx_eew = 1; o.vl = 77;
    issue(o);
    o = '0; o.mode = VMEM_UNIT; o.vl = 0;
    issue(o);
    check(!busy, "busy after vl = 0");
    // random
    for (int t = 0; t < 400; t++) begin
      o = '0;
      o.store = 1'($urandom);
      o.mode  = vmem_mode_e'($urandom % 3);
      o.eew   = 2'($urandom);
      o.idx_eew = 2'($urandom % 3);
      o.rs1   = ($urandom % (1 << 20)) & ~((32'd1 << o.eew) - 1);
      o.rs2   = (o.mode == VMEM_STRIDED) ? (($urandom % 256) << ((o.eew < 2) ? 2 : o.eew))
                                         : (($urandom % (1 << 20)) & ~32'h1F);
      o.vl    = 16'(($urandom % 4 == 0) ? $urandom % 5000 : $urandom % 300);
      o.id    = 4'($urandom);
      issue(o);
    end
    check(n_split4k > 0, "no 4 KiB split exercised");
    check(n_split256 > 0, "no 256-beat split exercised");
    $display("4 KiB splits %0d, 256-beat splits %0d", n_split4k, n_split256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
