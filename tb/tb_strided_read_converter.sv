// tb_strided_read_converter: self-checking test of the strided read converter.
// Issues packed strided bursts with different element sizes, strides
// (including 0) and lengths, plus plain INCR and FIXED bursts, against a
// memory with random stalls and a randomly stalling R channel. Every R word
// is compared with the value the memory holds at the address computed here
// from the AXI-Pack rules. A stall-free, R-ready run checks the rate of one
// beat per cycle after the first.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_strided_read_converter;
  import axi_pack_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ar_valid, ar_ready, r_valid, r_ready;
  ax_t  ar;
  r_t   r;
  logic      [NumPorts-1:0] mreq_valid, mreq_ready, mrsp_valid, stall;
  word_req_t [NumPorts-1:0] mreq;
  word_t     [NumPorts-1:0] mrsp_data;

  strided_read_converter dut (
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

  int checks = 0, failures = 0, rstall_pct = 30, stalls = 0;

  always @(posedge clk) if (|stall) stalls++;

  function automatic word_t expect_word(ax_t a, int b, int i);
    int unsigned addr, k, e, j;
    if (a.user[0]) begin
      k = (1 << (a.size - 2));
      e = NumPorts / k;
      j = b * e + i / k;
      addr = a.addr + j * (a.user[30:2] << a.size) + (i % k) * 4;
    end else begin
      int unsigned ba;
      ba = (a.burst == BURST_FIXED || b == 0) ? a.addr
         : ((a.addr >> a.size) << a.size) + b * (1 << a.size);
      addr = ((ba >> 5) << 5) + i * 4;
    end
    return mem.init_word((addr >> 2) % 16384);
  endfunction

  task automatic run_burst(ax_t a, output int cycles);
    int b = 0, t0;
    @(negedge clk);
    ar = a; ar_valid = 1;
    t0 = $time / 10;
    do @(posedge clk); while (!ar_ready);
    @(negedge clk); ar_valid = 0;
    while (1) begin
      @(negedge clk);
      r_ready = (($urandom % 100) >= rstall_pct);
      @(posedge clk);
      if (r_valid && r_ready) begin
        for (int i = 0; i < NumPorts; i++) begin
          checks++;
          if (r.data[i*32 +: 32] !== expect_word(a, b, i)) begin
            failures++;
            if (failures < 10) $display("MISMATCH beat %0d lane %0d: got %h exp %h", b, i,
                                        r.data[i*32 +: 32], expect_word(a, b, i));
          end
        end
        checks++;
        if (r.last !== (b == a.len) || r.id !== a.id) failures++;
        if (r.last) break;
        b++;
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
    // packed strided bursts: 32-bit elements, several strides
    for (int s = 0; s < 6; s++) begin
      int strides [6] = '{0, 1, 3, 7, 17, 64};
      a = '0; a.id = 4'(s); a.addr = 32'h100 + 4 * s; a.len = 8'(3 + s); a.size = 2;
      a.burst = BURST_INCR; a.user = make_strided_user(strides[s]);
      run_burst(a, cyc);
    end
    // larger elements: 64- and 128-bit
    for (int sz = 3; sz <= 4; sz++) begin
      a = '0; a.id = 4'(sz); a.addr = 32'h800; a.len = 5; a.size = 3'(sz);
      a.burst = BURST_INCR; a.user = make_strided_user(5);
      run_burst(a, cyc);
    end
    // plain AXI4 INCR full width, narrow INCR, FIXED
    a = '0; a.addr = 32'h2000; a.len = 7; a.size = 5; a.burst = BURST_INCR; run_burst(a, cyc);
    a = '0; a.addr = 32'h2006; a.len = 9; a.size = 2; a.burst = BURST_INCR; run_burst(a, cyc);
    a = '0; a.addr = 32'h3000; a.len = 3; a.size = 5; a.burst = BURST_FIXED; run_burst(a, cyc);
    // rate: no stalls anywhere, 64 beats of stride 3 must take at most 64 + 4 cycles
    mem.stall_pct = 0; rstall_pct = 0;
    a = '0; a.addr = 32'h40; a.len = 63; a.size = 2; a.burst = BURST_INCR; a.user = make_strided_user(3);
    run_burst(a, cyc);
    checks++;
    if (cyc > 68) begin failures++; $display("rate: 64 beats took %0d cycles", cyc); end
    // regulator: R held back, requests must stall on full queues
    mem.stall_pct = 0; rstall_pct = 90;
    a.len = 31; run_burst(a, cyc);
    checks++;
    if (stalls == 0) begin failures++; $display("request regulator never stalled"); end
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
