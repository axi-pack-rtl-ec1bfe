// tb_strided_write_converter: self-checking test of the strided write
// converter. Sends packed strided write bursts (32/64-bit elements, several
// strides), a plain INCR burst and a burst with partial strobes to a memory
// with random stalls. A shadow copy of the memory is updated here from the
// AXI-Pack rules; after each B response the whole memory is compared with it.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_strided_write_converter;
  import axi_pack_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  ax_t  aw;
  w_t   w;
  b_t   b;
  logic      [NumPorts-1:0] mreq_valid, mreq_ready, mrsp_valid;
  word_req_t [NumPorts-1:0] mreq;
  word_t     [NumPorts-1:0] mrsp_data;

  strided_write_converter dut (
    .clk_i (clk), .rst_ni (rst_n),
    .aw_valid_i (aw_valid), .aw_ready_o (aw_ready), .aw_i (aw),
    .w_valid_i (w_valid), .w_ready_o (w_ready), .w_i (w),
    .b_valid_o (b_valid), .b_ready_i (b_ready), .b_o (b),
    .mem_req_valid_o (mreq_valid), .mem_req_ready_i (mreq_ready), .mem_req_o (mreq),
    .mem_rsp_valid_i (mrsp_valid), .mem_rsp_data_i (mrsp_data)
  );

  tb_word_mem #(.StallPct(30)) mem (
    .clk_i (clk), .req_valid_i (mreq_valid), .req_ready_o (mreq_ready), .req_i (mreq),
    .rsp_valid_o (mrsp_valid), .rsp_data_o (mrsp_data)
  );

  int checks = 0, failures = 0;
  word_t shadow [16384];

  function automatic int unsigned lane_addr(ax_t a, int bt, int i);
    if (a.user[0]) begin
      int unsigned k, e, j;
      k = (1 << (a.size - 2));
      e = NumPorts / k;
      j = bt * e + i / k;
      return a.addr + j * (a.user[30:2] << a.size) + (i % k) * 4;
    end
    return ((a.addr >> 5) << 5) + bt * 32 + i * 4;
  endfunction

  task automatic run_burst(ax_t a, bit partial);
    w_t beats [$];
    for (int bt = 0; bt <= a.len; bt++) begin
      w_t x;
      for (int i = 0; i < NumPorts; i++) x.data[i*32 +: 32] = $urandom;
      x.strb = partial ? strb_t'({$urandom, $urandom}) : '1;
      x.last = (bt == a.len);
      beats.push_back(x);
      for (int i = 0; i < NumPorts; i++) begin
        int unsigned wa;
        wa = (lane_addr(a, bt, i) >> 2) % 16384;
        for (int by = 0; by < 4; by++)
          if (x.strb[i*4 + by]) shadow[wa][by*8 +: 8] = x.data[i*32 + by*8 +: 8];
      end
    end
    fork
      begin
        @(negedge clk); aw = a; aw_valid = 1;
        do @(posedge clk); while (!aw_ready);
        @(negedge clk); aw_valid = 0;
      end
      begin
        foreach (beats[k]) begin
          @(negedge clk); w = beats[k]; w_valid = ($urandom % 4) != 0;
          while (!w_valid) begin @(negedge clk); w_valid = 1; end
          do @(posedge clk); while (!w_ready);
          @(negedge clk); w_valid = 0;
        end
      end
    join
    b_ready = 1;
    do @(posedge clk); while (!b_valid);
    checks++;
    if (b.id !== a.id) failures++;
    @(negedge clk);
    repeat (2) @(posedge clk);
    for (int k = 0; k < 16384; k++) begin
      checks++;
      if (mem.mem[k] !== shadow[k]) begin
        failures++;
        if (failures < 10) $display("MISMATCH word %0d: %h vs %h", k, mem.mem[k], shadow[k]);
      end
    end
    checks++;
  endtask

  initial begin
    ax_t a;
    int strides [4] = '{1, 2, 9, 33};
    aw_valid = 0; w_valid = 0; b_ready = 0; aw = '0; w = '0;
    for (int k = 0; k < 16384; k++) shadow[k] = mem.init_word(k);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      a = '0; a.id = 4'(s); a.addr = 32'h400 + 64 * s; a.len = 8'(2 + s); a.size = 2;
      a.burst = BURST_INCR; a.user = make_strided_user(strides[s]);
      run_burst(a, 0);
    end
    a = '0; a.id = 5; a.addr = 32'h1000; a.len = 3; a.size = 3; a.burst = BURST_INCR;
    a.user = make_strided_user(3);
    run_burst(a, 0);
    a = '0; a.id = 6; a.addr = 32'h2000; a.len = 4; a.size = 5; a.burst = BURST_INCR;
    run_burst(a, 1);
    a = '0; a.id = 7; a.addr = 32'h3000; a.len = 5; a.size = 2; a.burst = BURST_INCR;
    a.user = make_strided_user(5);
    run_burst(a, 1);
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
