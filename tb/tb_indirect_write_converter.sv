// tb_indirect_write_converter: self-checking test of the indirect write
// converter. Writes random data through packed indirect bursts (8, 16 and
// 32-bit indices; 32 and 64-bit elements; full and partial strobes) to a
// memory with random stalls. Indices are distinct, so the result does not
// depend on the order of the word writes. A shadow memory is updated here from
// base + (index << size); after each B the memory is compared with it.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_indirect_write_converter;
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

  indirect_write_converter dut (
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

  function automatic void put_index(int unsigned ia, int isz, int j, int unsigned v);
    int unsigned ba;
    ba = ia + (j << isz);
    case (isz)
      0: begin mem.mem[(ba >> 2)][(ba % 4) * 8 +: 8] = v[7:0];  shadow[(ba >> 2)][(ba % 4) * 8 +: 8] = v[7:0]; end
      1: begin mem.mem[(ba >> 2)][(ba % 4) * 8 +: 16] = v[15:0]; shadow[(ba >> 2)][(ba % 4) * 8 +: 16] = v[15:0]; end
      default: begin mem.mem[ba >> 2] = v; shadow[ba >> 2] = v; end
    endcase
  endfunction

  task automatic run_burst(ax_t a, bit partial);
    w_t beats [$];
    int k, e, isz, n;
    int unsigned base, perm [$];
    k = 1 << (a.size - 2);
    e = NumPorts / k;
    isz = a.user[5:2];
    base = a.user[30:6];
    n = (a.len + 1) * e;
    for (int j = 0; j < 200; j++) perm.push_back(j);
    perm.shuffle();
    for (int j = 0; j < n; j++) put_index(a.addr, isz, j, perm[j]);
    for (int bt = 0; bt <= a.len; bt++) begin
      w_t x;
      for (int i = 0; i < NumPorts; i++) x.data[i*32 +: 32] = $urandom;
      x.strb = partial ? strb_t'({$urandom, $urandom}) : '1;
      x.last = (bt == a.len);
      beats.push_back(x);
      for (int i = 0; i < NumPorts; i++) begin
        int unsigned wa;
        wa = ((base + (perm[bt * e + i / k] << a.size) + (i % k) * 4) >> 2) % 16384;
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
        foreach (beats[q]) begin
          @(negedge clk); w = beats[q]; w_valid = 1;
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
    for (int q = 0; q < 16384; q++) begin
      checks++;
      if (mem.mem[q] !== shadow[q]) begin
        failures++;
        if (failures < 10) $display("MISMATCH word %0d: %h vs %h", q, mem.mem[q], shadow[q]);
      end
    end
    checks++;
  endtask

  initial begin
    ax_t a;
    aw_valid = 0; w_valid = 0; b_ready = 0; aw = '0; w = '0;
    for (int q = 0; q < 16384; q++) shadow[q] = mem.init_word(q);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int isz = 0; isz <= 2; isz++) begin
      for (int sz = 2; sz <= 3; sz++) begin
        a = '0; a.id = 4'(isz * 2 + sz); a.addr = 32'h8000 + 32'h200 * isz; a.len = 8'(2 + isz);
        a.size = 3'(sz); a.burst = BURST_INCR; a.user = make_indir_user(4'(isz), 32'h1000);
        run_burst(a, sz == 3);
      end
    end
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
