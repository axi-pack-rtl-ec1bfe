// tb_base_converter: self-checking test of the base AXI4 converter. Plain
// INCR, narrow/unaligned INCR, FIXED and partially strobed bursts are written
// and read back through a memory with random stalls; a read and a write burst
// to disjoint regions also run at the same time to exercise the shared ports.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_base_converter;
  import axi_pack_pkg::*;
  localparam int unsigned ShadowWords = 16384;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  ax_t  ar, aw;
  r_t   r;
  w_t   w;
  b_t   b;
  logic      [NumPorts-1:0] mreq_valid, mreq_ready, mrsp_valid;
  word_req_t [NumPorts-1:0] mreq;
  word_t     [NumPorts-1:0] mrsp_data;
  int checks = 0, failures = 0;
  word_t shadow [ShadowWords];

  base_converter dut (
    .clk_i (clk), .rst_ni (rst_n),
    .ar_valid_i (ar_valid), .ar_ready_o (ar_ready), .ar_i (ar),
    .r_valid_o (r_valid), .r_ready_i (r_ready), .r_o (r),
    .aw_valid_i (aw_valid), .aw_ready_o (aw_ready), .aw_i (aw),
    .w_valid_i (w_valid), .w_ready_o (w_ready), .w_i (w),
    .b_valid_o (b_valid), .b_ready_i (b_ready), .b_o (b),
    .mem_req_valid_o (mreq_valid), .mem_req_ready_i (mreq_ready), .mem_req_o (mreq),
    .mem_rsp_valid_i (mrsp_valid), .mem_rsp_data_i (mrsp_data)
  );

  tb_word_mem #(.StallPct(25)) mem (
    .clk_i (clk), .req_valid_i (mreq_valid), .req_ready_o (mreq_ready), .req_i (mreq),
    .rsp_valid_o (mrsp_valid), .rsp_data_o (mrsp_data)
  );

  `include "tb_axi_tasks.svh"

  int concurrent = 0;
  always @(posedge clk) if ((|dut.mx_valid[0]) && (|dut.mx_valid[1])) concurrent++;

  initial begin
    ar_valid = 0; aw_valid = 0; w_valid = 0; r_ready = 0; b_ready = 0; ar = '0; aw = '0; w = '0;
    for (int q = 0; q < ShadowWords; q++) shadow[q] = mem.init_word(q);
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_read (mk_ax(1, 32'h100, 7, 5, BURST_INCR, '0), 20);
    axi_write(mk_ax(2, 32'h200, 5, 5, BURST_INCR, '0), 0);
    axi_read (mk_ax(3, 32'h200, 5, 5, BURST_INCR, '0), 20);
    axi_write(mk_ax(4, 32'h400, 3, 5, BURST_INCR, '0), 1);
    axi_read (mk_ax(5, 32'h3F0, 5, 5, BURST_INCR, '0), 0);
    axi_read (mk_ax(6, 32'h60A, 11, 2, BURST_INCR, '0), 0);
    axi_read (mk_ax(7, 32'h700, 3, 5, BURST_FIXED, '0), 0);
    fork
      axi_read (mk_ax(8, 32'h1000, 31, 5, BURST_INCR, '0), 0);
      axi_write(mk_ax(9, 32'h2000, 31, 5, BURST_INCR, '0), 0);
    join
    axi_read (mk_ax(10, 32'h2000, 31, 5, BURST_INCR, '0), 0);
    checks++;
    if (concurrent == 0) begin failures++; $display("read and write never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
