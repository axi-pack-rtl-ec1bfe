// tb_sram_bank: checks the SRAM bank model: one-cycle read latency, byte
// strobes, read-during-write returning the old word, and hold of the read
// data while no request is made. Reference values are kept in a local array.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_sram_bank;
  import axi_pack_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req, we;
  logic [5:0] addr;
  word_t wdata, rdata;
  wstrb_t strb;
  int checks = 0, failures = 0;
  word_t ref_mem [64];

  sram_bank #(.Rows(64)) dut (
    .clk_i (clk), .req_i (req), .we_i (we), .addr_i (addr), .wdata_i (wdata), .strb_i (strb),
    .rdata_o (rdata)
  );

  task automatic access(bit w, int a, word_t d, wstrb_t s, bit chk = 1);
    word_t old;
    @(negedge clk); req = 1; we = w; addr = 6'(a); wdata = d; strb = s;
    old = ref_mem[a];
    if (w) for (int b = 0; b < 4; b++) if (s[b]) ref_mem[a][b*8 +: 8] = d[b*8 +: 8];
    @(posedge clk); #1;
    if (chk) checks++;
    if (chk && rdata !== old) begin failures++; $display("addr %0d: got %h exp %h", a, rdata, old); end
    @(negedge clk); req = 0;
  endtask

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; strb = 0;
    for (int a = 0; a < 64; a++) access(1, a, word_t'(a * 32'h01010101), 4'hF, 0);
    for (int k = 0; k < 300; k++) access($urandom % 2, $urandom % 64, $urandom, 4'($urandom));
    // data must hold while idle
    access(0, 5, 0, 0);
    repeat (3) @(posedge clk);
    checks++;
    if (rdata !== ref_mem[5]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
