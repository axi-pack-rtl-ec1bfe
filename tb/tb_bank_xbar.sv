// tb_bank_xbar: checks the n x m bank crossbar with 17 real SRAM banks.
// Eight ports issue random reads and writes, held until granted. Because the
// banks are reached only through the crossbar, data read back matches a flat
// reference memory only if the bank (word mod 17) and row (word / 17) mapping
// and the response steering are right. Also checks that each bank takes at
// most one request per cycle, that conflicts occur and that a port with a
// request is served within a bounded time (round robin).
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_bank_xbar;
  import axi_pack_pkg::*;
  localparam int unsigned NB = 17, ROWS = 64, WORDS = NB * ROWS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [NumPorts-1:0] pv, pr, rv;
  word_req_t [NumPorts-1:0] preq;
  word_t     [NumPorts-1:0] rdata;
  logic   [NB-1:0] breq, bwe, conflict;
  logic   [$clog2(ROWS)-1:0] baddr [NB];
  word_t  [NB-1:0] bwdata, brdata;
  wstrb_t [NB-1:0] bstrb;

  bank_xbar #(.NumBanks(NB), .BankRows(ROWS)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .port_valid_i (pv), .port_ready_o (pr), .port_req_i (preq),
    .port_rsp_valid_o (rv), .port_rsp_data_o (rdata),
    .bank_req_o (breq), .bank_we_o (bwe), .bank_addr_o (baddr), .bank_wdata_o (bwdata),
    .bank_strb_o (bstrb), .bank_rdata_i (brdata), .conflict_o (conflict)
  );
  for (genvar b = 0; b < NB; b++) begin : g_b
    sram_bank #(.Rows(ROWS)) i_bank (
      .clk_i (clk), .req_i (breq[b]), .we_i (bwe[b]), .addr_i (baddr[b]),
      .wdata_i (bwdata[b]), .strb_i (bstrb[b]), .rdata_o (brdata[b]));
  end

  int checks = 0, failures = 0, n_conf = 0, phase = 0;
  word_t ref_mem [WORDS];
  bit    exp_v [NumPorts];
  word_t exp_d [NumPorts];
  int unsigned exp_w [NumPorts];
  int    wait_cnt [NumPorts];

  always @(posedge clk) if (rst_n) begin
    // response check for grants of the previous cycle
    for (int p = 0; p < NumPorts; p++) begin
      if (rv[p] !== exp_v[p]) begin failures++; $display("port %0d rsp_valid wrong", p); end
      else if (exp_v[p] && phase == 1) begin
        checks++;
        if (rdata[p] !== exp_d[p]) begin
          failures++;
          if (failures < 10) $display("port %0d word %0d got %h exp %h t=%0t", p, exp_w[p], rdata[p], exp_d[p], $time);
        end
      end
    end
    if (|conflict) n_conf++;
    for (int p = 0; p < NumPorts; p++) begin
      int unsigned w;
      w = (preq[p].addr >> 2) % WORDS;  // rows wrap, as in the banks
      exp_v[p] = pv[p] && pr[p];
      exp_d[p] = ref_mem[w];
      exp_w[p] = w;
      if (pv[p] && pr[p] && preq[p].we)
        for (int by = 0; by < 4; by++) if (preq[p].strb[by]) ref_mem[w][by*8 +: 8] = preq[p].wdata[by*8 +: 8];
      wait_cnt[p] = (pv[p] && !pr[p]) ? wait_cnt[p] + 1 : 0;
      if (wait_cnt[p] > NumPorts + 1) begin failures++; $display("port %0d starved", p); end
    end
    // a bank takes at most one request per cycle
    for (int b = 0; b < NB; b++) begin
      int g;
      g = 0;
      for (int p = 0; p < NumPorts; p++) if (pv[p] && pr[p] && (preq[p].addr >> 2) % NB == b) g++;
      checks++;
      if (g > 1) begin failures++; if (failures < 5) $display("bank %0d granted %0d times", b, g); end
    end
  end

  // drive: new request when the old one was granted
  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < NumPorts; p++) begin
      if (!pv[p] || pr[p]) begin
        pv[p] <= (phase == 0) ? (init_ptr[p] < WORDS / NumPorts) : (($urandom % 4) != 0);
        if (phase == 0) begin
          preq[p] <= '{addr: 32'((init_ptr[p] * NumPorts + p) % WORDS) << 2, we: 1'b1, wdata: $urandom, strb: 4'hF};
          init_ptr[p] <= init_ptr[p] + 1;
        end else begin
          preq[p] <= '{addr: 32'($urandom % WORDS) << 2, we: 1'($urandom % 2), wdata: $urandom,
                       strb: 4'($urandom)};
        end
      end
    end
  end

  int init_ptr [NumPorts];

  initial begin
    pv = '0; preq = '0;
    for (int p = 0; p < NumPorts; p++) begin exp_v[p] = 0; wait_cnt[p] = 0; init_ptr[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 0 writes every word once (initialisation, not checked)
    repeat (WORDS) @(posedge clk);
    @(negedge clk); phase = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (n_conf == 0) begin failures++; $display("no bank conflict seen"); end
    $display("conflict cycles %0d", n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
