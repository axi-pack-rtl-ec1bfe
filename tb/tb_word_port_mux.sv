// tb_word_port_mux: checks the per-lane round-robin word port multiplexer
// (default five inputs, as the adapter's bank port mux).
//
// Each input drives random requests on random lanes and holds them until
// granted. The output side accepts at random and answers every accepted
// request exactly one cycle later with data derived from the address. The
// bench checks that at most one input is granted per lane, that the forwarded
// request is the granted one, that the response returns to the input that
// issued the request (and to no other) with the right data, and that a
// waiting input is served within NumIn accepted grants (round robin).
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_word_port_mux;
  import axi_pack_pkg::*;
  localparam int unsigned NI = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [NumPorts-1:0] iv [NI], ir [NI], irv [NI];
  word_req_t [NumPorts-1:0] ireq [NI];
  word_t     [NumPorts-1:0] ird [NI];
  logic      [NumPorts-1:0] ov, ordy, orv;
  word_req_t [NumPorts-1:0] oreq;
  word_t     [NumPorts-1:0] ord;

  word_port_mux dut (
    .clk_i (clk), .rst_ni (rst_n),
    .in_valid_i (iv), .in_ready_o (ir), .in_req_i (ireq),
    .in_rsp_valid_o (irv), .in_rsp_data_o (ird),
    .out_valid_o (ov), .out_ready_i (ordy), .out_req_o (oreq),
    .out_rsp_valid_i (orv), .out_rsp_data_i (ord)
  );

  function automatic word_t f(addr_t a);
    return a ^ 32'h5A5A_0000;
  endfunction

  int checks = 0, failures = 0, grants = 0;
  bit    exp_v [NI][NumPorts];
  word_t exp_d [NI][NumPorts];
  int    waitc [NI][NumPorts];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s t=%0t", msg, $time);
    end
  endtask

  // output side: respond one cycle after acceptance
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      orv <= '0;
      ord <= '0;
    end else begin
      for (int l = 0; l < NumPorts; l++) begin
        orv[l] <= ov[l] && ordy[l];
        ord[l] <= f(oreq[l].addr);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NumPorts; l++) begin
      int ng;
      ng = 0;
      for (int k = 0; k < NI; k++) begin
        // response of the previous cycle's grant
        check(irv[k][l] === exp_v[k][l], "response valid routing");
        if (exp_v[k][l]) check(ird[k][l] === exp_d[k][l], "response data");
        exp_v[k][l] = iv[k][l] && ir[k][l];
        exp_d[k][l] = f(ireq[k][l].addr);
        if (iv[k][l] && ir[k][l]) begin
          ng++;
          grants++;
          check(oreq[l] === ireq[k][l], "forwarded request differs");
        end
        if (iv[k][l] && !ir[k][l] && ordy[l]) waitc[k][l]++;
        else if (ir[k][l] || !iv[k][l]) waitc[k][l] = 0;
        check(waitc[k][l] < NI, "input starved");
      end
      check(ng <= 1, "two grants on one lane");
      check(ng == int'(ov[l] && ordy[l]), "grant without output handshake");
    end
  end

  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < NI; k++)
      for (int l = 0; l < NumPorts; l++)
        if (!iv[k][l] || ir[k][l]) begin
          iv[k][l] <= ($urandom % 3) != 0;
          ireq[k][l] <= '{addr: $urandom, we: 1'($urandom), wdata: $urandom, strb: 4'($urandom)};
        end
    for (int l = 0; l < NumPorts; l++) ordy[l] <= ($urandom % 4) != 0;
  end

  initial begin
    for (int k = 0; k < NI; k++) begin
      iv[k] = '0; ireq[k] = '0;
      for (int l = 0; l < NumPorts; l++) begin exp_v[k][l] = 0; exp_d[k][l] = '0; waitc[k][l] = 0; end
    end
    ordy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    check(grants > 1000, "too few grants");
    $display("grants %0d", grants);
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
