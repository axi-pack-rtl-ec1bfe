// tb_axi_pack_demux: checks the adapter's AXI demultiplexer.
//
// Three behavioural converter models (base, strided, indirect) sit behind the
// demux. Each accepts AR/AW at random, answers a read burst with len+1 R beats
// and a write burst with one B after its len+1 W beats, all with random
// valid/ready timing. The upstream side issues random bursts whose user bits
// select the three classes. Each burst carries a sequence number in its
// address, which the models echo in R data and check against W data. The
// bench checks that every burst reaches the converter its user bits select,
// that R beats, W beats and B responses stay in issue order across converter
// switches, that W data reaches the converter owning the burst, and that last
// flags are right.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.
module tb_axi_pack_demux;
  import axi_pack_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  ax_t ar, aw;
  r_t  r;
  w_t  w;
  b_t  b;
  logic [2:0] m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_aw_valid, m_aw_ready;
  logic [2:0] m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  ax_t m_ar, m_aw;
  w_t  m_w;
  r_t  m_r [3];
  b_t  m_b [3];

  axi_pack_demux dut (
    .clk_i (clk), .rst_ni (rst_n),
    .ar_valid_i (ar_valid), .ar_ready_o (ar_ready), .ar_i (ar),
    .r_valid_o (r_valid), .r_ready_i (r_ready), .r_o (r),
    .aw_valid_i (aw_valid), .aw_ready_o (aw_ready), .aw_i (aw),
    .w_valid_i (w_valid), .w_ready_o (w_ready), .w_i (w),
    .b_valid_o (b_valid), .b_ready_i (b_ready), .b_o (b),
    .m_ar_valid_o (m_ar_valid), .m_ar_ready_i (m_ar_ready), .m_ar_o (m_ar),
    .m_r_valid_i (m_r_valid), .m_r_ready_o (m_r_ready), .m_r_i (m_r),
    .m_aw_valid_o (m_aw_valid), .m_aw_ready_i (m_aw_ready), .m_aw_o (m_aw),
    .m_w_valid_o (m_w_valid), .m_w_ready_i (m_w_ready), .m_w_o (m_w),
    .m_b_valid_i (m_b_valid), .m_b_ready_o (m_b_ready), .m_b_i (m_b)
  );

  int checks = 0, failures = 0, n_switch = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s t=%0t", msg, $time);
    end
  endtask

  function automatic user_t cls_user(int c);
    if (c == 0) return '0;
    if (c == 1) return {29'd3, 1'b0, 1'b1};
    return {25'h100, 4'd2, 1'b1, 1'b1};
  endfunction
  function automatic int cls_of(user_t u);
    return !u[0] ? 0 : (!u[1] ? 1 : 2);
  endfunction
  function automatic logic [255:0] beat_data(int seq, int beat);
    return {224'(seq), 32'(beat)};
  endfunction

  // ---------------- converter models
  ax_t rq [3][$];
  ax_t wq [3][$];
  int  rbeat [3], wbeat [3];
  int  bpend [3][$];
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 3; c++) begin
      if (m_ar_valid[c] && m_ar_ready[c]) begin
        check(cls_of(m_ar.user) == c, "AR at wrong converter");
        rq[c].push_back(m_ar);
      end
      if (m_r_valid[c] && m_r_ready[c]) begin
        if (rbeat[c] == int'(rq[c][0].len)) begin void'(rq[c].pop_front()); rbeat[c] = 0; end
        else rbeat[c]++;
      end
      if (m_aw_valid[c] && m_aw_ready[c]) begin
        check(cls_of(m_aw.user) == c, "AW at wrong converter");
        wq[c].push_back(m_aw);
      end
      if (m_w_valid[c] && m_w_ready[c]) begin
        check(wq[c].size() > 0, "W at converter without AW");
        if (wq[c].size() > 0) begin
          check(m_w.data == beat_data(int'(wq[c][0].addr), wbeat[c]), "W data at converter");
          check(m_w.last == (wbeat[c] == int'(wq[c][0].len)), "W last");
          if (wbeat[c] == int'(wq[c][0].len)) begin
            bpend[c].push_back(int'(wq[c][0].id));
            void'(wq[c].pop_front());
            wbeat[c] = 0;
          end else wbeat[c]++;
        end
      end
      if (m_b_valid[c] && m_b_ready[c]) void'(bpend[c].pop_front());
    end
  end
  always_comb begin
    for (int c = 0; c < 3; c++) begin
      m_r[c] = '0;
      if (rq[c].size() > 0) begin
        m_r[c].id   = rq[c][0].id;
        m_r[c].data = beat_data(int'(rq[c][0].addr), rbeat[c]);
        m_r[c].last = (rbeat[c] == int'(rq[c][0].len));
      end
      m_b[c] = '0;
      if (bpend[c].size() > 0) m_b[c].id = id_t'(bpend[c][0]);
    end
  end
  logic [2:0] rv_en, bv_en;
  always @(negedge clk) begin
    for (int c = 0; c < 3; c++) begin
      m_ar_ready[c] <= ($urandom % 3) != 0;
      m_aw_ready[c] <= ($urandom % 3) != 0;
      m_w_ready[c]  <= ($urandom % 3) != 0;
      rv_en[c]      <= ($urandom % 3) != 0;
      bv_en[c]      <= ($urandom % 3) != 0;
    end
    r_ready <= ($urandom % 4) != 0;
    b_ready <= ($urandom % 4) != 0;
  end
  always_comb
    for (int c = 0; c < 3; c++) begin
      m_r_valid[c] = rv_en[c] && rq[c].size() > 0;
      m_b_valid[c] = bv_en[c] && bpend[c].size() > 0;
    end

  // ---------------- upstream
  localparam int NB = 300;
  int rlen [NB], wlen [NB], rcls [NB], wcls [NB];
  int r_seq = 0, r_beat = 0, b_seq = 0, aw_done = 0;

  always @(posedge clk) if (rst_n) begin
    if (r_valid && r_ready) begin
      check(r.data == beat_data(r_seq, r_beat), "R data/order");
      check(r.last == (r_beat == rlen[r_seq]), "R last");
      check(r.id == id_t'(r_seq), "R id");
      if (r_beat == rlen[r_seq]) begin r_seq++; r_beat = 0; end
      else r_beat++;
    end
    if (b_valid && b_ready) begin
      check(b.id == id_t'(b_seq), "B order");
      b_seq++;
    end
    if (aw_valid && aw_ready) aw_done++;
  end

  initial begin : ar_proc
    @(posedge rst_n);
    for (int s = 0; s < NB; s++) begin
      @(negedge clk);
      ar_valid = 1;
      ar = '0; ar.id = id_t'(s); ar.addr = addr_t'(s); ar.len = 8'(rlen[s]); ar.user = cls_user(rcls[s]);
      @(posedge clk);
      while (!ar_ready) @(posedge clk);
      @(negedge clk); ar_valid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
  end
  initial begin : aw_proc
    @(posedge rst_n);
    for (int s = 0; s < NB; s++) begin
      @(negedge clk);
      aw_valid = 1;
      aw = '0; aw.id = id_t'(s); aw.addr = addr_t'(s); aw.len = 8'(wlen[s]); aw.user = cls_user(wcls[s]);
      @(posedge clk);
      while (!aw_ready) @(posedge clk);
      @(negedge clk); aw_valid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
  end
  initial begin : w_proc
    @(posedge rst_n);
    for (int s = 0; s < NB; s++)
      for (int bt = 0; bt <= wlen[s]; bt++) begin
        @(negedge clk);
        w_valid = 1;
        w = '0; w.data = beat_data(s, bt); w.strb = '1; w.last = (bt == wlen[s]);
        @(posedge clk);
        while (!w_ready) @(posedge clk);
        @(negedge clk); w_valid = 0;
      end
  end

  initial begin
    ar_valid = 0; aw_valid = 0; w_valid = 0; ar = '0; aw = '0; w = '0;
    r_ready = 0; b_ready = 0; m_ar_ready = '0; m_aw_ready = '0; m_w_ready = '0; rv_en = '0; bv_en = '0;
    for (int c = 0; c < 3; c++) begin rbeat[c] = 0; wbeat[c] = 0; end
    for (int s = 0; s < NB; s++) begin
      rlen[s] = $urandom % 5; wlen[s] = $urandom % 5;
      // runs of the same class with switches in between
      rcls[s] = (s > 0 && $urandom % 3 != 0) ? rcls[s-1] : $urandom % 3;
      wcls[s] = (s > 0 && $urandom % 3 != 0) ? wcls[s-1] : $urandom % 3;
      if (s > 0 && rcls[s] != rcls[s-1]) n_switch++;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (r_seq == NB && b_seq == NB);
    repeat (5) @(posedge clk);
    check(n_switch > 10, "too few converter switches");
    check(r_seq == NB && b_seq == NB && aw_done == NB, "all bursts completed");
    $display("bursts %0d, read class switches %0d", NB, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired (r %0d b %0d)", r_seq, b_seq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
