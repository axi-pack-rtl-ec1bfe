// tb_axi_tasks.svh: AXI-Pack master tasks and a reference model shared by the
// adapter, controller and base-converter testbenches. Include inside a module
// that declares clk, the AXI signals (ar_valid, ar_ready, ar, r_valid, r_ready,
// r, aw_valid, aw_ready, aw, w_valid, w_ready, w, b_valid, b_ready, b), the
// counters checks / failures and the reference memory `shadow` of ShadowWords
// words starting at byte address 0.
//
// Reference rules (AXI-Pack semantics as implemented):
//   plain burst   beat bt covers the whole bus line of its AXI4 beat address
//   strided       element j = bt * E + i / k at addr + j * stride * 2^size
//   indirect      element j at base + (index[j] << size); index j is read from
//                 the index array at addr (start rounded down to E indices)
// where k = 2^size / 4 words per element and E = 8 / k elements per beat.
//
// The rules checked come from the AXI-Pack protocol and controller
// description; stimulus, reference model and bench structure are this bench's
// own.

function automatic int unsigned ref_index(int unsigned ia, int isz, int j);
  int unsigned ba;
  word_t wd;
  ba = ia + (j << isz);
  wd = shadow[(ba >> 2) % ShadowWords];
  case (isz)
    0: return wd[(ba % 4) * 8 +: 8];
    1: return wd[(ba % 4) * 8 +: 16];
    default: return wd;
  endcase
endfunction

function automatic int unsigned ref_lane_addr(ax_t a, int bt, int i);
  int unsigned k, e, j;
  if (!a.user[0]) begin
    int unsigned ba;
    ba = (a.burst == BURST_FIXED || bt == 0) ? a.addr
       : ((a.addr >> a.size) << a.size) + bt * (1 << a.size);
    return ((ba >> 5) << 5) + i * 4;
  end
  k = 1 << (a.size - 2);
  e = NumPorts / k;
  j = bt * e + i / k;
  if (!a.user[1]) return a.addr + j * (a.user[30:2] << a.size) + (i % k) * 4;
  begin
    int unsigned isz, pos0, ia;
    isz  = a.user[5:2];
    pos0 = ((a.addr % 32) >> isz) & ~(e - 1);
    ia   = ((a.addr >> 5) << 5);
    return a.user[30:6] + (ref_index(ia, isz, pos0 + j) << a.size) + (i % k) * 4;
  end
endfunction

task automatic axi_read(ax_t a, int rstall_pct);
  int bt = 0;
  @(negedge clk); ar = a; ar_valid = 1;
  do @(posedge clk); while (!ar_ready);
  @(negedge clk); ar_valid = 0;
  while (1) begin
    @(negedge clk);
    r_ready = (($urandom % 100) >= rstall_pct);
    @(posedge clk);
    if (r_valid && r_ready) begin
      for (int i = 0; i < NumPorts; i++) begin
        word_t exp;
        exp = shadow[(ref_lane_addr(a, bt, i) >> 2) % ShadowWords];
        checks++;
        if (r.data[i*32 +: 32] !== exp) begin
          failures++;
          if (failures < 10) $display("R MISMATCH user %h beat %0d lane %0d: got %h exp %h",
                                      a.user, bt, i, r.data[i*32 +: 32], exp);
        end
      end
      checks++;
      if (r.last !== (bt == a.len) || r.id !== a.id) begin
        failures++;
        $display("R last/id wrong at beat %0d", bt);
      end
      if (r.last) break;
      bt++;
    end
  end
  @(negedge clk); r_ready = 0;
endtask

// random write data; partial selects random strobes. The shadow is updated
// beat by beat; a test must avoid two lanes of one burst hitting one word.
task automatic axi_write(ax_t a, bit partial);
  w_t beats [$];
  for (int bt = 0; bt <= a.len; bt++) begin
    w_t x;
    for (int i = 0; i < NumPorts; i++) x.data[i*32 +: 32] = $urandom;
    x.strb = partial ? strb_t'({$urandom, $urandom}) : '1;
    x.last = (bt == a.len);
    beats.push_back(x);
  end
  for (int bt = 0; bt <= a.len; bt++) begin
    for (int i = 0; i < NumPorts; i++) begin
      int unsigned wa;
      wa = (ref_lane_addr(a, bt, i) >> 2) % ShadowWords;
      for (int by = 0; by < 4; by++)
        if (beats[bt].strb[i*4 + by]) shadow[wa][by*8 +: 8] = beats[bt].data[i*32 + by*8 +: 8];
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
  @(negedge clk); b_ready = 1;
  do @(posedge clk); while (!b_valid);
  checks++;
  if (b.id !== a.id) begin failures++; $display("B id wrong"); end
  @(negedge clk); b_ready = 0;
endtask

function automatic ax_t mk_ax(int unsigned id, int unsigned addr, int unsigned len,
                              int unsigned size, burst_e burst, user_t user);
  ax_t a;
  a = '0;
  a.id = id_t'(id); a.addr = addr; a.len = 8'(len); a.size = 3'(size); a.burst = burst;
  a.user = user;
  return a;
endfunction
