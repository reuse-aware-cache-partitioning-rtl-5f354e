// tb_srcp_llc: end-to-end test of the partitioned LLC at its default size
// (4 cores, 16 ways, 2048 sets of 64-byte lines, 8-bit AFC).
//
// A reference model in this file keeps its own copy of every line's tag,
// valid, dirty, LC, AFC and GCount and applies the replacement rules step by
// step. Each answer of the cache (hit, way, partition, reuse and sharing
// class, L1 fill, eviction and its address) is compared with it, and the
// answer must come exactly two clocks after the request was taken, with at
// most one request taken every two clocks.
//
// Traffic: a directed phase first (one line re-used by its owner until its
// AFC saturates; the same line read and written by the other cores, which
// must hit in the owner's partition rather than load a second copy), then
// random requests from all cores to a few sets, drawn from per-core private
// lines and a pool of shared lines, so that misses, evictions, counter
// decay and every victim tie-break happen. Each such mechanism is counted
// and one that never happened is a failure.
module tb_srcp_llc;
  localparam int NC = 4, WAYS = 16, WPC = WAYS / NC;
  localparam int OFF_W = 6, IDX_W = 11;

  int checks = 0, failures = 0;
  longint cycle = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic        req_valid, req_ready, req_write;
  logic [1:0]  req_core;
  logic [31:0] req_addr;
  logic        resp_valid, resp_hit, resp_local, resp_freq_used, resp_shared;
  logic        resp_l1_fill, resp_evict, resp_evict_dirty;
  logic [1:0]  resp_core;
  logic [3:0]  resp_way;
  logic [31:0] resp_addr, resp_evict_addr;

  srcp_llc dut (.*);

  // ---------------- reference model ----------------
  typedef struct {
    bit        valid, dirty, lc;
    int        tag, afc, gc;
  } line_t;
  typedef line_t set_t [WAYS];
  set_t model [int];

  typedef struct {
    longint      t_accept;
    bit          hit, local_hit, freq, shared, fill, evict, evict_dirty;
    int          way;
    logic [31:0] addr, evict_addr;
    logic [1:0]  core;
  } exp_t;
  exp_t expq[$];

  // mechanism counters
  int n_local_hit, n_global_hit, n_fill_empty, n_evict, n_evict_dirty;
  int n_decay_less, n_l1_fill, n_bypass_less, n_bypass_shared_wr;
  int n_afc_sat, n_gc_sat, n_tie_lc, n_tie_index, n_lc_clear, n_stall;

  function automatic void touch_local(ref set_t s, input int w, input int c);
    bit all_set = 1;
    s[w].lc = 1;
    for (int i = c * WPC; i < (c + 1) * WPC; i++) if (s[i].valid && !s[i].lc) all_set = 0;
    if (all_set) begin
      for (int i = c * WPC; i < (c + 1) * WPC; i++) if (i != w) s[i].lc = 0;
      n_lc_clear++;
    end
  endfunction

  function automatic exp_t model_access(int c, logic [31:0] addr, bit wr);
    exp_t e;
    int idx = int'(addr[OFF_W +: IDX_W]);
    int tag = int'(addr[31:OFF_W+IDX_W]);
    int w = -1, lo = c * WPC, min_a, min_g, cnt;
    bit cand [WAYS];
    set_t s;
    if (!model.exists(idx)) begin
      for (int i = 0; i < WAYS; i++) s[i] = '{valid: 0, dirty: 0, lc: 0, tag: 0, afc: 0, gc: 0};
      model[idx] = s;
    end
    s = model[idx];
    e.addr = addr; e.core = 2'(c); e.evict = 0; e.evict_dirty = 0; e.evict_addr = 'x;
    for (int i = 0; i < WAYS; i++) if (s[i].valid && s[i].tag == tag) w = i;
    e.hit = (w >= 0);
    if (e.hit) begin
      e.local_hit = (w / WPC == c);
      if (e.local_hit) begin
        if (s[w].afc == 255) n_afc_sat++;
        s[w].afc = (s[w].afc == 255) ? 255 : s[w].afc + 1;
        touch_local(s, w, c);
        n_local_hit++;
      end else begin
        if (s[w].gc == NC - 1) n_gc_sat++;
        s[w].gc = (s[w].gc == NC - 1) ? NC - 1 : s[w].gc + 1;
        n_global_hit++;
      end
      s[w].dirty = s[w].dirty | wr;
    end else begin
      e.local_hit = 1;
      for (int i = lo; i < lo + WPC; i++) begin
        if (s[i].afc > 0) s[i].afc--;
        if (s[i].gc > 0) s[i].gc--;
      end
      for (int i = lo; i < lo + WPC; i++) if (!s[i].valid && w < 0) w = i;
      if (w >= 0) n_fill_empty++;
      else begin
        min_a = 1 << 30; min_g = 1 << 30;
        for (int i = lo; i < lo + WPC; i++) if (s[i].afc < min_a) min_a = s[i].afc;
        for (int i = lo; i < lo + WPC; i++) cand[i] = (s[i].afc == min_a);
        for (int i = lo; i < lo + WPC; i++) if (cand[i] && s[i].gc < min_g) min_g = s[i].gc;
        cnt = 0;
        for (int i = lo; i < lo + WPC; i++) begin cand[i] = cand[i] && s[i].gc == min_g; cnt += cand[i]; end
        if (cnt > 1) begin
          int n0 = 0;
          for (int i = lo; i < lo + WPC; i++) if (cand[i] && !s[i].lc) n0++;
          if (n0 > 0) for (int i = lo; i < lo + WPC; i++) if (s[i].lc) cand[i] = 0;
          if (n0 == 1) n_tie_lc++; else n_tie_index++;
        end
        for (int i = lo + WPC - 1; i >= lo; i--) if (cand[i]) w = i;
        e.evict = 1;
        e.evict_dirty = s[w].dirty;
        e.evict_addr = {s[w].tag[31-OFF_W-IDX_W:0], idx[IDX_W-1:0], {OFF_W{1'b0}}};
        n_evict++;
        if (s[w].dirty) n_evict_dirty++;
      end
      s[w].valid = 1; s[w].tag = tag; s[w].dirty = wr;
      s[w].afc = 128; s[w].gc = 0;
      touch_local(s, w, c);
    end
    e.way = w;
    e.freq = (s[w].afc >= 128);
    e.shared = (s[w].gc >= 1);
    e.fill = e.freq && !(e.shared && wr);
    if (e.hit && !e.freq) n_decay_less++;
    if (e.fill) n_l1_fill++;
    else if (!e.freq) n_bypass_less++;
    else n_bypass_shared_wr++;
    model[idx] = s;
    return e;
  endfunction

  // ---------------- response checker ----------------
  longint last_accept = -10;
  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready) begin
      exp_t e;
      checks++;
      if (cycle - last_accept < 2) begin
        failures++; $display("FAIL two requests taken %0d cycle apart", cycle - last_accept);
      end
      last_accept = cycle;
      e = model_access(int'(req_core), req_addr, req_write);
      e.t_accept = cycle;
      expq.push_back(e);
    end
    if (rst_n && req_valid && !req_ready) n_stall++;
    if (rst_n && resp_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL answer without request");
      end else begin
        e = expq.pop_front();
        if (cycle - e.t_accept != 2) begin
          failures++; $display("FAIL latency %0d", cycle - e.t_accept);
        end
        if (resp_addr !== e.addr || resp_core !== e.core || resp_hit !== e.hit ||
            int'(resp_way) != e.way || resp_local !== e.local_hit ||
            resp_freq_used !== e.freq || resp_shared !== e.shared ||
            resp_l1_fill !== e.fill || resp_evict !== e.evict ||
            (e.evict && (resp_evict_dirty !== e.evict_dirty ||
                         resp_evict_addr !== e.evict_addr))) begin
          failures++;
          $display("FAIL @%0d core=%0d addr=%h: got hit=%b way=%0d loc=%b f=%b s=%b fill=%b ev=%b/%b/%h",
                   cycle, e.core, e.addr, resp_hit, resp_way, resp_local, resp_freq_used,
                   resp_shared, resp_l1_fill, resp_evict, resp_evict_dirty, resp_evict_addr);
          $display("     expected hit=%b way=%0d loc=%b f=%b s=%b fill=%b ev=%b/%b/%h",
                   e.hit, e.way, e.local_hit, e.freq, e.shared, e.fill, e.evict,
                   e.evict_dirty, e.evict_addr);
        end
      end
    end
  end

  // ---------------- stimulus ----------------
  function automatic logic [31:0] mk_addr(int tag, int idx);
    return {15'(tag), 11'(idx), 6'($urandom)};
  endfunction

  task automatic issue(int c, logic [31:0] a, bit wr);
    @(negedge clk);
    req_valid = 1; req_core = 2'(c); req_addr = a; req_write = wr;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  localparam int SETS_USED [4] = '{0, 1, 5, 2047};

  initial begin
    int c, idx, tag;
    bit wr;
    req_valid = 0; req_core = 0; req_addr = 0; req_write = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // directed: owner re-use until the AFC saturates, then sharing
    for (int i = 0; i < 140; i++) issue(1, mk_addr(7, 3), 0);
    for (int i = 0; i < 6; i++) issue(i % 4 == 1 ? 2 : i % 4, mk_addr(7, 3), i % 2);
    issue(3, mk_addr(7, 3), 0);

    // random: back-to-back requests so the one-every-two-cycles limit shows
    @(negedge clk);
    for (int i = 0; i < 30000; i++) begin
      c = $urandom % NC;
      idx = SETS_USED[$urandom % 4];
      if ($urandom % 3 == 0) tag = 100 + $urandom % 6;       // shared pool
      else tag = 200 + 16 * c + $urandom % 7;                 // private to core c
      wr = ($urandom % 4 == 0);
      req_valid = 1; req_core = 2'(c); req_addr = mk_addr(tag, idx); req_write = wr;
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      @(negedge clk);
      if ($urandom % 4 == 0) begin req_valid = 0; @(negedge clk); end
    end
    req_valid = 0;
    repeat (5) @(posedge clk);

    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d answers missing", expq.size()); end

    $display("local hits %0d, global hits %0d, fills of empty ways %0d, evictions %0d (dirty %0d)",
             n_local_hit, n_global_hit, n_fill_empty, n_evict, n_evict_dirty);
    $display("hits on decayed (less frequent) lines %0d, AFC saturated %0d, GCount saturated %0d",
             n_decay_less, n_afc_sat, n_gc_sat);
    $display("L1 fill %0d, bypass less-frequent %0d, bypass shared write %0d",
             n_l1_fill, n_bypass_less, n_bypass_shared_wr);
    $display("victim ties broken by LC %0d, by way number %0d, LC clears %0d, request stalls %0d",
             n_tie_lc, n_tie_index, n_lc_clear, n_stall);
    begin
      int m [15];
      m = '{n_local_hit, n_global_hit, n_fill_empty, n_evict, n_evict_dirty, n_decay_less,
                     n_afc_sat, n_gc_sat, n_l1_fill, n_bypass_less, n_bypass_shared_wr, n_tie_lc,
                     n_tie_index, n_lc_clear, n_stall};
      foreach (m[i]) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycle == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
