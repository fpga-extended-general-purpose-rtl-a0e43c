// Body shared by the end-to-end testbenches of fpga_ext_top (reduced and
// full size). Expects NS, N_L, DEPTH, BLOCKS, N_INSN and the DUT signals to
// be declared by the including module.

  int checks = 0, failures = 0;
  int cycle = 0;

  // mechanism counters
  int n_slot_hit = 0, n_slot_miss_bs_hit = 0, n_refill = 0, n_bs_conflict = 0;
  int n_lru_evict = 0, n_halt_cycles = 0, n_lat1 = 0, n_lat2 = 0, n_partial = 0;
  int n_hardened = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: got %h expected %h (cycle %0d)", what, got, exp, cycle);
    end
  endtask

  int m_group [NS];
  int m_used  [NS];
  int bs_tag  [BLOCKS];

  initial begin
    for (int s = 0; s < NS; s++) begin m_group[s] = -1; m_used[s] = 0; end
    for (int b = 0; b < BLOCKS; b++) bs_tag[b] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < N_INSN; n++) begin
      int g, hs, halted, t, bi;
      logic [31:0] i, a, b, c, e;
      bit slot_miss, bs_miss;
      // hardened instruction now and then: must be flagged, never accepted
      if (n % 7 == 3) begin
        insn = {7'h00, 5'($urandom), 5'($urandom), 3'd0, 5'($urandom), 7'h33};  // add
        #1;
        chk("hardened add is not an extension", 32'(is_ext), 0);
        insn = {7'h70, 5'd0, 5'($urandom), 3'd0, 5'($urandom), 7'h53};          // fmv.x.w
        #1;
        chk("fmv.x.w is not an extension", 32'(is_ext), 0);
        n_hardened++;
      end
      // working set of about five groups drifting through all ten
      g = (n / 25 + $urandom_range(0, 4)) % N_GROUPS;
      i = make_insn(g, $urandom);
      a = $urandom; b = $urandom; c = $urandom;

      // reference: slot LRU and direct-mapped bitstream cache
      hs = -1;
      for (int s = 0; s < NS; s++) if (m_group[s] == g) hs = s;
      slot_miss = (hs < 0);
      bs_miss = 0;
      if (slot_miss) begin
        int v;
        v = -1;
        for (int s = NS - 1; s >= 0; s--) if (m_group[s] < 0) v = s;
        if (v < 0) begin
          v = 0;
          for (int s = 1; s < NS; s++) if (m_used[s] < m_used[v]) v = s;
          n_lru_evict++;
        end
        hs = v;
        m_group[v] = g;
        bi = int'((BASE >> BS_SHIFT) + g) % BLOCKS;
        bs_miss = (bs_tag[bi] != g);
        if (bs_miss && bs_tag[bi] >= 0) n_bs_conflict++;
        bs_tag[bi] = g;
        if (bs_miss) n_refill++; else n_slot_miss_bs_hit++;
      end else n_slot_hit++;
      m_used[hs] = n + 1;

      in_valid = 1; insn = i; rs1 = a; rs2 = b; rs3 = c;
      #1;
      chk("extension instruction flagged", 32'(is_ext), 1);
      halted = 0;
      while (!in_ready && halted < 5000) begin
        chk("halt while pending", 32'(halt), 1);
        @(negedge clk);
        #1;
        halted++;
      end
      n_halt_cycles += halted;
      if (!slot_miss) chk("slot hit accepted when offered", 32'(halted), 0);
      else if (!bs_miss) chk("slot miss, bitstream hit: halt cycles", 32'(halted), 32'(DEPTH + 3));
      @(negedge clk);
      in_valid = 0;
      insn = $urandom; rs1 = $urandom; rs2 = $urandom; rs3 = $urandom;
      t = 1;
      while (!res_valid && t < 50) begin @(negedge clk); t++; end
      chk("result L+1 cycles after acceptance", 32'(t), group_lat(g) + 1);
      if (group_lat(g) == 1) n_lat1++; else n_lat2++;
      e = group_ref(g, i, a, b, c);
      chk($sformatf("insn %0d (%08h, group %0d) result", n, i, g), res_data, e);
      if ((g == 0 || g == 3) && group_ref(g, i ^ 32'h1000, a, b, c) != e) n_partial++;
      @(negedge clk);
    end
    chk("slot hit counter", slot_hits, 32'(n_slot_hit));
    chk("slot miss counter", slot_misses, 32'(n_slot_miss_bs_hit + n_refill));
    chk("bitstream-cache misses", bs_misses, 32'(n_refill));
    chk("bitstream-cache hits", bs_hits, 32'(n_slot_miss_bs_hit));
    chk("memory requests", n_req, 32'(n_refill));
    $display("slot hits %0d, slot misses served by bitstream cache %0d, refills %0d",
             n_slot_hit, n_slot_miss_bs_hit, n_refill);
    $display("bitstream-cache conflicts %0d, LRU evictions %0d, halt cycles %0d",
             n_bs_conflict, n_lru_evict, n_halt_cycles);
    $display("1-level %0d, 2-level %0d, partial decoding %0d, hardened %0d",
             n_lat1, n_lat2, n_partial, n_hardened);
    chk("mechanism: slot hit",                    32'(n_slot_hit > 0), 1);
    chk("mechanism: slot miss, bitstream hit",    32'(n_slot_miss_bs_hit > 0), 1);
    chk("mechanism: bitstream refill",            32'(n_refill > 0), 1);
    chk("mechanism: bitstream-cache conflict",    32'(n_bs_conflict > 0 || BLOCKS >= N_GROUPS), 1);
    chk("mechanism: LRU slot eviction",           32'(n_lru_evict > 0), 1);
    chk("mechanism: halt",                        32'(n_halt_cycles > 0), 1);
    chk("mechanism: 1-level latency",             32'(n_lat1 > 0), 1);
    chk("mechanism: 2-level latency",             32'(n_lat2 > 0), 1);
    chk("mechanism: partial decoding",            32'(n_partial > 0), 1);
    chk("mechanism: hardened instruction",        32'(n_hardened > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
