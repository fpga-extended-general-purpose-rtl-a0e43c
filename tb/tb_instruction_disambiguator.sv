// tb_instruction_disambiguator -- four slots, behavioural slot and
// bitstream-cache models, 300 instructions over the ten groups with a
// drifting working set.
//
// The slot models learn "their" group from the first configuration word they
// receive (the bitstream source sends the bitstream address as the words),
// take slot-index + 1 cycles per instruction and answer with a hash of the
// group and operands; a wrong steering, a wrong bitstream or a wrong output
// multiplexer therefore shows as a wrong result. An independent LRU model
// predicts hit or miss, the slot chosen and the bitstream address. Also
// checked: halt while and only while a pending instruction is not accepted,
// acceptance exactly one cycle after the last configuration word, hit
// acceptance in the cycle offered, result L + 1 cycles after acceptance,
// and the hit/miss counters.
module tb_instruction_disambiguator;
  import fpga_ext_pkg::*;

  localparam int unsigned NS = 4, W = 32, DEPTH = 3;
  localparam logic [31:0] BASE = 32'h0040_0000;

  logic clk = 0, rst_n = 0;
  logic issue_valid = 0, issue_ready, halt;
  logic [GROUP_W-1:0] issue_tag = '0;
  logic [XLEN-1:0] insn = '0, rs1 = '0, rs2 = '0, rs3 = '0;
  logic res_valid;
  logic [XLEN-1:0] res_data;
  logic [ADDR_W-1:0] bs_base = BASE;
  logic bs_req_valid, bs_req_ready = 0;
  logic [ADDR_W-1:0] bs_req_addr;
  logic bs_word_valid = 0;
  logic [W-1:0] bs_word = '0;
  logic [NS-1:0] slot_cfg_en, slot_start, slot_done = '0;
  logic [W-1:0] slot_cfg_word;
  logic [XLEN-1:0] slot_insn, slot_rs1, slot_rs2, slot_rs3;
  logic [XLEN-1:0] slot_result [NS];
  logic [31:0] hit_count, miss_count;

  int checks = 0, failures = 0;
  int cycle = 0;
  int last_word_cycle = -1;
  int n_bs_req = 0;
  logic [31:0] last_bs_addr;
  int started_slot = -1;

  instruction_disambiguator #(.NS(NS), .TAG_W(GROUP_W), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (cycle %0d)", what, got, exp, cycle);
    end
  endtask

  function automatic logic [31:0] slot_fn(int unsigned g, logic [31:0] i, logic [31:0] a,
                                          logic [31:0] b, logic [31:0] c);
    return (a + 32'(g) * 32'h0101_0101) ^ {b[15:0], b[31:16]} ^ (c - i);
  endfunction

  // ---- bitstream cache model: DEPTH words, word k = address + k ------------
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && bs_req_valid && !bs_req_ready) begin
        logic [31:0] a;
        a = bs_req_addr;
        repeat ($urandom_range(0, 2)) @(posedge clk);
        bs_req_ready <= 1;
        @(posedge clk);
        bs_req_ready <= 0;
        n_bs_req++;
        last_bs_addr = a;
        repeat ($urandom_range(1, 3)) @(posedge clk);
        for (int unsigned k = 0; k < DEPTH; k++) begin
          bs_word_valid <= 1;
          bs_word <= a + k;
          @(posedge clk);
          if (k == DEPTH - 1) last_word_cycle = cycle;
        end
        bs_word_valid <= 0;
      end
    end
  end

  // ---- slot models ----------------------------------------------------------
  int unsigned slot_group [NS];
  int unsigned slot_wcnt  [NS];
  for (genvar s = 0; s < NS; s++) begin : g_slot
    initial begin
      slot_result[s] = '0;
      slot_group[s] = 99;
      slot_wcnt[s] = 0;
      forever begin
        @(posedge clk);
        if (slot_cfg_en[s]) begin
          if (slot_wcnt[s] % DEPTH == 0) slot_group[s] = (slot_cfg_word - BASE) >> BS_SHIFT;
          slot_wcnt[s]++;
        end
        if (slot_start[s]) begin
          logic [31:0] i, a, b, c;
          started_slot = s;
          i = slot_insn; a = slot_rs1; b = slot_rs2; c = slot_rs3;
          repeat (s) @(posedge clk);
          slot_done[s]   <= 1;
          slot_result[s] <= slot_fn(slot_group[s], i, a, b, c);
          @(posedge clk);
          slot_done[s]   <= 0;
          slot_result[s] <= $urandom;
        end
      end
    end
  end

  // ---- reference LRU model -------------------------------------------------
  int m_group [NS];
  int m_used  [NS];
  int exp_hits = 0, exp_misses = 0;

  initial begin
    for (int s = 0; s < NS; s++) begin m_group[s] = -1; m_used[s] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int g, hs, halted, t;
      logic [31:0] i, a, b, c, exp;
      bit was_miss;
      // working set of about five groups that drifts every 40 instructions
      g = (n / 40 + $urandom_range(0, 4)) % N_GROUPS;
      hs = -1;
      for (int s = 0; s < NS; s++) if (m_group[s] == g) hs = s;
      was_miss = (hs < 0);
      if (was_miss) begin
        int v;
        v = -1;
        for (int s = NS - 1; s >= 0; s--) if (m_group[s] < 0) v = s;
        if (v < 0) begin
          v = 0;
          for (int s = 1; s < NS; s++) if (m_used[s] < m_used[v]) v = s;
        end
        hs = v;
        m_group[v] = g;
        exp_misses++;
      end else exp_hits++;
      m_used[hs] = n + 1;

      i = $urandom; a = $urandom; b = $urandom; c = $urandom;
      issue_valid = 1; issue_tag = g; insn = i; rs1 = a; rs2 = b; rs3 = c;
      halted = 0;
      #1;
      while (!issue_ready) begin
        chk("halt while pending", 32'(halt), 1);
        @(negedge clk);
        halted++;
      end
      chk("no halt when accepted", 32'(halt), 0);
      if (was_miss) begin
        chk("miss: bitstream address", last_bs_addr, BASE + (32'(g) << BS_SHIFT));
        chk("miss: accepted one cycle after last word", 32'(cycle - last_word_cycle), 1);
      end else begin
        chk("hit: accepted when offered", 32'(halted), 0);
      end
      @(negedge clk);
      chk($sformatf("instruction %0d group %0d steered to slot", n, g), 32'(started_slot), 32'(hs));
      issue_valid = 0;
      insn = $urandom; rs1 = $urandom;
      t = 1;
      while (!res_valid && t < 30) begin @(negedge clk); t++; end
      chk("result L+1 cycles after acceptance", 32'(t), 32'(hs + 1));
      exp = slot_fn(g, i, a, b, c);
      chk($sformatf("instruction %0d group %0d result", n, g), res_data, exp);
      @(negedge clk);
      started_slot = -1;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    chk("hit counter", hit_count, 32'(exp_hits));
    chk("miss counter", miss_count, 32'(exp_misses));
    chk("one bitstream request per miss", 32'(n_bs_req), 32'(exp_misses));
    $display("hits=%0d misses=%0d", exp_hits, exp_misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
