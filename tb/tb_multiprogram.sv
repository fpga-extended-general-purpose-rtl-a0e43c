// tb_multiprogram -- two tasks time-sharing the FPGA-extension subsystem.
//
// Mimics the multi-program setting: a round-robin scheduler switches between
// two instruction streams every Q extension instructions, with nothing done
// to the slots at a switch. Task A only uses the M groups (mul, div, rem);
// task B mixes F groups (fadd, fmul, compare, fused multiply-add) with mul.
// The same 1200-instruction mix is run with a short quantum (Q = 8) and a
// long one (Q = 200), four slots, reduced slot and chain sizes. Every result
// is checked, and the run must show what the architecture predicts: context
// switches stay correct without any software action, and a longer quantum
// causes fewer slot misses and fewer halted cycles.
module tb_multiprogram;
  import fpga_ext_pkg::*;
  import tb_fpga_pkg::*;

  localparam int unsigned NS = 4, N_L = 64, W = CFG_W, DEPTH = 2, BLOCKS = 16, MW = MEM_W;
  localparam logic [31:0] BASE = 32'h0010_0000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, is_ext, halt, res_valid;
  logic [XLEN-1:0] insn = '0, rs1 = '0, rs2 = '0, rs3 = '0, res_data;
  logic [ADDR_W-1:0] bs_base = BASE;
  logic mem_req_valid, mem_req_ready, mem_rvalid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [MW-1:0] mem_rdata;
  logic [31:0] slot_hits, slot_misses, bs_hits, bs_misses;
  int unsigned n_req;
  int checks = 0, failures = 0;

  fpga_ext_top #(.NS(NS), .N_L(N_L), .W(W), .DEPTH(DEPTH), .BLOCKS(BLOCKS), .MW(MW)) dut (.*);

  bs_mem_model #(.N_L(N_L), .W(W), .DEPTH(DEPTH), .MW(MW), .BASE(BASE)) u_mem (
    .clk, .rst_n, .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rvalid, .mem_rdata, .n_req);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // group used by instruction k of a task
  function automatic int unsigned task_group(int unsigned tsk, int unsigned k);
    int unsigned a [3] = '{0, 1, 2};
    int unsigned b [5] = '{3, 4, 6, 9, 0};
    return (tsk == 0) ? a[(k * 7 + k / 3) % 3] : b[(k * 3 + k / 5) % 5];
  endfunction

  task automatic run(int unsigned q, output int unsigned misses, output int unsigned halted);
    int unsigned pos [2] = '{0, 0};
    int unsigned m0;
    m0 = slot_misses;
    halted = 0;
    for (int unsigned n = 0; n < 1200; n++) begin
      int unsigned tsk, g, t;
      logic [31:0] i, a, b, c;
      tsk = (n / q) % 2;                     // round-robin time slices
      g = task_group(tsk, pos[tsk]++);
      i = make_insn(g, $urandom);
      a = $urandom; b = $urandom; c = $urandom;
      in_valid = 1; insn = i; rs1 = a; rs2 = b; rs3 = c;
      #1;
      while (!in_ready) begin @(negedge clk); #1; halted++; end
      @(negedge clk);
      in_valid = 0;
      t = 0;
      while (!res_valid && t < 50) begin @(negedge clk); t++; end
      chk($sformatf("Q=%0d insn %0d group %0d", q, n, g), res_data, group_ref(g, i, a, b, c));
      @(negedge clk);
    end
    misses = slot_misses - m0;
  endtask

  initial begin
    int unsigned m_short, h_short, m_long, h_long;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(8, m_short, h_short);
    run(200, m_long, h_long);
    $display("quantum 8: %0d slot misses, %0d halted cycles", m_short, h_short);
    $display("quantum 200: %0d slot misses, %0d halted cycles", m_long, h_long);
    chk("longer quantum, fewer slot misses", 32'(m_long < m_short), 1);
    chk("longer quantum, fewer halted cycles", 32'(h_long < h_short), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
