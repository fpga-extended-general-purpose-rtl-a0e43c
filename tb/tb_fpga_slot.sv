// tb_fpga_slot -- loads each group's test bitstream through the slot's
// configuration port (1824-bit words, a 2-word chain, enough for a 64-LUT
// fabric), issues random instructions and checks the result and its timing:
// done must rise exactly L + 1 cycles after start, for one cycle, with busy
// high in between.
module tb_fpga_slot;
  import fpga_ext_pkg::*;
  import tb_fpga_pkg::*;

  localparam int unsigned N = 64, W = CFG_W, DEPTH = 2;

  logic clk = 0, rst_n = 0;
  logic cfg_en = 0, start = 0;
  logic [W-1:0] cfg_word = '0;
  logic [XLEN-1:0] insn = '0, rs1 = '0, rs2 = '0, rs3 = '0, result;
  logic busy, done;
  int checks = 0, failures = 0;

  fpga_slot #(.N_L(N), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

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
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    cfg_t c;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int unsigned g = 0; g < N_GROUPS; g++) begin
      c = group_cfg(g, N);
      for (int unsigned w = 0; w < DEPTH; w++) begin
        @(negedge clk);
        cfg_en = 1;
        cfg_word = c[w*W +: W];
      end
      @(negedge clk);
      cfg_en = 0;
      for (int t = 0; t < 12; t++) begin
        int unsigned n;
        logic [31:0] ei, e1, e2, e3;
        start = 1;
        insn = $urandom; rs1 = $urandom; rs2 = $urandom; rs3 = $urandom;
        ei = insn; e1 = rs1; e2 = rs2; e3 = rs3;
        @(negedge clk);
        start = 0;
        insn = $urandom; rs1 = $urandom; // must not matter after start
        n = 1;
        while (!done && n < 20) begin
          chk("busy while working", 32'(busy), 1);
          @(negedge clk);
          n++;
        end
        chk($sformatf("group %0d cycles start->done", g), n, group_lat(g) + 1);
        chk($sformatf("group %0d result", g), result,
            group_ref(g, ei, e1, e2, e3));
        @(negedge clk);
        chk("done is a pulse", 32'(done), 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
