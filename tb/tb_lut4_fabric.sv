// tb_lut4_fabric -- configures a 64-LUT fabric with the test bitstream of
// each of the ten groups and checks the result against the truth-table model
// for random operands and instruction bits, exactly `latency` cycles after
// the inputs change. A further bitstream routes LUT 0 from LUT 63 (window
// wrap-around) and LUT 63 from rs1[5], checking the two-cycle path through
// the wrapped connection, and a bitstream of constant LUTs checks the output
// selects.
module tb_lut4_fabric;
  import fpga_ext_pkg::*;
  import tb_fpga_pkg::*;

  localparam int unsigned N = 64;

  logic clk = 0, rst_n = 0;
  cfg_t cfg_bits;
  logic [N_FIN-1:0] fin;
  logic [XLEN-1:0]  result;
  logic [LAT_W-1:0] latency;
  int checks = 0, failures = 0;

  lut4_fabric #(.N(N), .NBITS(CFG_BITS)) dut (.*);

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
    logic [31:0] insn, rs1, rs2, rs3;
    cfg_bits = '0;
    fin = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int unsigned g = 0; g < N_GROUPS; g++) begin
      cfg_bits = group_cfg(g, N);
      #1;
      chk("latency field", 32'(latency), group_lat(g));
      for (int t = 0; t < 20; t++) begin
        insn = $urandom; rs1 = $urandom; rs2 = $urandom; rs3 = $urandom;
        @(negedge clk);
        fin = {rs3, rs2, rs1, insn};
        repeat (group_lat(g)) @(negedge clk);
        chk($sformatf("group %0d", g), result, group_ref(g, insn, rs1, rs2, rs3));
      end
    end
    // wrap-around routing: LUT 63 = rs1[5]; LUT 0 = NOT LUT 63 (select 128+64-1)
    cfg_bits = '0;
    cfg_bits = set_lut(cfg_bits, 63, 16'hAAAA, sel_in(32 + 5), 0, 0, 0);
    cfg_bits = set_lut(cfg_bits, 0, 16'h5555, 32'(N_FIN + 64 - 1), 0, 0, 0);
    for (int unsigned b = 0; b < XLEN; b++) cfg_bits = set_out(cfg_bits, N, b, (b % 2) ? 63 : 0);
    cfg_bits = set_lat(cfg_bits, N, 2);
    for (int t = 0; t < 8; t++) begin
      rs1 = $urandom;
      @(negedge clk);
      fin = {96'(0), rs1} << 32;
      repeat (2) @(negedge clk);
      chk("wrap", result, rs1[5] ? 32'hAAAA_AAAA : 32'h5555_5555);
    end
    // output selects: LUT i is constant (i % 3 == 0); result bit b from LUT 2b
    cfg_bits = '0;
    for (int unsigned i = 0; i < N; i++)
      cfg_bits = set_lut(cfg_bits, i, (i % 3 == 0) ? 16'hFFFF : 16'h0000, 0, 0, 0, 0);
    for (int unsigned b = 0; b < XLEN; b++) cfg_bits = set_out(cfg_bits, N, b, 2 * b);
    repeat (2) @(negedge clk);
    begin
      logic [31:0] e;
      for (int unsigned b = 0; b < XLEN; b++) e[b] = ((2 * b) % 3 == 0);
      chk("output selects", result, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
