// tb_insn_group_decoder -- checks the group decoder against a table of
// RV32 encodings written out by mnemonic.
//
// Every instruction of the ten groups is built from its opcode, funct3,
// funct7 and rs2 fields (with random register fields) and must decode to its
// group; instructions that stay hardened (base ISA, flw/fsw, fmv, fclass,
// double precision, reserved funct3) must give is_ext = 0.
module tb_insn_group_decoder;
  import fpga_ext_pkg::*;

  logic [31:0]  insn;
  logic         is_ext;
  insn_group_e  group;
  int checks = 0, failures = 0;

  insn_group_decoder dut (.insn(insn), .is_ext(is_ext), .group(group));

  function automatic logic [31:0] enc(logic [6:0] f7, logic [4:0] rs2, logic [2:0] f3,
                                      logic [6:0] opc);
    logic [4:0] rd, rs1;
    rd  = 5'($urandom);
    rs1 = 5'($urandom);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction

  task automatic expect_grp(string name, logic [31:0] i, bit ext, int unsigned g);
    insn = i;
    #1;
    checks++;
    if (is_ext !== ext || (ext && group !== insn_group_e'(g))) begin
      failures++;
      $display("FAIL %s insn=%08h is_ext=%0d group=%0d expected ext=%0d group=%0d",
               name, i, is_ext, group, ext, g);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 8; rep++) begin
      logic [4:0] r2;
      r2 = 5'($urandom);
      // M extension: OP, funct7 = 0000001
      expect_grp("mul",    enc(7'h01, r2, 3'd0, 7'h33), 1, 0);
      expect_grp("mulh",   enc(7'h01, r2, 3'd1, 7'h33), 1, 0);
      expect_grp("mulhsu", enc(7'h01, r2, 3'd2, 7'h33), 1, 0);
      expect_grp("mulhu",  enc(7'h01, r2, 3'd3, 7'h33), 1, 0);
      expect_grp("div",    enc(7'h01, r2, 3'd4, 7'h33), 1, 1);
      expect_grp("divu",   enc(7'h01, r2, 3'd5, 7'h33), 1, 1);
      expect_grp("rem",    enc(7'h01, r2, 3'd6, 7'h33), 1, 2);
      expect_grp("remu",   enc(7'h01, r2, 3'd7, 7'h33), 1, 2);
      // F extension, OP-FP = 1010011, rm field random where it is a rounding mode
      expect_grp("fadd.s",  enc(7'h00, r2, 3'($urandom), 7'h53), 1, 3);
      expect_grp("fsub.s",  enc(7'h04, r2, 3'($urandom), 7'h53), 1, 3);
      expect_grp("fmul.s",  enc(7'h08, r2, 3'($urandom), 7'h53), 1, 4);
      expect_grp("fdiv.s",  enc(7'h0C, r2, 3'($urandom), 7'h53), 1, 5);
      expect_grp("fsgnj.s", enc(7'h10, r2, 3'd0, 7'h53), 1, 6);
      expect_grp("fsgnjn.s",enc(7'h10, r2, 3'd1, 7'h53), 1, 6);
      expect_grp("fsgnjx.s",enc(7'h10, r2, 3'd2, 7'h53), 1, 6);
      expect_grp("fmin.s",  enc(7'h14, r2, 3'd0, 7'h53), 1, 6);
      expect_grp("fmax.s",  enc(7'h14, r2, 3'd1, 7'h53), 1, 6);
      expect_grp("fle.s",   enc(7'h50, r2, 3'd0, 7'h53), 1, 6);
      expect_grp("flt.s",   enc(7'h50, r2, 3'd1, 7'h53), 1, 6);
      expect_grp("feq.s",   enc(7'h50, r2, 3'd2, 7'h53), 1, 6);
      expect_grp("fsqrt.s", enc(7'h2C, 5'd0, 3'($urandom), 7'h53), 1, 7);
      expect_grp("fcvt.w.s",  enc(7'h60, 5'd0, 3'($urandom), 7'h53), 1, 8);
      expect_grp("fcvt.wu.s", enc(7'h60, 5'd1, 3'($urandom), 7'h53), 1, 8);
      expect_grp("fcvt.s.w",  enc(7'h68, 5'd0, 3'($urandom), 7'h53), 1, 8);
      expect_grp("fcvt.s.wu", enc(7'h68, 5'd1, 3'($urandom), 7'h53), 1, 8);
      // R4-type fused multiply-add: rs3 in [31:27], fmt = 00 in [26:25]
      expect_grp("fmadd.s",  enc({5'($urandom), 2'b00}, r2, 3'($urandom), 7'h43), 1, 9);
      expect_grp("fmsub.s",  enc({5'($urandom), 2'b00}, r2, 3'($urandom), 7'h47), 1, 9);
      expect_grp("fnmsub.s", enc({5'($urandom), 2'b00}, r2, 3'($urandom), 7'h4B), 1, 9);
      expect_grp("fnmadd.s", enc({5'($urandom), 2'b00}, r2, 3'($urandom), 7'h4F), 1, 9);
      // hardened instructions
      expect_grp("add",      enc(7'h00, r2, 3'd0, 7'h33), 0, 0);
      expect_grp("sub",      enc(7'h20, r2, 3'd0, 7'h33), 0, 0);
      expect_grp("addi",     enc(7'($urandom), r2, 3'd0, 7'h13), 0, 0);
      expect_grp("lw",       enc(7'($urandom), r2, 3'd2, 7'h03), 0, 0);
      expect_grp("flw",      enc(7'($urandom), r2, 3'd2, 7'h07), 0, 0);
      expect_grp("fsw",      enc(7'($urandom), r2, 3'd2, 7'h27), 0, 0);
      expect_grp("fmv.x.w",  enc(7'h70, 5'd0, 3'd0, 7'h53), 0, 0);
      expect_grp("fclass.s", enc(7'h70, 5'd0, 3'd1, 7'h53), 0, 0);
      expect_grp("fmv.w.x",  enc(7'h78, 5'd0, 3'd0, 7'h53), 0, 0);
      expect_grp("fadd.d",   enc(7'h01, r2, 3'd0, 7'h53), 0, 0);
      expect_grp("fmadd.d",  enc({5'($urandom), 2'b01}, r2, 3'd0, 7'h43), 0, 0);
      expect_grp("fsgnj rsv",enc(7'h10, r2, 3'd3, 7'h53), 0, 0);
      expect_grp("fsqrt rs2",enc(7'h2C, 5'd1, 3'd0, 7'h53), 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
