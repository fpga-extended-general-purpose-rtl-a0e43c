// insn_group_decoder -- finds the reconfigurable group of an RV32 instruction.
//
// The extension instructions are not hardened in the core: they are grouped
// by logic similarity into reconfigurable regions, three for the M extension
// and seven for single-precision F, and each group is one bitstream. This
// purely combinational decoder looks at the major opcode, funct3, funct7 (or
// its upper five bits for OP-FP) and the rs2 field where it selects a
// variant, and returns the group number that the instruction disambiguator
// uses as its tag. Instructions outside the ten groups (the base ISA, flw/fsw,
// fmv and fclass) give is_ext = 0 and stay on the hardened datapath.
//
// The grouping follows the paper. Which F instructions fall outside every
// group (fmv.x.w, fmv.w.x, fclass.s) and the check of reserved funct3 values
// are this design's choices. Only the single-precision format (fmt = 00) is
// accepted.
//
// Interface: insn in, is_ext / group out, no clock.
module insn_group_decoder
  import fpga_ext_pkg::*;
(
  input  logic [XLEN-1:0]  insn,
  output logic             is_ext,
  output insn_group_e      group
);

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;
  logic [4:0] funct5;
  logic [1:0] fmt;
  logic [4:0] rs2f;

  assign opcode = insn[6:0];
  assign funct3 = insn[14:12];
  assign funct7 = insn[31:25];
  assign funct5 = insn[31:27];
  assign fmt    = insn[26:25];
  assign rs2f   = insn[24:20];

  always_comb begin
    is_ext = 1'b0;
    group  = G_MUL;
    unique case (opcode)
      OPC_OP: begin
        if (funct7 == 7'b0000001) begin
          is_ext = 1'b1;
          unique case (funct3)
            3'd0, 3'd1, 3'd2, 3'd3: group = G_MUL;
            3'd4, 3'd5:             group = G_DIV;
            default:                group = G_REM;
          endcase
        end
      end
      OPC_OP_FP: begin
        if (fmt == 2'b00) begin
          unique case (funct5)
            5'b00000, 5'b00001: begin is_ext = 1'b1; group = G_FADD; end
            5'b00010:           begin is_ext = 1'b1; group = G_FMUL; end
            5'b00011:           begin is_ext = 1'b1; group = G_FDIV; end
            5'b00100:           begin is_ext = (funct3 <= 3'd2); group = G_FCMP; end  // fsgnj*
            5'b00101:           begin is_ext = (funct3 <= 3'd1); group = G_FCMP; end  // fmin/fmax
            5'b10100:           begin is_ext = (funct3 <= 3'd2); group = G_FCMP; end  // fle/flt/feq
            5'b01011:           begin is_ext = (rs2f == 5'd0);   group = G_FSQRT; end
            5'b11000, 5'b11010: begin is_ext = (rs2f <= 5'd1);   group = G_FCVT; end
            default: ;
          endcase
        end
      end
      OPC_FMADD, OPC_FMSUB, OPC_FNMSUB, OPC_FNMADD: begin
        if (fmt == 2'b00) begin
          is_ext = 1'b1;
          group  = G_FMA;
        end
      end
      default: ;
    endcase
  end

endmodule
