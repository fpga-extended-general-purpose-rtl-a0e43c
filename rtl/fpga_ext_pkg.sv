// fpga_ext_pkg -- types and constants shared by the FPGA-extension subsystem.
//
// Holds the instruction-group encoding (the ten reconfigurable groups of the
// M and F extensions), the dimensions of a slot's configuration port and the
// bit layout of a slot bitstream as seen by the LUT fabric.
//
// Numbers that follow the paper: 10 groups, 4 instruction slots, a 1824-bit
// wide and 50-word deep configuration chain (91,200 configuration bits per
// slot), 1680 4-input LUTs, a 64-block bitstream cache and a 256-bit path to
// the rest of the memory hierarchy. The bitstream bit layout (truth table and
// input selects per LUT, output selects, latency field) and the 16 KiB
// alignment of bitstreams in memory are this design's own choices.
package fpga_ext_pkg;

  // ---- instruction groups (reconfigurable regions) ----------------------
  localparam int unsigned N_GROUPS = 10;
  localparam int unsigned GROUP_W  = 4;

  typedef enum logic [GROUP_W-1:0] {
    G_MUL   = 4'd0,  // mul, mulh, mulhsu, mulhu
    G_DIV   = 4'd1,  // div, divu
    G_REM   = 4'd2,  // rem, remu
    G_FADD  = 4'd3,  // fadd.s, fsub.s
    G_FMUL  = 4'd4,  // fmul.s
    G_FDIV  = 4'd5,  // fdiv.s
    G_FCMP  = 4'd6,  // fsgnj[n|x].s, fmin.s, fmax.s, fle.s, flt.s, feq.s
    G_FSQRT = 4'd7,  // fsqrt.s
    G_FCVT  = 4'd8,  // fcvt.w[u].s, fcvt.s.w[u]
    G_FMA   = 4'd9   // fmadd.s, fmsub.s, fnmsub.s, fnmadd.s
  } insn_group_e;

  // RV32 major opcodes, bits [6:0]
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_OP_FP  = 7'b1010011;
  localparam logic [6:0] OPC_FMADD  = 7'b1000011;
  localparam logic [6:0] OPC_FMSUB  = 7'b1000111;
  localparam logic [6:0] OPC_FNMSUB = 7'b1001011;
  localparam logic [6:0] OPC_FNMADD = 7'b1001111;

  // ---- core <-> slot datapath -------------------------------------------
  localparam int unsigned XLEN    = 32;
  localparam int unsigned N_SLOTS = 4;

  // ---- configuration port -------------------------------------------------
  localparam int unsigned CFG_W     = 1824;  // bits per configuration word
  localparam int unsigned CFG_DEPTH = 50;    // words per bitstream = reconfiguration cycles
  localparam int unsigned CFG_BITS  = CFG_W * CFG_DEPTH;  // 91,200

  // ---- LUT fabric and bitstream layout -------------------------------------
  localparam int unsigned N_LUTS   = 1680;
  localparam int unsigned LUT_K    = 4;
  localparam int unsigned SEL_W    = 8;       // width of one LUT input select
  localparam int unsigned N_FIN    = 4 * XLEN;  // fabric inputs: insn, rs1, rs2, rs3
  localparam int unsigned LUT_CFG_W = (1 << LUT_K) + LUT_K * SEL_W;  // 48 bits per LUT
  localparam int unsigned LAT_W    = 8;       // width of the latency field

  // Size of the used part of a bitstream for a fabric of n LUTs.
  function automatic int unsigned fabric_cfg_bits(int unsigned n);
    return n * LUT_CFG_W + XLEN * $clog2(n) + LAT_W;
  endfunction

  // ---- bitstream cache -----------------------------------------------------
  localparam int unsigned ADDR_W     = 32;
  localparam int unsigned MEM_W      = 256;  // refill path from L2
  localparam int unsigned BS_BLOCKS  = 64;   // bitstreams held
  localparam int unsigned BS_SHIFT   = 14;   // bitstreams aligned on 16 KiB

  // Number of MEM_W-bit beats that carry one bitstream.
  function automatic int unsigned bs_beats(int unsigned cfg_w, int unsigned depth,
                                           int unsigned mem_w);
    return (cfg_w * depth + mem_w - 1) / mem_w;
  endfunction

endpackage
