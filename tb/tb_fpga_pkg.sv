// tb_fpga_pkg -- test bitstreams and their reference behaviour.
//
// The testbenches need bitstreams for the LUT fabric and an independent
// model of what each computes. For every instruction group g this package
// builds a small bit-sliced design and writes it in the fabric's bitstream
// layout (see lut4_fabric): per result bit b
//   even g: one LUT level,  rd[b] = TA(g)[{insn[12], rs3[b], rs2[b], rs1[b]}]
//   odd g:  two LUT levels, t[b]  = TA(g)[{insn[13], insn[12], rs2[b], rs1[b]}]
//                           rd[b] = TB(g)[{insn[14], rs1[(b+1)%32], rs3[b], t[b]}]
// so one bitstream behaves differently for different funct3 values, as the
// partial decoding of related instructions would. LUT b holds the first
// level, LUT 32+b the second (routed through the LUT window at offset -32);
// the latency field is the number of levels. group_ref computes the same
// function directly from the truth tables, without the fabric. make_insn
// draws a random RV32 instruction word of a given group, with random
// register fields and, where the group has several, a random funct3/funct5.
package tb_fpga_pkg;
  import fpga_ext_pkg::*;

  typedef logic [CFG_BITS-1:0] cfg_t;

  function automatic logic [15:0] tt_a(int unsigned g);
    return 16'((g + 1) * 32'h2F1D) ^ 16'h6996;
  endfunction

  function automatic logic [15:0] tt_b(int unsigned g);
    return 16'((g + 3) * 32'h4C5B) ^ 16'h1EE1;
  endfunction

  function automatic cfg_t put(cfg_t c, int unsigned ofs, int unsigned w, logic [31:0] v);
    for (int unsigned k = 0; k < w; k++) c[ofs + k] = v[k];
    return c;
  endfunction

  // Select code for fabric input bit k (0..31 insn, 32..63 rs1, ...).
  function automatic logic [31:0] sel_in(int unsigned k);
    return k;
  endfunction

  // Select code for LUT `from` as seen by LUT `at` (|from - at| < 64).
  function automatic logic [31:0] sel_lut(int unsigned at, int unsigned from);
    return 32'(N_FIN + 64 + int'(from) - int'(at));
  endfunction

  function automatic cfg_t set_lut(cfg_t c, int unsigned i, logic [15:0] tt,
                                   logic [31:0] s0, logic [31:0] s1,
                                   logic [31:0] s2, logic [31:0] s3);
    c = put(c, i * LUT_CFG_W, 16, 32'(tt));
    c = put(c, i * LUT_CFG_W + 16, SEL_W, s0);
    c = put(c, i * LUT_CFG_W + 16 + SEL_W, SEL_W, s1);
    c = put(c, i * LUT_CFG_W + 16 + 2 * SEL_W, SEL_W, s2);
    c = put(c, i * LUT_CFG_W + 16 + 3 * SEL_W, SEL_W, s3);
    return c;
  endfunction

  function automatic cfg_t set_out(cfg_t c, int unsigned n, int unsigned b, int unsigned lut);
    return put(c, n * LUT_CFG_W + b * $clog2(n), $clog2(n), lut);
  endfunction

  function automatic cfg_t set_lat(cfg_t c, int unsigned n, int unsigned lat);
    return put(c, n * LUT_CFG_W + XLEN * $clog2(n), LAT_W, lat);
  endfunction

  // Bitstream of group g for a fabric of n LUTs (n >= 64).
  function automatic cfg_t group_cfg(int unsigned g, int unsigned n);
    cfg_t c = '0;
    for (int unsigned b = 0; b < XLEN; b++) begin
      if (g % 2 == 0) begin
        c = set_lut(c, b, tt_a(g), sel_in(32 + b), sel_in(64 + b), sel_in(96 + b), sel_in(12));
        c = set_out(c, n, b, b);
      end else begin
        c = set_lut(c, b, tt_a(g), sel_in(32 + b), sel_in(64 + b), sel_in(12), sel_in(13));
        c = set_lut(c, 32 + b, tt_b(g), sel_lut(32 + b, b), sel_in(96 + b),
                    sel_in(32 + (b + 1) % 32), sel_in(14));
        c = set_out(c, n, b, 32 + b);
      end
    end
    c = set_lat(c, n, (g % 2 == 0) ? 1 : 2);
    return c;
  endfunction

  function automatic logic [XLEN-1:0] group_ref(int unsigned g, logic [31:0] insn,
                                                logic [31:0] rs1, logic [31:0] rs2,
                                                logic [31:0] rs3);
    logic [XLEN-1:0] rd;
    logic [15:0] ta, tb;
    ta = tt_a(g);
    tb = tt_b(g);
    for (int unsigned b = 0; b < XLEN; b++) begin
      if (g % 2 == 0) begin
        rd[b] = ta[{insn[12], rs3[b], rs2[b], rs1[b]}];
      end else begin
        logic t;
        t = ta[{insn[13], insn[12], rs2[b], rs1[b]}];
        rd[b] = tb[{insn[14], rs1[(b + 1) % 32], rs3[b], t}];
      end
    end
    return rd;
  endfunction

  function automatic int unsigned group_lat(int unsigned g);
    return (g % 2 == 0) ? 1 : 2;
  endfunction

  // A random RV32 instruction of group g, with funct3 variant `v` where the
  // group has several.
  function automatic logic [31:0] make_insn(int unsigned g, int unsigned v);
    logic [4:0] rd, r1, r2, r3;
    logic [2:0] rm;
    rd = 5'($urandom); r1 = 5'($urandom); r2 = 5'($urandom); r3 = 5'($urandom);
    rm = 3'($urandom_range(0, 4));
    case (g)
      0: return {7'h01, r2, r1, 3'(v % 4), rd, 7'h33};             // mul*
      1: return {7'h01, r2, r1, 3'(4 + v % 2), rd, 7'h33};         // div, divu
      2: return {7'h01, r2, r1, 3'(6 + v % 2), rd, 7'h33};         // rem, remu
      3: return {(v % 2) ? 7'h04 : 7'h00, r2, r1, rm, rd, 7'h53};  // fadd/fsub
      4: return {7'h08, r2, r1, rm, rd, 7'h53};                    // fmul
      5: return {7'h0C, r2, r1, rm, rd, 7'h53};                    // fdiv
      6: return {7'h10, r2, r1, 3'(v % 3), rd, 7'h53};             // fsgnj*
      7: return {7'h2C, 5'd0, r1, rm, rd, 7'h53};                  // fsqrt
      8: return {(v % 2) ? 7'h68 : 7'h60, 5'(v % 2), r1, rm, rd, 7'h53};  // fcvt
      default: return {r3, 2'b00, r2, r1, rm, rd, (v % 2) ? 7'h47 : 7'h43};  // fmadd/fmsub
    endcase
  endfunction

endpackage
