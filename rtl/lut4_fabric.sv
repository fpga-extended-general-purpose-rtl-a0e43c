// lut4_fabric -- the reconfigurable logic of one FPGA instruction slot.
//
// N_LUTS 4-input look-up tables, each followed by a flip-flop. Every LUT
// input is chosen by a full (binary-encoded) SEL_W-bit multiplexer rather than
// a one-hot switch: select values below N_FIN pick a fabric input bit (the
// instruction word, rs1, rs2 and rs3, 32 bits each, in that order), higher
// values pick the registered output of one of the 2**SEL_W - N_FIN LUTs in a
// window centred on the LUT itself (indices wrap around). Each of the XLEN
// result bits is taken from the registered output of any LUT. Because every
// LUT is registered, the fabric has no combinational loops whatever the
// bitstream says; logic k LUT levels deep is ready k cycles after the inputs
// are stable, and the bitstream carries that count in its latency field.
//
// Bitstream layout (bit offsets into cfg_bits):
//   LUT i at i*48:   [15:0] truth table, entry {in3,in2,in1,in0};
//                    [16+8j +: 8] select of input j (j = 0..3)
//   N_LUTS*48:       XLEN output selects of $clog2(N_LUTS) bits, bit 0 first
//   then:            LAT_W-bit latency field (LUT levels of the design)
// With the default 1680 LUTs this uses 81,000 of the 91,200 bits of the
// 1824 x 50 configuration chain; the remainder is ignored.
//
// From the paper: 4-LUTs, 1680 of them, full-mux routing, no block RAM or DSP
// blocks, three source operands plus instruction bits as inputs (allowing
// partial decoding, one bitstream for several related instructions), and a
// result that arrives after some cycles. The windowed routing, registered
// LUTs and the bit layout are this design's own simplification of the
// tile-based fabric, whose routing the paper does not describe.
//
// Timing: lut_q updates on every clock edge; result is combinational from
// lut_q.
module lut4_fabric
  import fpga_ext_pkg::*;
#(
  parameter int unsigned N       = fpga_ext_pkg::N_LUTS,
  parameter int unsigned NBITS   = fpga_ext_pkg::CFG_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NBITS-1:0]  cfg_bits,
  input  logic [N_FIN-1:0]  fin,       // {rs3, rs2, rs1, insn}
  output logic [XLEN-1:0]   result,
  output logic [LAT_W-1:0]  latency
);

  localparam int unsigned OSEL_W  = $clog2(N);
  localparam int unsigned OUT_OFS = N * LUT_CFG_W;
  localparam int unsigned LAT_OFS = OUT_OFS + XLEN * OSEL_W;
  localparam int unsigned HALFWIN = ((1 << SEL_W) - N_FIN) / 2;

  initial begin
    if (fabric_cfg_bits(N) > NBITS)
      $fatal(1, "lut4_fabric: %0d LUTs need %0d configuration bits, only %0d given",
             N, fabric_cfg_bits(N), NBITS);
  end

  logic [N-1:0] lut_q, lut_d;

  // Value seen by LUT `i` on an input whose select is `sel`.
  function automatic logic route(input int unsigned i, input logic [SEL_W-1:0] sel,
                                 input logic [N_FIN-1:0] f, input logic [N-1:0] q);
    int unsigned src;
    if (sel < SEL_W'(N_FIN)) return f[sel[$clog2(N_FIN)-1:0]];
    src = (i + N * (HALFWIN / N + 1) + int'(sel) - N_FIN - HALFWIN) % N;
    return q[src];
  endfunction

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      logic [15:0] tt;
      logic [3:0]  a;
      tt = cfg_bits[i*LUT_CFG_W +: 16];
      for (int unsigned j = 0; j < LUT_K; j++)
        a[j] = route(i, cfg_bits[i*LUT_CFG_W + 16 + j*SEL_W +: SEL_W], fin, lut_q);
      lut_d[i] = tt[a];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lut_q <= '0;
    else        lut_q <= lut_d;
  end

  always_comb begin
    for (int unsigned b = 0; b < XLEN; b++) begin
      logic [OSEL_W-1:0] os;
      os = cfg_bits[OUT_OFS + b*OSEL_W +: OSEL_W];
      result[b] = (int'(os) < N) ? lut_q[os] : 1'b0;
    end
    latency = cfg_bits[LAT_OFS +: LAT_W];
  end

endmodule
