// fpga_config_chain -- configuration memory of one FPGA slot.
//
// The slot's configuration bits are held in a chain of shift registers,
// DEPTH words deep and W bits wide. Each cycle with shift_en high, the word on
// cfg_word enters stage 0 and every stage moves one place down the chain, so a
// whole bitstream of DEPTH words is loaded in DEPTH cycles over a W-bit port:
// with the defaults, 50 cycles over 1824 bits (91,200 bits). The full
// contents are presented in parallel on cfg_bits, ordered by arrival: the
// first word loaded is cfg_bits[W-1:0], the last is the top word.
//
// The shift-register chain and its 50 x 1824 size follow the paper's
// prototype, which uses it in place of an SRAM array with many bitlines and
// few wordlines. The chain is not reset: like configuration SRAM its contents
// are undefined until a bitstream has been loaded, and the slot is marked
// invalid until then.
module fpga_config_chain #(
  parameter int unsigned W     = fpga_ext_pkg::CFG_W,
  parameter int unsigned DEPTH = fpga_ext_pkg::CFG_DEPTH
) (
  input  logic               clk,
  input  logic               shift_en,
  input  logic [W-1:0]       cfg_word,
  output logic [W*DEPTH-1:0] cfg_bits
);

  logic [W-1:0] stage_q [DEPTH];

  always_ff @(posedge clk) begin
    if (shift_en) begin
      stage_q[0] <= cfg_word;
      for (int unsigned s = 1; s < DEPTH; s++) stage_q[s] <= stage_q[s-1];
    end
  end

  // Word w of the bitstream (w = 0 first) has travelled to stage DEPTH-1-w.
  always_comb begin
    for (int unsigned w = 0; w < DEPTH; w++)
      cfg_bits[w*W +: W] = stage_q[DEPTH-1-w];
  end

endmodule
