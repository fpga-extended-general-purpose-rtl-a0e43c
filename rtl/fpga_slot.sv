// fpga_slot -- one reconfigurable instruction slot ("FPGA n" of the core).
//
// A slot is a small FPGA that implements one group of instructions at a
// time. It has two connections to the core side. The configuration port
// (cfg_en, cfg_word) shifts one CFG_W-bit word per cycle into the slot's
// configuration chain; a full bitstream is CFG_DEPTH words. The operand port
// (start, insn, rs1, rs2, rs3) hands the slot an instruction: the operands and
// the instruction word are latched, the registered LUT fabric works on them,
// and after the number of cycles stored in the bitstream's latency field
// (at least 1) the slot raises done for one cycle with the destination value
// on result.
//
// Timing: start in cycle t; done and result valid in cycle t + L + 1, where
// L = max(1, latency field). busy is high from t+1 until done. start while
// busy or while configuring is not allowed (asserted).
//
// The two connections, wide configuration bus and operand/result port,
// follow the paper; the operand latch and latency counter are this design's
// choice of how "returns a destination value after some cycles" is timed.
module fpga_slot
  import fpga_ext_pkg::*;
#(
  parameter int unsigned N_L   = fpga_ext_pkg::N_LUTS,
  parameter int unsigned W     = fpga_ext_pkg::CFG_W,
  parameter int unsigned DEPTH = fpga_ext_pkg::CFG_DEPTH
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration port
  input  logic             cfg_en,
  input  logic [W-1:0]     cfg_word,
  // operand / result port
  input  logic             start,
  input  logic [XLEN-1:0]  insn,
  input  logic [XLEN-1:0]  rs1,
  input  logic [XLEN-1:0]  rs2,
  input  logic [XLEN-1:0]  rs3,
  output logic             busy,
  output logic             done,
  output logic [XLEN-1:0]  result
);

  logic [W*DEPTH-1:0] cfg_bits;
  logic [N_FIN-1:0]   fin_q;
  logic [LAT_W-1:0]   latency, cnt_q;

  fpga_config_chain #(.W(W), .DEPTH(DEPTH)) u_chain (
    .clk      (clk),
    .shift_en (cfg_en),
    .cfg_word (cfg_word),
    .cfg_bits (cfg_bits)
  );

  lut4_fabric #(.N(N_L), .NBITS(W*DEPTH)) u_fabric (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg_bits (cfg_bits),
    .fin      (fin_q),
    .result   (result),
    .latency  (latency)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin_q <= '0;
      cnt_q <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        fin_q <= {rs3, rs2, rs1, insn};
        cnt_q <= (latency == '0) ? LAT_W'(1) : latency;
        busy  <= 1'b1;
      end else if (busy) begin
        if (cnt_q == LAT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          cnt_q <= cnt_q - 1'b1;
        end
      end
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy && !cfg_en);

endmodule
