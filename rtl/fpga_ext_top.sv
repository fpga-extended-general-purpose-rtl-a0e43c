// fpga_ext_top -- FPGA-extension subsystem of an FPGA-extended core.
//
// Everything the architecture adds to a modified-Harvard core: the decoder
// that maps an instruction to its reconfigurable group, the instruction
// disambiguator (fully-associative tag array over the slots), NS FPGA
// instruction slots and the L1 bitstream cache beside the instruction and
// data caches.
//
//   decode --insn,rs1..rs3--> insn_group_decoder --group--> disambiguator
//   disambiguator --start/operands--> slot k --result--> disambiguator --> res
//   disambiguator --bitstream address--> bitstream_cache --words--> slot k
//   bitstream_cache --burst read--> rest of the memory hierarchy (mem_*)
//
// Core side: the core offers an instruction with in_valid. is_ext tells it,
// combinationally, whether the instruction belongs to one of the ten
// reconfigurable groups; only such instructions may be offered. The
// instruction is accepted when in_ready is high; until then halt is high and
// the core holds the instruction (pipeline stall). The result comes back on
// res_valid / res_data. bs_base is the byte address of the bitstream library:
// group g's bitstream is at bs_base + g * 2**BS_SHIFT.
//
// Memory side: a read burst of ceil(W*DEPTH/MW) beats per bitstream miss.
//
// The core pipeline, the L1 instruction and data caches and the rest of the
// memory hierarchy are outside this module; their connections are the ports.
module fpga_ext_top
  import fpga_ext_pkg::*;
#(
  parameter int unsigned NS     = fpga_ext_pkg::N_SLOTS,
  parameter int unsigned N_L    = fpga_ext_pkg::N_LUTS,
  parameter int unsigned W      = fpga_ext_pkg::CFG_W,
  parameter int unsigned DEPTH  = fpga_ext_pkg::CFG_DEPTH,
  parameter int unsigned BLOCKS = fpga_ext_pkg::BS_BLOCKS,
  parameter int unsigned MW     = fpga_ext_pkg::MEM_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // core
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [XLEN-1:0]    insn,
  input  logic [XLEN-1:0]    rs1,
  input  logic [XLEN-1:0]    rs2,
  input  logic [XLEN-1:0]    rs3,
  output logic               is_ext,
  output logic               halt,
  output logic               res_valid,
  output logic [XLEN-1:0]    res_data,
  input  logic [ADDR_W-1:0]  bs_base,
  // rest of the memory hierarchy
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [ADDR_W-1:0]  mem_req_addr,
  input  logic               mem_rvalid,
  input  logic [MW-1:0]      mem_rdata,
  // statistics
  output logic [31:0]        slot_hits,
  output logic [31:0]        slot_misses,
  output logic [31:0]        bs_hits,
  output logic [31:0]        bs_misses
);

  insn_group_e       group;
  logic              issue_valid;

  logic              bs_req_valid, bs_req_ready;
  logic [ADDR_W-1:0] bs_req_addr;
  logic              bs_word_valid;
  logic [W-1:0]      bs_word;

  logic [NS-1:0]     slot_cfg_en, slot_start, slot_done, slot_busy;
  logic [W-1:0]      slot_cfg_word;
  logic [XLEN-1:0]   slot_insn, slot_rs1, slot_rs2, slot_rs3;
  logic [XLEN-1:0]   slot_result [NS];

  insn_group_decoder u_dec (
    .insn   (insn),
    .is_ext (is_ext),
    .group  (group)
  );

  assign issue_valid = in_valid && is_ext;

  instruction_disambiguator #(
    .NS(NS), .TAG_W(GROUP_W), .W(W), .DEPTH(DEPTH)
  ) u_dis (
    .clk           (clk),
    .rst_n         (rst_n),
    .issue_valid   (issue_valid),
    .issue_ready   (in_ready),
    .issue_tag     (group),
    .insn          (insn),
    .rs1           (rs1),
    .rs2           (rs2),
    .rs3           (rs3),
    .halt          (halt),
    .res_valid     (res_valid),
    .res_data      (res_data),
    .bs_base       (bs_base),
    .bs_req_valid  (bs_req_valid),
    .bs_req_ready  (bs_req_ready),
    .bs_req_addr   (bs_req_addr),
    .bs_word_valid (bs_word_valid),
    .bs_word       (bs_word),
    .slot_cfg_en   (slot_cfg_en),
    .slot_cfg_word (slot_cfg_word),
    .slot_start    (slot_start),
    .slot_insn     (slot_insn),
    .slot_rs1      (slot_rs1),
    .slot_rs2      (slot_rs2),
    .slot_rs3      (slot_rs3),
    .slot_done     (slot_done),
    .slot_result   (slot_result),
    .hit_count     (slot_hits),
    .miss_count    (slot_misses)
  );

  for (genvar k = 0; k < NS; k++) begin : g_slot
    fpga_slot #(.N_L(N_L), .W(W), .DEPTH(DEPTH)) u_slot (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_en   (slot_cfg_en[k]),
      .cfg_word (slot_cfg_word),
      .start    (slot_start[k]),
      .insn     (slot_insn),
      .rs1      (slot_rs1),
      .rs2      (slot_rs2),
      .rs3      (slot_rs3),
      .busy     (slot_busy[k]),
      .done     (slot_done[k]),
      .result   (slot_result[k])
    );
  end

  bitstream_cache #(.W(W), .DEPTH(DEPTH), .BLOCKS(BLOCKS), .MW(MW)) u_bsc (
    .clk           (clk),
    .rst_n         (rst_n),
    .req_valid     (bs_req_valid),
    .req_ready     (bs_req_ready),
    .req_addr      (bs_req_addr),
    .word_valid    (bs_word_valid),
    .word          (bs_word),
    .mem_req_valid (mem_req_valid),
    .mem_req_ready (mem_req_ready),
    .mem_req_addr  (mem_req_addr),
    .mem_rvalid    (mem_rvalid),
    .mem_rdata     (mem_rdata),
    .hit_count     (bs_hits),
    .miss_count    (bs_misses)
  );

  // A slot is never started while another instruction is in flight.
  a_one_slot_busy: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(slot_busy));

endmodule
