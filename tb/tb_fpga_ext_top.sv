// tb_fpga_ext_top -- end-to-end run of the FPGA-extension subsystem.
//
// A core model offers real RV32 M/F instruction encodings with random
// operands; the subsystem decodes them, fetches the group bitstreams from a
// memory model through the bitstream cache, configures the slots and
// executes. Every result is compared with the truth-table model of the
// group's test bitstream. The run is reduced (64-LUT fabric, 2-word chain,
// 8-block bitstream cache, so groups 8 and 9 conflict with 0 and 1 in the
// bitstream cache) to keep it short.
//
// Mechanisms counted, each of which must occur: slot hit, slot miss served
// by the bitstream cache, slot miss that also misses in the bitstream cache
// (memory refill), bitstream-cache conflict eviction, LRU eviction of a
// configured slot, core halt, one- and two-level fabric latency, partial
// decoding (one bitstream, two funct3 variants) and hardened instructions
// flagged as not extension. Timing checked: a hit is accepted in the cycle it
// is offered, the result comes L + 1 cycles later, and a slot miss that hits
// in the bitstream cache halts the core for exactly DEPTH + 3 cycles.
module tb_fpga_ext_top;
  import fpga_ext_pkg::*;
  import tb_fpga_pkg::*;

  localparam int unsigned NS = 4, N_L = 64, W = CFG_W, DEPTH = 2, BLOCKS = 8, MW = MEM_W;
  localparam int unsigned N_INSN = 400;
  localparam logic [31:0] BASE = 32'h0010_0000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, is_ext, halt, res_valid;
  logic [XLEN-1:0] insn = '0, rs1 = '0, rs2 = '0, rs3 = '0, res_data;
  logic [ADDR_W-1:0] bs_base = BASE;
  logic mem_req_valid, mem_req_ready, mem_rvalid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [MW-1:0] mem_rdata;
  logic [31:0] slot_hits, slot_misses, bs_hits, bs_misses;
  int unsigned n_req;

  fpga_ext_top #(.NS(NS), .N_L(N_L), .W(W), .DEPTH(DEPTH), .BLOCKS(BLOCKS), .MW(MW)) dut (.*);

  bs_mem_model #(.N_L(N_L), .W(W), .DEPTH(DEPTH), .MW(MW), .BASE(BASE)) u_mem (
    .clk, .rst_n, .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rvalid, .mem_rdata, .n_req);

`include "tb_fpga_ext_body.svh"

endmodule
