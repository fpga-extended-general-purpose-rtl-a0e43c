// instruction_disambiguator -- L0 "cache" of instruction implementations.
//
// A fully-associative tag array with one entry per FPGA slot. The tag of an
// entry is the instruction group (from insn_group_decoder) whose bitstream the
// slot currently holds. On every extension instruction offered by decode
// (issue_valid) all valid tags are compared with issue_tag:
//   hit  - the instruction is accepted (issue_ready), its word and source
//          operands are steered to the hit slot (slot_start one-hot, operands
//          broadcast), and the slot's result is multiplexed back onto
//          res_data when that slot signals done;
//   miss - a slot is chosen (an invalid one if any, otherwise the least
//          recently used), its tag is invalidated, and the bitstream is
//          requested from the bitstream cache at
//          bs_base + (issue_tag << BS_SHIFT). The CFG_DEPTH words that come
//          back are shifted into the chosen slot, the tag is written, and
//          the still-pending instruction then hits.
// While an instruction is pending but not accepted, halt is high and the core
// must hold the instruction (asserted). One instruction is in flight at a
// time.
//
// Timing: a hit is accepted in the cycle it is offered; res_valid follows
// L + 1 cycles later (L = slot latency). A miss served from the bitstream
// cache costs 1 cycle to request, the cache's lookup cycle(s) and CFG_DEPTH
// cycles of configuration words, after which the instruction is accepted.
//
// From the paper: fully-associative, opcode tags, request on miss, operand
// and output multiplexing by hit location, halt while busy, tags per group
// of the evaluation. This design's choices: LRU replacement, the bitstream
// address formula (bases of bitstream libraries are not specified), one
// instruction in flight, no result back-pressure.
module instruction_disambiguator
  import fpga_ext_pkg::*;
#(
  parameter int unsigned NS    = fpga_ext_pkg::N_SLOTS,
  parameter int unsigned TAG_W = fpga_ext_pkg::GROUP_W,
  parameter int unsigned W     = fpga_ext_pkg::CFG_W,
  parameter int unsigned DEPTH = fpga_ext_pkg::CFG_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from decode
  input  logic                  issue_valid,
  output logic                  issue_ready,
  input  logic [TAG_W-1:0]      issue_tag,
  input  logic [XLEN-1:0]       insn,
  input  logic [XLEN-1:0]       rs1,
  input  logic [XLEN-1:0]       rs2,
  input  logic [XLEN-1:0]       rs3,
  output logic                  halt,
  // to write-back
  output logic                  res_valid,
  output logic [XLEN-1:0]       res_data,
  // bitstream cache
  input  logic [ADDR_W-1:0]     bs_base,
  output logic                  bs_req_valid,
  input  logic                  bs_req_ready,
  output logic [ADDR_W-1:0]     bs_req_addr,
  input  logic                  bs_word_valid,
  input  logic [W-1:0]          bs_word,
  // FPGA slots
  output logic [NS-1:0]         slot_cfg_en,
  output logic [W-1:0]          slot_cfg_word,
  output logic [NS-1:0]         slot_start,
  output logic [XLEN-1:0]       slot_insn,
  output logic [XLEN-1:0]       slot_rs1,
  output logic [XLEN-1:0]       slot_rs2,
  output logic [XLEN-1:0]       slot_rs3,
  input  logic [NS-1:0]         slot_done,
  input  logic [XLEN-1:0]       slot_result [NS],
  // statistics
  output logic [31:0]           hit_count,
  output logic [31:0]           miss_count
);

  localparam int unsigned IDX_W = (NS > 1) ? $clog2(NS) : 1;
  localparam int unsigned WC_W  = $clog2(DEPTH + 1);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_LOAD, S_EXEC} state_e;

  state_e             state_q;
  logic [NS-1:0]      valid_q;
  logic [TAG_W-1:0]   tag_q  [NS];
  logic [IDX_W-1:0]   age_q  [NS];   // 0 = most recently used
  logic [IDX_W-1:0]   slot_q;        // slot being loaded or executing
  logic [TAG_W-1:0]   load_tag_q;
  logic [WC_W-1:0]    wcnt_q;
  logic               refilled_q;    // next lookup follows our own refill

  // ---- tag lookup ------------------------------------------------------------
  logic               hit;
  logic [IDX_W-1:0]   hit_idx;
  logic [IDX_W-1:0]   victim;

  always_comb begin
    hit = 1'b0;
    hit_idx = '0;
    for (int unsigned s = 0; s < NS; s++)
      if (valid_q[s] && tag_q[s] == issue_tag) begin
        hit = 1'b1;
        hit_idx = IDX_W'(s);
      end
    victim = '0;
    for (int s = NS - 1; s >= 0; s--)
      if (age_q[s] == IDX_W'(NS - 1)) victim = IDX_W'(s);
    for (int s = NS - 1; s >= 0; s--)
      if (!valid_q[s]) victim = IDX_W'(s);
  end

  // ---- handshakes and steering --------------------------------------------
  assign issue_ready   = (state_q == S_IDLE) && hit;
  assign halt          = issue_valid && !issue_ready;
  assign bs_req_valid  = (state_q == S_REQ);
  assign bs_req_addr   = bs_base + (ADDR_W'(load_tag_q) << BS_SHIFT);
  assign slot_cfg_word = bs_word;
  assign slot_insn     = insn;
  assign slot_rs1      = rs1;
  assign slot_rs2      = rs2;
  assign slot_rs3      = rs3;
  assign res_valid     = (state_q == S_EXEC) && slot_done[slot_q];
  assign res_data      = slot_result[slot_q];

  always_comb begin
    slot_cfg_en = '0;
    slot_start  = '0;
    if (state_q == S_LOAD) slot_cfg_en[slot_q] = bs_word_valid;
    if (issue_valid && issue_ready) slot_start[hit_idx] = 1'b1;
  end

  // ---- LRU ages -------------------------------------------------------------------
  // On a use of slot u, entries younger than u age by one and u becomes the
  // youngest (age 0); the victim is the oldest (age NS-1).
  logic [IDX_W-1:0] age_d [NS];
  logic             touch_en;
  logic [IDX_W-1:0] touch_idx;

  always_comb begin
    touch_en  = 1'b0;
    touch_idx = hit_idx;
    if (state_q == S_IDLE && issue_valid && hit) begin
      touch_en = 1'b1;
    end else if (state_q == S_LOAD && bs_word_valid && wcnt_q == WC_W'(DEPTH - 1)) begin
      touch_en  = 1'b1;
      touch_idx = slot_q;
    end
    age_d = age_q;
    if (touch_en) begin
      for (int unsigned s = 0; s < NS; s++)
        if (age_q[s] < age_q[touch_idx]) age_d[s] = age_q[s] + 1'b1;
      age_d[touch_idx] = '0;
    end
  end

  // ---- state -------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      valid_q    <= '0;
      for (int unsigned s = 0; s < NS; s++) begin
        tag_q[s] <= '0;
        age_q[s] <= IDX_W'(s);
      end
      slot_q     <= '0;
      load_tag_q <= '0;
      wcnt_q     <= '0;
      refilled_q <= 1'b0;
      hit_count  <= '0;
      miss_count <= '0;
    end else begin
      age_q <= age_d;
      unique case (state_q)
        S_IDLE: if (issue_valid) begin
          if (hit) begin
            slot_q     <= hit_idx;
            state_q    <= S_EXEC;
            refilled_q <= 1'b0;
            if (!refilled_q) hit_count <= hit_count + 1;
          end else begin
            slot_q           <= victim;
            valid_q[victim]  <= 1'b0;
            load_tag_q       <= issue_tag;
            state_q          <= S_REQ;
            miss_count       <= miss_count + 1;
          end
        end
        S_REQ: if (bs_req_ready) begin
          wcnt_q  <= '0;
          state_q <= S_LOAD;
        end
        S_LOAD: if (bs_word_valid) begin
          wcnt_q <= wcnt_q + 1'b1;
          if (wcnt_q == WC_W'(DEPTH - 1)) begin
            valid_q[slot_q] <= 1'b1;
            tag_q[slot_q]   <= load_tag_q;
            refilled_q      <= 1'b1;
            state_q         <= S_IDLE;
          end
        end
        S_EXEC: if (slot_done[slot_q]) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---- protocol rules ------------------------------------------------------------
  a_hold_while_halted: assert property (@(posedge clk) disable iff (!rst_n)
    issue_valid && !issue_ready |=> issue_valid && $stable(issue_tag));
  a_words_only_when_loading: assert property (@(posedge clk) disable iff (!rst_n)
    bs_word_valid |-> state_q == S_LOAD);
  logic dup_tag;
  always_comb begin
    dup_tag = 1'b0;
    for (int unsigned s = 0; s < NS; s++)
      for (int unsigned t = s + 1; t < NS; t++)
        if (valid_q[s] && valid_q[t] && tag_q[s] == tag_q[t]) dup_tag = 1'b1;
  end
  a_unique_tags: assert property (@(posedge clk) disable iff (!rst_n) !dup_tag);

endmodule
