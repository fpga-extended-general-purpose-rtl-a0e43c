// bitstream_cache -- level-1 cache for FPGA bitstreams.
//
// A separate L1 cache next to the instruction and data caches, holding whole
// bitstreams as blocks. Each block is one bitstream of DEPTH configuration
// words of W bits (defaults 50 x 1824 = 91,200 bits), and there are BLOCKS of
// them (default 64). A request carries the byte address of a bitstream;
// bitstreams are aligned on 2**BS_SHIFT bytes, so the block number is
// addr >> BS_SHIFT. The cache is direct-mapped on the low bits of the block
// number.
//
//   hit  - the block is read out one configuration word per cycle on
//          word_valid / word, DEPTH cycles in a row, first word first;
//   miss - one read burst of BEATS = ceil(W*DEPTH / MEM_W) beats is
//          requested from the rest of the memory hierarchy (mem_req_*,
//          mem_rvalid / mem_rdata, beats in address order, bit 0 of the
//          bitstream in bit 0 of the first beat). A gearbox packs the MEM_W-bit
//          beats into W-bit words and writes each into the data array as soon
//          as it is complete. The block is then read out as on a hit.
//
// Timing: req accepted in cycle t (req_ready is high only when idle); on a
// hit the first word is valid in cycle t+2 and the last in t+DEPTH+1. On a
// miss, mem_req_valid rises in t+1 and read-out starts two cycles after the
// last beat. The consumer must take a word every cycle (no back-pressure).
//
// From the paper: a separate bitstream cache, 64 blocks of about 12 KB,
// wide words towards the disambiguator and a 128/256-bit path to L2,
// read-only from the FPGA's side (no write-back). This design's choices:
// direct mapping, the 16 KiB alignment and the burst interface. Forwarding
// words during a refill follows the paper's remark that progressively loaded
// bitstream blocks are meaningful.
module bitstream_cache
  import fpga_ext_pkg::*;
#(
  parameter int unsigned W      = fpga_ext_pkg::CFG_W,
  parameter int unsigned DEPTH  = fpga_ext_pkg::CFG_DEPTH,
  parameter int unsigned BLOCKS = fpga_ext_pkg::BS_BLOCKS,
  parameter int unsigned MW     = fpga_ext_pkg::MEM_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // request from the instruction disambiguator
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [ADDR_W-1:0]  req_addr,
  output logic               word_valid,
  output logic [W-1:0]       word,
  // refill from the rest of the memory hierarchy
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [ADDR_W-1:0]  mem_req_addr,
  input  logic               mem_rvalid,
  input  logic [MW-1:0]      mem_rdata,
  // statistics
  output logic [31:0]        hit_count,
  output logic [31:0]        miss_count
);

  localparam int unsigned BEATS  = bs_beats(W, DEPTH, MW);
  localparam int unsigned IDX_W  = (BLOCKS > 1) ? $clog2(BLOCKS) : 1;
  localparam int unsigned BLK_W  = ADDR_W - BS_SHIFT;
  localparam int unsigned TAG_W  = BLK_W - IDX_W;
  localparam int unsigned WA_W   = $clog2(BLOCKS * DEPTH);
  localparam int unsigned WC_W   = $clog2(DEPTH + 1);
  localparam int unsigned BC_W   = $clog2(BEATS + 1);
  localparam int unsigned ACC_W  = W + MW;
  localparam int unsigned FILL_W = $clog2(ACC_W + 1);

  typedef enum logic [1:0] {C_IDLE, C_MEMREQ, C_FILL, C_READ} cstate_e;

  cstate_e            state_q;
  logic [BLOCKS-1:0]  valid_q;
  logic [TAG_W-1:0]   tag_q [BLOCKS];
  logic [W-1:0]       data_q [BLOCKS * DEPTH];

  logic [BLK_W-1:0]   blk_q;
  logic [IDX_W-1:0]   idx_q;
  logic [WC_W-1:0]    rcnt_q, wcnt_q;
  logic [BC_W-1:0]    bcnt_q;
  logic [ACC_W-1:0]   acc_q;
  logic [FILL_W-1:0]  fill_q;

  logic [BLK_W-1:0]   req_blk;
  logic [IDX_W-1:0]   req_idx;
  logic               req_hit;

  assign req_blk = req_addr[ADDR_W-1:BS_SHIFT];
  assign req_idx = IDX_W'(req_blk);
  assign req_hit = valid_q[req_idx] && tag_q[req_idx] == TAG_W'(req_blk >> IDX_W);

  assign req_ready     = (state_q == C_IDLE);
  assign mem_req_valid = (state_q == C_MEMREQ);
  assign mem_req_addr  = {blk_q, {BS_SHIFT{1'b0}}};

  // ---- gearbox: MW-bit beats -> W-bit words ---------------------------------
  logic [ACC_W-1:0]   acc_in;
  logic [FILL_W-1:0]  fill_in;
  logic               wr_en;

  always_comb begin
    acc_in  = acc_q | (ACC_W'(mem_rdata) << fill_q);
    fill_in = fill_q + FILL_W'(MW);
    wr_en   = (state_q == C_FILL) && mem_rvalid && fill_in >= FILL_W'(W)
              && wcnt_q < WC_W'(DEPTH);
  end

  // ---- data array: one write port (refill), one read port (read-out) --------
  logic             rd_en;
  logic [WA_W-1:0]  rd_addr, wr_addr;

  assign rd_en   = (state_q == C_READ);
  assign rd_addr = WA_W'(idx_q) * WA_W'(DEPTH) + WA_W'(rcnt_q);
  assign wr_addr = WA_W'(idx_q) * WA_W'(DEPTH) + WA_W'(wcnt_q);

  always_ff @(posedge clk) begin
    if (wr_en) data_q[wr_addr] <= acc_in[W-1:0];
  end

  // read-out on a hit, or the word just completed by the gearbox on a miss
  always_ff @(posedge clk) begin
    if (rd_en)      word <= data_q[rd_addr];
    else if (wr_en) word <= acc_in[W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) word_valid <= 1'b0;
    else        word_valid <= rd_en || wr_en;
  end

  // ---- control -----------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= C_IDLE;
      valid_q    <= '0;
      for (int unsigned b = 0; b < BLOCKS; b++) tag_q[b] <= '0;
      blk_q      <= '0;
      idx_q      <= '0;
      rcnt_q     <= '0;
      wcnt_q     <= '0;
      bcnt_q     <= '0;
      acc_q      <= '0;
      fill_q     <= '0;
      hit_count  <= '0;
      miss_count <= '0;
    end else begin
      unique case (state_q)
        C_IDLE: if (req_valid) begin
          blk_q  <= req_blk;
          idx_q  <= req_idx;
          rcnt_q <= '0;
          if (req_hit) begin
            state_q   <= C_READ;
            hit_count <= hit_count + 1;
          end else begin
            valid_q[req_idx] <= 1'b0;
            state_q          <= C_MEMREQ;
            miss_count       <= miss_count + 1;
          end
        end
        C_MEMREQ: if (mem_req_ready) begin
          wcnt_q  <= '0;
          bcnt_q  <= '0;
          acc_q   <= '0;
          fill_q  <= '0;
          state_q <= C_FILL;
        end
        C_FILL: if (mem_rvalid) begin
          bcnt_q <= bcnt_q + 1'b1;
          if (fill_in >= FILL_W'(W)) begin
            acc_q  <= acc_in >> W;
            fill_q <= fill_in - FILL_W'(W);
            if (wcnt_q < WC_W'(DEPTH)) wcnt_q <= wcnt_q + 1'b1;
          end else begin
            acc_q  <= acc_in;
            fill_q <= fill_in;
          end
          if (bcnt_q == BC_W'(BEATS - 1)) begin
            valid_q[idx_q] <= 1'b1;
            tag_q[idx_q]   <= TAG_W'(blk_q >> IDX_W);
            state_q        <= C_IDLE;
          end
        end
        C_READ: begin
          rcnt_q <= rcnt_q + 1'b1;
          if (rcnt_q == WC_W'(DEPTH - 1)) state_q <= C_IDLE;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  a_rvalid_only_in_fill: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rvalid |-> state_q == C_FILL);
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid);

endmodule
