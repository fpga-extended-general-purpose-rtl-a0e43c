// tb_bitstream_cache -- small cache (4 blocks of 4 x 100-bit words, 32-bit
// refill beats, 13 beats per block) against a responder that serves a
// different pseudo-random bitstream per block with random request delays and
// gaps between beats. Checks: refill address and count, every read-out word
// (so the gearbox packing), words forwarded during a refill, hits that issue
// no memory traffic, the hit timing (first word two cycles after the request
// is accepted, then one per cycle),
// direct-mapped conflicts and the hit/miss counters.
module tb_bitstream_cache;
  import fpga_ext_pkg::*;

  localparam int unsigned W = 100, DEPTH = 4, BLOCKS = 4, MW = 32;
  localparam int unsigned BEATS = (W * DEPTH + MW - 1) / MW;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  logic [ADDR_W-1:0] req_addr = '0;
  logic word_valid;
  logic [W-1:0] word;
  logic mem_req_valid, mem_req_ready = 0;
  logic [ADDR_W-1:0] mem_req_addr;
  logic mem_rvalid = 0;
  logic [MW-1:0] mem_rdata = '0;
  logic [31:0] hit_count, miss_count;
  int checks = 0, failures = 0;
  int n_mem = 0;
  int n_gaps = 0;   // words of a refill that arrived after a gap
  logic [ADDR_W-1:0] last_mem_addr;

  bitstream_cache #(.W(W), .DEPTH(DEPTH), .BLOCKS(BLOCKS), .MW(MW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [MW-1:0] beat_of(logic [31:0] blk, int unsigned beat);
    logic [31:0] h;
    h = blk * 32'h9E37_79B1 ^ (beat + 1) * 32'h85EB_CA6B;
    h = h ^ (h >> 15);
    h = h * 32'hC2B2_AE35;
    return h ^ (h >> 13);
  endfunction

  function automatic logic [W-1:0] word_of(logic [31:0] blk, int unsigned w);
    logic [BEATS*MW-1:0] img;
    for (int unsigned b = 0; b < BEATS; b++) img[b*MW +: MW] = beat_of(blk, b);
    return img[w*W +: W];
  endfunction

  // memory responder
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && mem_req_valid) begin
        logic [31:0] blk;
        blk = mem_req_addr >> BS_SHIFT;
        last_mem_addr = mem_req_addr;
        repeat ($urandom_range(0, 3)) @(posedge clk);
        mem_req_ready <= 1;
        @(posedge clk);
        mem_req_ready <= 0;
        n_mem++;
        repeat ($urandom_range(1, 4)) @(posedge clk);
        for (int unsigned b = 0; b < BEATS; ) begin
          if ($urandom_range(0, 3) == 0) mem_rvalid <= 0;
          else begin
            mem_rvalid <= 1;
            mem_rdata  <= beat_of(blk, b);
            b++;
          end
          @(posedge clk);
        end
        mem_rvalid <= 0;
      end
    end
  end

  task automatic chk(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Request a bitstream and check the words; expect_hit also checks timing
  // and that memory is left alone.
  task automatic fetch(logic [31:0] addr, bit expect_hit);
    int m0, t_acc, t;
    logic [31:0] blk;
    blk = addr >> BS_SHIFT;
    m0 = n_mem;
    @(negedge clk);
    req_valid = 1;
    req_addr  = addr;
    while (!req_ready) @(negedge clk);
    @(negedge clk);                    // accepted at the edge just passed
    req_valid = 0;
    req_addr  = $urandom;
    t = 1;
    while (!word_valid) begin @(negedge clk); t++; end
    if (expect_hit) chk("hit: first word 2 cycles after accept", 128'(t), 128'(2));
    for (int unsigned w = 0; w < DEPTH; w++) begin
      int gap;
      gap = 0;
      while (!word_valid && gap < 100) begin @(negedge clk); gap++; end
      if (expect_hit) chk($sformatf("hit: word %0d without gap", w), 128'(gap), 128'(0));
      else if (gap > 0) n_gaps++;
      chk($sformatf("block %0d word %0d", blk, w), 128'(word), 128'(word_of(blk, w)));
      @(negedge clk);
    end
    repeat (2) begin
      chk("no words after the block", 128'(word_valid), 128'(0));
      @(negedge clk);
    end
    if (expect_hit) chk("hit: no memory request", 128'(n_mem - m0), 128'(0));
    else begin
      chk("miss: one memory request", 128'(n_mem - m0), 128'(1));
      chk("miss: refill address", 128'(last_mem_addr), 128'({blk, 14'b0}));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fetch(32'h0001_4000, 0);        // block 5, index 1: miss
    fetch(32'h0001_4000, 1);        // hit
    fetch(32'h0001_4100, 1);        // inside the same bitstream: hit
    fetch(32'h0002_4000, 0);        // block 9, index 1: conflict miss
    fetch(32'h0001_4000, 0);        // block 5 was evicted
    fetch(32'h0001_8000, 0);        // block 6, index 2
    fetch(32'h0001_8000, 1);
    fetch(32'h0001_4000, 1);        // block 5 still present
    fetch(32'h0000_0000, 0);        // block 0, index 0
    fetch(32'h0000_C000, 0);        // block 3, index 3
    fetch(32'h0000_0000, 1);
    fetch(32'h0000_C000, 1);
    chk("hit counter", 128'(hit_count), 128'(6));
    chk("miss counter", 128'(miss_count), 128'(6));
    // with 32-bit beats and 100-bit words, forwarded refill words are spaced
    // by the refill pace: at least one gap must have been seen
    chk("refill words forwarded at refill pace", 128'(n_gaps > 0), 128'(1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
