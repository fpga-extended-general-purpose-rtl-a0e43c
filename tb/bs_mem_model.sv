// bs_mem_model -- behavioural model of the rest of the memory hierarchy as
// seen by the bitstream cache (not synthesizable; testbench use only).
//
// Holds, for every instruction group g, the test bitstream of tb_fpga_pkg at
// byte address BASE + g * 2**BS_SHIFT. A read request is accepted after
// REQ_WAIT cycles; after FIRST_LAT more cycles the burst of
// ceil(W*DEPTH/MW) beats follows, one beat per cycle except that every
// GAP_EVERY-th cycle (if non-zero) carries no beat. Addresses outside the
// library return zeros. Requests seen while rst_n is low are ignored.
// Counts requests in n_req.
module bs_mem_model
  import fpga_ext_pkg::*;
  import tb_fpga_pkg::*;
#(
  parameter int unsigned N_L       = 64,
  parameter int unsigned W         = CFG_W,
  parameter int unsigned DEPTH     = CFG_DEPTH,
  parameter int unsigned MW        = MEM_W,
  parameter logic [31:0] BASE      = 32'h0010_0000,
  parameter int unsigned REQ_WAIT  = 1,
  parameter int unsigned FIRST_LAT = 4,
  parameter int unsigned GAP_EVERY = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mem_req_valid,
  output logic              mem_req_ready,
  input  logic [ADDR_W-1:0] mem_req_addr,
  output logic              mem_rvalid,
  output logic [MW-1:0]     mem_rdata,
  output int unsigned       n_req
);
  localparam int unsigned BEATS = bs_beats(W, DEPTH, MW);

  cfg_t image [N_GROUPS];

  initial begin
    for (int unsigned g = 0; g < N_GROUPS; g++) image[g] = group_cfg(g, N_L);
    mem_req_ready = 1'b0;
    mem_rvalid    = 1'b0;
    mem_rdata     = '0;
    n_req         = 0;
    forever begin
      @(posedge clk);
      if (rst_n && mem_req_valid) begin
        logic [ADDR_W-1:0] a;
        int g;
        int unsigned beat, cyc, bitpos;
        logic [MW-1:0] d;
        a = mem_req_addr;
        repeat (REQ_WAIT) @(posedge clk);
        mem_req_ready <= 1'b1;
        @(posedge clk);
        mem_req_ready <= 1'b0;
        n_req++;
        g = int'((a - BASE) >> BS_SHIFT);
        repeat (FIRST_LAT) @(posedge clk);
        beat = 0;
        cyc  = 0;
        while (beat < BEATS) begin
          if (GAP_EVERY != 0 && cyc % GAP_EVERY == GAP_EVERY - 1) begin
            mem_rvalid <= 1'b0;
          end else begin
            mem_rvalid <= 1'b1;
            for (int unsigned k = 0; k < MW; k++) begin
              bitpos = beat * MW + k;
              d[k] = (a >= BASE && g < N_GROUPS && bitpos < W * DEPTH)
                     ? image[g][bitpos] : 1'b0;
            end
            mem_rdata <= d;
            beat++;
          end
          cyc++;
          @(posedge clk);
        end
        mem_rvalid <= 1'b0;
      end
    end
  end
endmodule
