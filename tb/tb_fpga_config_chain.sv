// tb_fpga_config_chain -- loads random words into a 16 x 5 chain and checks
// the parallel view: the word shifted in first must sit in the lowest W
// bits, the chain must hold still while shift_en is low, and a second load
// must completely replace the first.
module tb_fpga_config_chain;
  localparam int unsigned W = 16, DEPTH = 5;
  logic clk = 0, shift_en = 0;
  logic [W-1:0] cfg_word = '0;
  logic [W*DEPTH-1:0] cfg_bits;
  int checks = 0, failures = 0;

  fpga_config_chain #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input logic [W-1:0] words [DEPTH]);
    for (int unsigned w = 0; w < DEPTH; w++) begin
      // an idle cycle in between must not disturb the chain
      if (w == 2) begin
        @(negedge clk);
        shift_en = 1'b0;
        cfg_word = 16'hDEAD;
      end
      @(negedge clk);
      shift_en = 1'b1;
      cfg_word = words[w];
    end
    @(negedge clk);
    shift_en = 1'b0;
    cfg_word = $urandom;
  endtask

  task automatic check(input logic [W-1:0] words [DEPTH]);
    for (int unsigned w = 0; w < DEPTH; w++) begin
      checks++;
      if (cfg_bits[w*W +: W] !== words[w]) begin
        failures++;
        $display("FAIL word %0d = %h, expected %h", w, cfg_bits[w*W +: W], words[w]);
      end
    end
  endtask

  initial begin
    logic [W-1:0] a [DEPTH], b [DEPTH];
    for (int unsigned w = 0; w < DEPTH; w++) begin
      a[w] = W'($urandom);
      b[w] = W'($urandom);
    end
    load(a);
    check(a);
    repeat (3) @(negedge clk);
    check(a);                 // holds without shift_en
    load(b);
    check(b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
