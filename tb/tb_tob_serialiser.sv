// tb_tob_serialiser: after each strobe the link must carry the 7 TOBs in order and then
// the trailer {12'd0, bcid, 8'hBC} with charisk 0001, one word per clock, 8 words per BC.
module tb_tob_serialiser;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, bc_stb = 0;
  tob_t tob [7];
  logic [11:0] bcid;
  logic [31:0] txd;
  logic [3:0]  txk;
  int checks = 0, failures = 0;

  tob_serialiser dut (.clk, .rst, .bc_stb, .tob_i(tob), .bcid, .tx_data(txd), .tx_charisk(txk));
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    tob_t exp_w [8];
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int bc = 0; bc < 30; bc++) begin
      for (int i = 0; i < 7; i++) begin tob[i] = $urandom; exp_w[i] = tob[i]; end
      bcid = 12'($urandom % 3564);
      exp_w[7] = {12'd0, bcid, 8'hBC};
      bc_stb = 1;
      @(negedge clk) bc_stb = 0;
      for (int w = 0; w < 8; w++) begin
        checks++;
        if (txd != exp_w[w] || txk != (w == 7 ? 4'b0001 : 4'b0000)) begin
          failures++;
          if (failures < 5) $display("FAIL bc %0d word %0d got %h exp %h", bc, w, txd, exp_w[w]);
        end
        if (w < 7) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
