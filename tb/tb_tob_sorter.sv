// tb_tob_sorter: random candidate sets against a selection-sort model.
//
// Keys are drawn from a small range so that ties occur; the model repeatedly picks the
// valid candidate with the largest key, the lowest index winning ties, and the first 7
// picks must appear in the output slots in order, unused slots zero and invalid.
module tb_tob_sorter;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, bc_stb = 0;
  cand_t cand [128];
  tob_t  tob_o [7];
  logic  tob_v [7];
  int checks = 0, failures = 0;

  tob_sorter dut (.clk, .rst, .bc_stb, .cand, .tob_o, .tob_valid_o(tob_v));
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    for (int trial = 0; trial < 200; trial++) begin
      bit used [128];
      int nvalid;
      nvalid = 0;
      for (int i = 0; i < 128; i++) begin
        cand[i].valid = ($urandom % (trial % 4 == 0 ? 40 : 4)) == 0;
        cand[i].key   = cand[i].valid ? 24'($urandom % 30 + 1) : '0;
        cand[i].tob   = cand[i].valid ? {$urandom} | 32'h1 : '0;
        used[i] = 0;
      end
      @(negedge clk) bc_stb = 1; @(negedge clk) bc_stb = 0;
      for (int k = 0; k < 7; k++) begin
        int best;
        best = -1;
        for (int i = 0; i < 128; i++)
          if (cand[i].valid && !used[i] && (best < 0 || cand[i].key > cand[best].key)) best = i;
        checks++;
        if (best < 0) begin
          if (tob_v[k] || tob_o[k] != 0) failures++;
        end else begin
          used[best] = 1;
          if (!tob_v[k] || tob_o[k] != cand[best].tob) begin
            failures++;
            if (failures < 5) $display("FAIL trial %0d slot %0d got %h exp %h", trial, k, tob_o[k], cand[best].tob);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
