// tb_latency_buffer: each BC writes a fresh random word; L1As at random BCs with random
// latencies must return exactly the word written that many BCs earlier, including reads
// that wrap around the end of the buffer.
module tb_latency_buffer;
  logic clk = 0, rst = 1, bc_stb = 0, l1a = 0, rv;
  logic [63:0] wd, rd;
  logic [6:0]  lat;
  logic [63:0] hist [$];
  int checks = 0, failures = 0, nread = 0;

  latency_buffer #(.DEPTH(128), .WIDTH(64)) dut (.clk, .rst, .bc_stb, .wr_data(wd), .l1a,
                                                 .latency(lat), .rd_data(rd), .rd_valid(rv));
  always #5 clk = ~clk;
  initial begin #4000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [63:0] expd;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int bc = 0; bc < 600; bc++) begin
      wd = {$urandom, $urandom};
      hist.push_back(wd);
      bc_stb = 1;
      lat = 7'($urandom % 127 + 1);
      l1a = (bc > 130) && ($urandom % 5 == 0);
      if (l1a) expd = hist[hist.size() - 1 - lat];
      @(negedge clk);
      bc_stb = 0;
      if (l1a) begin
        checks++; nread++;
        if (!rv || rd != expd) begin failures++; if (failures < 5) $display("FAIL bc %0d lat %0d", bc, lat); end
      end else begin
        checks++; if (rv) failures++;
      end
      l1a = 0;
      @(negedge clk);
    end
    checks++; if (nread < 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
