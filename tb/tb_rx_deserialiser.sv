// tb_rx_deserialiser: frames of 7 random words with random idle gaps must come out whole,
// word 0 in the low bits, with frame_done once per frame; a start marker inside a frame
// must set frame_err.
module tb_rx_deserialiser;
  logic clk = 0, rst = 1, v = 0, sof = 0;
  logic [31:0] d = 0;
  logic [223:0] frame, expf;
  logic done, err;
  int checks = 0, failures = 0, ndone = 0;

  rx_deserialiser #(.WORDS(7)) dut (.clk, .rst, .rx_data(d), .rx_valid(v), .rx_sof(sof),
                                    .frame_o(frame), .frame_done(done), .frame_err(err));
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (done && !rst) ndone++;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int f = 0; f < 50; f++) begin
      for (int w = 0; w < 7; w++) begin
        while ($urandom % 4 == 0) begin @(negedge clk) v = 0; sof = 0; end
        @(negedge clk) v = 1; sof = (w == 0); d = $urandom; expf[w*32 +: 32] = d;
      end
      @(negedge clk) v = 0; sof = 0;
      checks += 2;
      if (frame != expf) failures++;
      if (err) failures++;
    end
    @(negedge clk);
    checks++; if (ndone != 50) begin failures++; $display("FAIL ndone %0d", ndone); end
    // restart inside a frame
    @(negedge clk) v = 1; sof = 1;
    @(negedge clk) v = 1; sof = 0;
    @(negedge clk) v = 1; sof = 1;
    @(negedge clk) v = 0; sof = 0;
    @(negedge clk);
    checks++; if (!err) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
