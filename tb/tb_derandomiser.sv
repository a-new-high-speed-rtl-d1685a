// tb_derandomiser: bursts of events into a 4-deep queue with 5-word events.
//
// Every event must come out as header {8'hDA, l1id, bcid} and its words in order, with
// sop/eop framing; busy must rise at 3 stored events and a push into a full queue must be
// counted as overflow and lose only that event (its L1ID is skipped).
module tb_derandomiser;
  logic clk = 0, rst = 1, push = 0;
  logic [159:0] ev;
  logic [11:0] bcid;
  logic [31:0] rd;
  logic rv, sop, eop, busy;
  logic [15:0] ovf;
  int checks = 0, failures = 0, nbusy = 0;
  logic [31:0] expq [$];

  derandomiser #(.DEPTH(4), .WORDS(5)) dut (.clk, .rst, .push, .event_i(ev), .bcid_i(bcid),
      .rod_data(rd), .rod_valid(rv), .rod_sop(sop), .rod_eop(eop), .busy, .overflow_cnt(ovf));
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int widx = 0;
  always @(posedge clk) if (!rst) begin
    if (busy) nbusy++;
    if (rv) begin
      logic [31:0] e;
      e = expq.pop_front();
      checks++;
      if (rd != e || sop != (widx == 0) || eop != (widx == 5)) begin
        failures++; if (failures < 5) $display("FAIL got %h exp %h w %0d", rd, e, widx); end
      widx = (widx == 5) ? 0 : widx + 1;
    end
  end

  initial begin
    int l1id, nlost;
    l1id = 0; nlost = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 60; n++) begin
      ev = {$urandom, $urandom, $urandom, $urandom, $urandom};
      bcid = 12'($urandom % 3564);
      push = 1;
      if (!(dut.count == 3'd4)) begin
        expq.push_back({8'hDA, 12'(l1id), bcid});
        for (int w = 0; w < 5; w++) expq.push_back(ev[w*32 +: 32]);
      end else nlost++;
      l1id++;
      @(negedge clk) push = 0;
      repeat ((n % 20 < 10) ? 0 : 8) @(negedge clk);   // bursts, then gaps
    end
    repeat (200) @(negedge clk);
    checks += 3;
    if (expq.size() != 0) failures++;
    if (int'(ovf) != nlost || nlost == 0) begin failures++; $display("FAIL overflow %0d exp %0d", ovf, nlost); end
    if (nbusy == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
