// tb_jfex_processor: one processor at its default size, fed through its 77 input links.
//
// Each BC a random sparse tower grid is packed into the link frames (10 towers of 21 bits
// per 7-word frame, tower t = eta*32 + phi) and sent word by word. The test keeps its own
// model of the chain: LAr codes below 1024 are linear (E = code - 128 in 25 MeV units),
// noise threshold 40 (LAr) and one count (Tile), pile-up pedestal rho[eta] = 3*eta written
// over the register bus, local maxima over 8 neighbours, R = 0.4 circle sums, selection
// of the 7 largest, plus the core E_T sum. It checks the small-jet stream and the sum E_T
// word on the output links, the fixed input-to-output latency (42 clocks, under 390 ns at
// 320 MHz), and the readout of events selected by L1A (header BCID, input words, TOBs).
module tb_jfex_processor;
  import jfex_pkg::*;
  localparam int NBC = 24, LAT = 10;

  logic clk = 0, rst = 1, bc_stb = 0, l1a = 0;
  logic [11:0] bcid = 0;
  logic [31:0] rx_data [N_LINKS];
  logic        rx_valid [N_LINKS], rx_sof [N_LINKS];
  logic        rx_err, cfg_we = 0;
  logic [7:0]  cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic [31:0] tx_data [N_TX];
  logic [3:0]  tx_charisk [N_TX];
  logic [31:0] rod_data;
  logic rod_valid, rod_sop, rod_eop, busy;
  logic [15:0] ovf;
  int checks = 0, failures = 0, cyc = 0;
  int n_jets = 0, n_suppressed = 0, n_pileup = 0, n_events = 0;

  jfex_processor dut (.clk, .rst, .bc_stb, .bcid, .rx_data, .rx_valid, .rx_sof, .rx_err,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .tx_data, .tx_charisk, .l1a,
    .rod_data, .rod_valid, .rod_sop, .rod_eop, .busy, .overflow_cnt(ovf));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [11:0] lc [NBC][ETA_N][PHI_N];
  logic [7:0]  tc [NBC][ETA_N][PHI_N];
  logic [31:0] exp_sj [NBC][7];
  logic [31:0] exp_sum [NBC];
  logic [TOWER_BITS*TOWERS_PER_LINK-1:0] pk;

  function automatic int tower(int b, int e, int p);
    int l, t;
    l = int'(lc[b][e][p]) - 128;
    if (l < 40) l = 0;
    l = l - 3 * e; if (l < 0) l = 0;
    t = 20 * int'(tc[b][e][p]);
    return l + t;
  endfunction

  task automatic model(int b);
    int et [ETA_N][PHI_N];
    int key [128]; bit val [128]; bit used [128];
    int s;
    s = 0;
    for (int e = 0; e < ETA_N; e++) for (int p = 0; p < PHI_N; p++) begin
      et[e][p] = tower(b, e, p);
      if (lc[b][e][p] >= 128 + 1 && lc[b][e][p] < 128 + 40) n_suppressed++;
      if (int'(lc[b][e][p]) - 128 >= 40 && int'(lc[b][e][p]) - 128 < 40 + 3 * e) n_pileup++;
    end
    for (int ce = 0; ce < 8; ce++) for (int cp = 0; cp < 16; cp++) begin
      int e, p, sum; bit seed;
      e = ce + 8; p = cp + 8;
      s += et[e][p];
      seed = et[e][p] > 200;
      for (int de = -1; de <= 1; de++) for (int dp = -1; dp <= 1; dp++)
        if (de < 0 || (de == 0 && dp < 0)) seed &= et[e][p] > et[e+de][p+dp];
        else if (de > 0 || dp > 0)         seed &= et[e][p] >= et[e+de][p+dp];
      sum = 0;
      for (int de = -4; de <= 4; de++) for (int dp = -4; dp <= 4; dp++)
        if (de*de + dp*dp <= 16) sum += et[e+de][p+dp];
      val[ce*16+cp] = seed; key[ce*16+cp] = sum; used[ce*16+cp] = 0;
    end
    exp_sum[b] = 32'(s >> 3);
    for (int k = 0; k < 7; k++) begin
      int best; best = -1;
      for (int i = 0; i < 128; i++) if (val[i] && !used[i] && (best < 0 || key[i] > key[best])) best = i;
      if (best < 0) exp_sj[b][k] = 0;
      else begin
        used[best] = 1; n_jets++;
        exp_sj[b][k] = {1'b0, 8'd0, 1'b0, 12'(key[best] >> 3), 5'(best % 16), 5'(best / 16)};
      end
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk) cfg_addr = a; cfg_wdata = d; cfg_we = 1;
    @(negedge clk) cfg_we = 0;
  endtask

  // ---------------- stimulus: BC b occupies cycles 8*b .. 8*b+7 after alignment
  int t0, last_word_cyc [NBC];
  initial begin
    for (int l = 0; l < N_LINKS; l++) begin rx_data[l] = 0; rx_valid[l] = 0; rx_sof[l] = 0; end
    for (int b = 0; b < NBC; b++) begin
      for (int e = 0; e < ETA_N; e++) for (int p = 0; p < PHI_N; p++) begin
        int r; r = $urandom % 12;
        lc[b][e][p] = (r == 0) ? 12'(128 + $urandom % 890) : (r < 4) ? 12'(118 + $urandom % 40) : 12'd128;
        tc[b][e][p] = ($urandom % 10 == 0) ? 8'($urandom % 30) : 8'd0;
      end
      model(b);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int e = 0; e < ETA_N; e++) wr(8'h20 + 8'(e), 32'(3 * e));
    wr(8'h05, LAT);
    // align to a BC boundary
    while (cyc % 8 != 7) @(negedge clk);
    @(negedge clk);
    t0 = cyc;
    for (int b = 0; b < NBC + LAT + 12; b++) begin
      for (int w = 0; w < 8; w++) begin
        bc_stb = (w == 7);
        l1a = 0;
        if (w == 7 && (b == 3 + LAT + 1 || b == 9 + LAT + 1)) l1a = 1;  // accept BCs 3 and 9
        for (int l = 0; l < N_LINKS; l++) begin
          rx_valid[l] = (b < NBC) && (w < 7);
          rx_sof[l]   = (w == 0);
          if (b < NBC && w < 7) begin
            for (int k = 0; k < TOWERS_PER_LINK; k++) begin
              int t; t = l * TOWERS_PER_LINK + k;
              pk[k*TOWER_BITS +: TOWER_BITS] = (t < N_TOWERS) ?
                  {tc[b][t/32][t%32], 1'b0, lc[b][t/32][t%32]} : '0;
            end
            rx_data[l] = 32'({14'd0, pk} >> (w * 32));
          end
        end
        if (b < NBC && w == 6) last_word_cyc[b] = cyc;
        @(negedge clk);
        if (bc_stb) bcid = bcid + 1'b1;
      end
    end
  end

  // ---------------- output check: BC b's TOBs are on the link during BC b + 6
  initial begin
    wait (t0 > 0);
    for (int b = 0; b < NBC; b++) begin
      wait (cyc == t0 + 8 * (b + 6));
      #1;
      checks++;
      if (cyc - last_word_cyc[b] != 42 || real'(cyc - last_word_cyc[b]) * 3.125 >= 390.0) failures++;
      for (int w = 0; w < 8; w++) begin
        checks++;
        if (w < 7 && tx_data[0] != exp_sj[b][w]) begin
          failures++;
          if (failures < 6) $display("FAIL bc %0d slot %0d got %h exp %h", b, w, tx_data[0], exp_sj[b][w]);
        end
        if (w == 0) begin
          checks++;
          if (tx_data[3] != exp_sum[b]) begin failures++; $display("FAIL sum bc %0d %h exp %h", b, tx_data[3], exp_sum[b]); end
        end
        if (w == 7) begin
          checks++;
          if (tx_charisk[0] != 4'b0001 || tx_data[0][19:8] != 12'(b)) failures++;
        end
        @(posedge clk); #1;
      end
    end
  end

  // ---------------- readout check
  initial begin
    int evb [2] = '{3, 9};
    for (int n = 0; n < 2; n++) begin
      int b;
      b = evb[n];
      do begin @(posedge clk); #1; end while (!rod_sop);
      checks++;
      if (rod_data != {8'hDA, 12'(n), 12'(b)}) begin failures++; $display("FAIL header %h bc %0d", rod_data, b); end
      for (int w = 0; w < 567; w++) begin
        @(posedge clk); #1;
        if (w == 0 || w == 538 || w == 539 || w == 560) begin
          logic [31:0 ] e;
          if (w == 0) e = {lc[b][0][1][10:0], tc[b][0][0], 1'b0, lc[b][0][0]};
          else if (w == 538) e = 32'd0;                    // last word of the last link frame
          else if (w == 539) e = exp_sj[b][0];              // first small-jet TOB
          else e = exp_sum[b];                             // first global word
          checks++;
          if (rod_data != e || !rod_valid) begin failures++; $display("FAIL ev %0d word %0d %h exp %h", n, w, rod_data, e); end
        end
      end
      checks++; if (!rod_eop) failures++;
      n_events++;
    end
    repeat (8 * 20) @(posedge clk);
    checks += 5;
    if (n_jets < 20) failures++;
    if (n_suppressed == 0) failures++;
    if (n_pileup == 0) failures++;
    if (n_events != 2) failures++;
    if (rx_err) failures++;
    $display("mechanisms: jets %0d suppressed towers %0d pile-up zeroed %0d events %0d", n_jets, n_suppressed, n_pileup, n_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
