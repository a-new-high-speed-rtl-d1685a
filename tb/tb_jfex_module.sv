// tb_jfex_module: the whole board logic at its default size (4 processors, 77 links each).
//
// Every processor receives the same tower picture each BC, shifted in phi per processor:
// jet A (LAr 20 GeV) next to a 0.75 GeV tower that noise suppression must remove, and
// jet B (LAr 12.5 GeV on a 2.5 GeV pile-up pedestal, plus 2.5 GeV Tile). The test checks
// on every processor: the sorted small-jet stream (A then B, exact E_T and position), the
// large-jet and tau streams' leading objects, the E_T sum, the sign of E_x / E_y for the
// processor's phi quadrant, and the trailer BCID. A burst of six L1As then fills the
// 4-deep derandomisers: busy must rise, at least one event per processor must be
// counted as lost, and the four stored events must be read out with consecutive BCIDs and L1IDs.
// Counted mechanisms: noise suppression, pile-up subtraction, sorting, readout, busy,
// overflow; each must occur.
module tb_jfex_module;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, bcr = 0, l1a = 0;
  logic [31:0] rx_data  [4][N_LINKS];
  logic        rx_valid [4][N_LINKS], rx_sof [4][N_LINKS];
  logic        rx_err [4];
  logic        cfg_we = 0;
  logic [9:0]  cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic        bc_stb;
  logic [11:0] bcid;
  logic [31:0] tx_data [4][N_TX];
  logic [3:0]  tx_charisk [4][N_TX];
  logic [31:0] rod_data [4];
  logic        rod_valid [4], rod_sop [4], rod_eop [4], busy [4];
  logic [15:0] ovf [4];
  int checks = 0, failures = 0;
  int m_noise = 0, m_pileup = 0, m_sort = 0, m_readout = 0, m_busy = 0, m_overflow = 0;

  jfex_module dut (.clk, .rst, .bcr, .l1a, .rx_data, .rx_valid, .rx_sof, .rx_err,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .bc_stb, .bcid, .tx_data, .tx_charisk,
    .rod_data, .rod_valid, .rod_sop, .rod_eop, .busy, .overflow_cnt(ovf));

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  // tower picture of processor i: {tile, sat, lar_code} per tower
  function automatic logic [20:0] tw(int i, int e, int p);
    int ce, cp;
    ce = e - 8; cp = p - 8;
    if (ce == 2 && cp == 3 + i)     return {8'd0, 1'b0, 12'(128 + 800)};   // A
    if (ce == 2 && cp == 4 + i)     return {8'd0, 1'b0, 12'(128 + 30)};    // noise
    if (ce == 5 && cp == 10)        return {8'd5, 1'b0, 12'(128 + 500)};   // B (+ pedestal 100)
    return {8'd0, 1'b0, 12'd128};
  endfunction

  logic [209:0] frames [4][N_LINKS];
  initial begin
    for (int i = 0; i < 4; i++)
      for (int l = 0; l < N_LINKS; l++)
        for (int k = 0; k < 10; k++) begin
          int t; t = l * 10 + k;
          frames[i][l][k*21 +: 21] = (t < N_TOWERS) ? tw(i, t / 32, t % 32) : '0;
        end
  end

  // links: words 0..6 in the seven clocks after each strobe
  int ph = -1;
  always @(negedge clk) begin
    if (bc_stb) ph = 0; else if (ph >= 0 && ph < 7) ph++;
    for (int i = 0; i < 4; i++)
      for (int l = 0; l < N_LINKS; l++) begin
        rx_valid[i][l] = (ph >= 0 && ph < 7) && !rst;
        rx_sof[i][l]   = (ph == 0);
        rx_data[i][l]  = (ph >= 0 && ph < 7) ? 32'({14'd0, frames[i][l]} >> (ph * 32)) : '0;
      end
  end

  task automatic wr(input logic [9:0] a, input logic [31:0] d);
    @(negedge clk) cfg_addr = a; cfg_wdata = d; cfg_we = 1;
    @(negedge clk) cfg_we = 0;
  endtask

  always @(posedge clk) for (int i = 0; i < 4; i++) if (busy[i]) m_busy++;

  initial begin
    logic [31:0] ta, tb, hdr0 [4];
    for (int i = 0; i < 4; i++) for (int l = 0; l < N_LINKS; l++) begin
      rx_data[i][l] = 0; rx_valid[i][l] = 0; rx_sof[i][l] = 0;
    end
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < 4; i++) begin
      wr(10'(i * 256 + 8'h20 + 13), 32'd100);   // pedestal of B's eta row (core eta 5)
      wr(10'(i * 256 + 8'h05), 32'd20);         // L1A latency 20 BCs
    end
    @(negedge clk) cfg_addr = 10'(2 * 256 + 8'h2D);
    @(negedge clk); @(negedge clk);
    chk(cfg_rdata == 32'd100, "register read-back through the module bus");
    repeat (8 * 30) @(negedge clk);
    // align: wait for the clock after a strobe, then sample the 8 words of that BC
    @(posedge clk iff bc_stb); @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      int a_et, b_et;
      ta = tx_data[i][0];
      a_et = 800 >> 3; b_et = (500 - 100 + 100) >> 3;
      chk(ta == {1'b0, 8'd0, 1'b0, 12'(a_et), 5'(3 + i), 5'd2}, $sformatf("proc %0d jet A %h", i, ta));
      if (ta[21:10] == 12'(a_et)) m_noise++;
      chk(tx_data[i][3][23:0] == 24'((800 + 400 + 100) >> 3), $sformatf("proc %0d sum %h", i, tx_data[i][3]));
      chk(tx_data[i][1][21:10] >= 12'(a_et), $sformatf("proc %0d large jet %h", i, tx_data[i][1]));
      chk(tx_data[i][2][21:10] == 12'(800 >> 3), $sformatf("proc %0d tau %h", i, tx_data[i][2]));
    end
    @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      tb = tx_data[i][0];
      chk(tb == {1'b0, 8'd0, 1'b0, 12'(500 >> 3), 5'd10, 5'd5}, $sformatf("proc %0d jet B %h", i, tb));
      if (tb[21:10] == 12'(500 >> 3)) m_pileup++;
      if (tb[21:10] < 12'(800 >> 3)) m_sort++;
      if (i == 0) chk($signed(tx_data[i][3]) > 0, "proc 0 Ex > 0");
      if (i == 2) chk($signed(tx_data[i][3]) < 0, "proc 2 Ex < 0");
    end
    @(negedge clk);
    chk($signed(tx_data[1][3]) > 0, "proc 1 Ey > 0");
    chk($signed(tx_data[3][3]) < 0, "proc 3 Ey < 0");
    repeat (5) @(negedge clk);
    chk(tx_charisk[0][0] == 4'b0001 && tx_data[0][0][19:8] == 12'(bcid - 12'd6), "trailer BCID");
    for (int i = 0; i < 4; i++) begin
        automatic int ii = i;
        fork begin
          for (int n = 0; n < 4; n++) begin
            do begin @(posedge clk); #1; end while (!rod_sop[ii]);
            if (n == 0) hdr0[ii] = rod_data[ii];
            chk(rod_data[ii][31:24] == 8'hDA && rod_data[ii][23:12] == 12'(n) &&
                rod_data[ii][11:0] == hdr0[ii][11:0] + 12'(n), $sformatf("proc %0d header %0d %h", ii, n, rod_data[ii]));
            for (int w = 0; w < 567; w++) begin
              @(posedge clk); #1;
              if (w == 539) chk(rod_data[ii] == {1'b0, 8'd0, 1'b0, 12'(800 >> 3), 5'(3 + ii), 5'd2},
                                $sformatf("proc %0d readout TOB %h", ii, rod_data[ii]));
            end
            chk(rod_eop[ii], "eop");
            m_readout++;
          end
        end join_none
    end
    // L1A burst: six consecutive BCs
    @(posedge clk iff bc_stb);
    for (int n = 0; n < 6; n++) begin
      @(negedge clk) l1a = 1;
      @(posedge clk iff bc_stb); #1 l1a = 0;
    end
    wait fork;
    for (int i = 0; i < 4; i++) begin
      chk(ovf[i] >= 16'd1, $sformatf("proc %0d overflow %0d", i, ovf[i]));
      if (ovf[i] != 0) m_overflow++;
      chk(!rx_err[i], "rx framing");
    end
    $display("mechanisms: noise %0d pileup %0d sort %0d readout %0d busy %0d overflow %0d",
             m_noise, m_pileup, m_sort, m_readout, m_busy, m_overflow);
    chk(m_noise > 0 && m_pileup > 0 && m_sort > 0 && m_readout > 0 && m_busy > 0 && m_overflow > 0,
        "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
