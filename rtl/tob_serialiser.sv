// tob_serialiser: sends the TOBs of one bunch crossing as eight 32-bit words on one link.
//
// On bc_stb the N_TOB TOBs and a trailer are latched; over the following CLK_PER_BC
// clocks words 0..N_TOB-1 (the TOBs, in order) and then the trailer are presented on
// tx_data, one per clock. The trailer carries the K28.5 comma 0xBC in byte 0 (flagged on
// tx_charisk[0]) and the 12-bit BCID in bits 19:8. The paper prints 7 TOBs of 32 bits per
// fibre at 12.8 Gb/s, which with 8b/10b coding leaves room for exactly one more word per
// BC; the trailer contents are this design's choice. Timing: the first TOB appears on
// tx_data the clock after bc_stb.
module tob_serialiser
  import jfex_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        bc_stb,
  input  tob_t        tob_i [N_TOB],
  input  logic [11:0] bcid,
  output logic [31:0] tx_data,
  output logic [3:0]  tx_charisk
);
  localparam int IW = $clog2(CLK_PER_BC);

  logic [31:0]   word_q [CLK_PER_BC];
  logic [IW-1:0] idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      idx <= '0;
      for (int i = 0; i < CLK_PER_BC; i++) word_q[i] <= '0;
    end else if (bc_stb) begin
      for (int i = 0; i < N_TOB; i++) word_q[i] <= tob_i[i];
      for (int i = N_TOB; i < CLK_PER_BC - 1; i++) word_q[i] <= '0;
      word_q[CLK_PER_BC-1] <= {12'd0, bcid, 8'hBC};
      idx <= '0;
    end else if (idx != IW'(CLK_PER_BC - 1)) begin
      idx <= idx + 1'b1;
    end
  end

  assign tx_data    = word_q[idx];
  assign tx_charisk = (idx == IW'(CLK_PER_BC - 1)) ? 4'b0001 : 4'b0000;
endmodule
