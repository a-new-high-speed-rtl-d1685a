// bc_timing: bunch-crossing strobe and bunch counter for the processors.
//
// bc_stb is high one clock in every CLK_PER_BC (8 fabric clocks per 25 ns BC). bcid counts
// strobes and wraps after 3564 BCs (one LHC orbit); a BCR pulse from the timing interface
// makes the next strobe start again at BCID 0. The LHC orbit length is general knowledge,
// not from the paper; the 8:1 clock ratio is this design's choice.
module bc_timing
  import jfex_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        bcr,
  output logic        bc_stb,
  output logic [11:0] bcid
);
  localparam int CW = $clog2(CLK_PER_BC);

  logic [CW-1:0] cnt;
  logic          bcr_pend;

  assign bc_stb = (cnt == CW'(CLK_PER_BC - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      bcid     <= 12'd0;
      bcr_pend <= 1'b0;
    end else begin
      cnt <= cnt + 1'b1;
      if (bc_stb) begin
        if (bcr || bcr_pend || bcid == 12'(BC_PER_ORBIT - 1)) bcid <= 12'd0;
        else bcid <= bcid + 1'b1;
        bcr_pend <= 1'b0;
      end else if (bcr) begin
        bcr_pend <= 1'b1;
      end
    end
  end
endmodule
