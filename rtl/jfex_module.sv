// jfex_module: one jFEX board's processing logic: four processor FPGAs covering the phi ring.
//
// Processor i gets PHI_BASE = 16*i, so together the four cores span the 64 phi bins of
// the full ring. The tower environment each processor needs from its neighbours is
// duplicated on the board by the transceivers and copper fan-out, so every processor has
// its own set of input link ports and the duplication happens outside this RTL. The
// timing interface provides l1a and bcr; bc_timing derives the BC strobe (one clock in 8)
// and the BCID shared by all processors. The register bus addresses processor
// cfg_addr[9:8], register cfg_addr[7:0]; cfg_rdata follows one clock after the address.
// Four FPGAs per board, the four-times repeated processing scheme and the links to
// L1Topo and the readout are from the paper; the shared strobe, BCID and bus are this
// design's choices.
module jfex_module
  import jfex_pkg::*;
#(
  parameter int N_PROC = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        bcr,
  input  logic        l1a,
  input  logic [31:0] rx_data  [N_PROC][N_LINKS],
  input  logic        rx_valid [N_PROC][N_LINKS],
  input  logic        rx_sof   [N_PROC][N_LINKS],
  output logic        rx_err   [N_PROC],
  input  logic        cfg_we,
  input  logic [9:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [31:0] cfg_rdata,
  output logic        bc_stb,
  output logic [11:0] bcid,
  output logic [31:0] tx_data    [N_PROC][N_TX],
  output logic [3:0]  tx_charisk [N_PROC][N_TX],
  output logic [31:0] rod_data   [N_PROC],
  output logic        rod_valid  [N_PROC],
  output logic        rod_sop    [N_PROC],
  output logic        rod_eop    [N_PROC],
  output logic        busy       [N_PROC],
  output logic [15:0] overflow_cnt [N_PROC]
);
  bc_timing u_bc (.clk, .rst, .bcr, .bc_stb, .bcid);

  logic [31:0] rdata [N_PROC];
  logic [1:0]  rsel;

  for (genvar i = 0; i < N_PROC; i++) begin : g_proc
    jfex_processor #(.PHI_BASE(16 * i)) u_proc (
      .clk, .rst, .bc_stb, .bcid,
      .rx_data(rx_data[i]), .rx_valid(rx_valid[i]), .rx_sof(rx_sof[i]), .rx_err(rx_err[i]),
      .cfg_we(cfg_we && cfg_addr[9:8] == 2'(i)), .cfg_addr(cfg_addr[7:0]), .cfg_wdata,
      .cfg_rdata(rdata[i]),
      .tx_data(tx_data[i]), .tx_charisk(tx_charisk[i]),
      .l1a(l1a && bc_stb), .rod_data(rod_data[i]), .rod_valid(rod_valid[i]),
      .rod_sop(rod_sop[i]), .rod_eop(rod_eop[i]), .busy(busy[i]),
      .overflow_cnt(overflow_cnt[i]));
  end

  always_ff @(posedge clk) rsel <= cfg_addr[9:8];
  assign cfg_rdata = rdata[rsel];
endmodule
