// jfex_processor: the trigger and readout logic of one jFEX processor FPGA (central region).
//
// Data path, one bunch crossing (BC) per stage, all stages advancing on bc_stb:
//   S0  N_LINKS rx_deserialiser frames are captured; each 224-bit frame holds 10 towers of
//       21 bits {tile[7:0], lar_sat, lar_code[11:0]}, tower t = eta*32 + phi
//   S1  noise_suppression (decode to 25 MeV units, thresholds)
//   S2  pileup_subtraction (per-eta-row LAr pedestal)
//   S3  small_jet_finder (R=0.4), large_jet_finder (R=0.8), tau_finder, global_sums
//   S4  three tob_sorter instances pick the 7 leading TOBs; global words are delayed once
//   S5  four tob_serialiser links send 8 words per BC: stream 0 small jets, 1 large jets,
//       2 taus, 3 global {sum E_T, E_x, E_y, 0, 0, 0, 0}
// With 8 clocks per BC the last input word of a BC leaves as the first output word 42
// clocks later (131 ns at 320 MHz), inside the paper's total budget of under 390 ns.
// Readout: two latency_buffer instances keep the captured input frames and the output
// TOB words of the last 128 BCs; on l1a (given in a bc_stb cycle) both return the entry of
// the BC that was captured cfg.l1a_latency + 1 strobes earlier (the TOB buffer is read 4
// BCs less deep because its data are 4 BCs later) and the derandomiser sends the event
// (header, 539 input words, 28 TOB words) to the ROD port. l1a_latency must be 5..127.
// Follows the paper: the deserialiser / algorithms / sorting / serialiser chain, the tower
// grid, R = 0.4 sliding window, 7 TOBs of 32 bits per fibre, latency buffer and
// derandomiser on L1A. Everything else (link packing, algorithm details, formats, clock
// ratio, register map) is this design's choice; see the module headers.
module jfex_processor
  import jfex_pkg::*;
#(
  parameter int PHI_BASE = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        bc_stb,
  input  logic [11:0] bcid,
  // input links (after transceivers)
  input  logic [31:0] rx_data  [N_LINKS],
  input  logic        rx_valid [N_LINKS],
  input  logic        rx_sof   [N_LINKS],
  output logic        rx_err,
  // register bus
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [31:0] cfg_rdata,
  // output links to L1Topo
  output logic [31:0] tx_data    [N_TX],
  output logic [3:0]  tx_charisk [N_TX],
  // readout
  input  logic        l1a,
  output logic [31:0] rod_data,
  output logic        rod_valid,
  output logic        rod_sop,
  output logic        rod_eop,
  output logic        busy,
  output logic [15:0] overflow_cnt
);
  localparam int FRAME_W = RX_WORDS * 32;
  localparam int IN_W    = N_LINKS * FRAME_W;
  localparam int TOB_W   = N_TX * N_TOB * 32;
  localparam int EV_WORDS = (IN_W + TOB_W) / 32;
  localparam int TOB_PIPE = 4;   // S1..S4 between input capture and sorted TOBs

  // ---------------- configuration
  cfg_t cfg;
  et_t  rho [ETA_N];
  config_regs u_cfg (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .cfg, .rho);

  // ---------------- S0: deserialisers and capture
  logic [FRAME_W-1:0] frame    [N_LINKS];
  logic [FRAME_W-1:0] frame_q  [N_LINKS];
  logic               fdone    [N_LINKS];
  logic [N_LINKS-1:0] ferr;

  for (genvar l = 0; l < N_LINKS; l++) begin : g_rx
    rx_deserialiser #(.WORDS(RX_WORDS)) u_rx (
      .clk, .rst, .rx_data(rx_data[l]), .rx_valid(rx_valid[l]), .rx_sof(rx_sof[l]),
      .frame_o(frame[l]), .frame_done(fdone[l]), .frame_err(ferr[l]));
  end
  assign rx_err = |ferr;

  always_ff @(posedge clk) begin
    if (rst) for (int l = 0; l < N_LINKS; l++) frame_q[l] <= '0;
    else if (bc_stb) for (int l = 0; l < N_LINKS; l++) frame_q[l] <= frame[l];
  end

  logic [11:0] lar_code  [ETA_N][PHI_N];
  logic        lar_sat   [ETA_N][PHI_N];
  logic [7:0]  tile_code [ETA_N][PHI_N];

  always_comb begin
    for (int t = 0; t < N_TOWERS; t++) begin
      logic [TOWER_BITS-1:0] tw;
      tw = frame_q[t / TOWERS_PER_LINK][(t % TOWERS_PER_LINK) * TOWER_BITS +: TOWER_BITS];
      lar_code [t / PHI_N][t % PHI_N] = tw[11:0];
      lar_sat  [t / PHI_N][t % PHI_N] = tw[12];
      tile_code[t / PHI_N][t % PHI_N] = tw[20:13];
    end
  end

  // ---------------- S1, S2: tower preparation
  et_t  ns_lar [ETA_N][PHI_N], ns_tile [ETA_N][PHI_N];
  logic ns_sat [ETA_N][PHI_N];
  et_t  pu_lar [ETA_N][PHI_N], pu_tile [ETA_N][PHI_N];
  logic pu_sat [ETA_N][PHI_N];

  noise_suppression u_ns (
    .clk, .rst, .bc_stb, .lar_code, .lar_sat, .tile_code,
    .thr_lar(cfg.thr_lar), .thr_tile(cfg.thr_tile),
    .lar_et(ns_lar), .tile_et(ns_tile), .sat(ns_sat));

  pileup_subtraction u_pu (
    .clk, .rst, .bc_stb, .lar_in(ns_lar), .tile_in(ns_tile), .sat_in(ns_sat), .rho,
    .lar_out(pu_lar), .tile_out(pu_tile), .sat_out(pu_sat));

  // ---------------- S3: algorithms
  cand_t sj_cand [N_CORE], lj_cand [N_CORE], tau_cand [N_CORE];
  tob_t  glob [3];

  small_jet_finder u_sj (.clk, .rst, .bc_stb, .lar_et(pu_lar), .tile_et(pu_tile),
                         .sat(pu_sat), .seed_thr(cfg.seed_thr_sj), .cand(sj_cand));
  large_jet_finder u_lj (.clk, .rst, .bc_stb, .lar_et(pu_lar), .tile_et(pu_tile),
                         .sat(pu_sat), .seed_thr(cfg.seed_thr_lj), .cand(lj_cand));
  tau_finder       u_tau (.clk, .rst, .bc_stb, .lar_et(pu_lar), .tile_et(pu_tile),
                          .sat(pu_sat), .seed_thr(cfg.seed_thr_tau), .cand(tau_cand));
  global_sums #(.PHI_BASE(PHI_BASE)) u_glob (.clk, .rst, .bc_stb, .lar_et(pu_lar),
                          .tile_et(pu_tile), .sat(pu_sat), .tob(glob));

  // ---------------- S4: sorting
  tob_t tobs    [N_TX][N_TOB];
  logic tob_v   [N_TX-1][N_TOB];

  tob_sorter u_sort_sj  (.clk, .rst, .bc_stb, .cand(sj_cand),  .tob_o(tobs[0]), .tob_valid_o(tob_v[0]));
  tob_sorter u_sort_lj  (.clk, .rst, .bc_stb, .cand(lj_cand),  .tob_o(tobs[1]), .tob_valid_o(tob_v[1]));
  tob_sorter u_sort_tau (.clk, .rst, .bc_stb, .cand(tau_cand), .tob_o(tobs[2]), .tob_valid_o(tob_v[2]));

  always_ff @(posedge clk) begin
    if (rst) for (int i = 0; i < N_TOB; i++) tobs[3][i] <= '0;
    else if (bc_stb)
      for (int i = 0; i < N_TOB; i++) tobs[3][i] <= (i < 3) ? glob[i] : '0;
  end

  // ---------------- S5: output links
  for (genvar s = 0; s < N_TX; s++) begin : g_tx
    tob_serialiser u_ser (.clk, .rst, .bc_stb, .tob_i(tobs[s]),
                          .bcid(bcid_sub(bcid, TOB_PIPE + 1)),
                          .tx_data(tx_data[s]), .tx_charisk(tx_charisk[s]));
  end

  // ---------------- readout
  logic [IN_W-1:0]  in_wr, in_rd;
  logic [TOB_W-1:0] tob_wr, tob_rd;
  logic             in_rd_v, tob_rd_v;
  logic [11:0]      l1a_bcid;

  always_comb begin
    for (int l = 0; l < N_LINKS; l++) in_wr[l*FRAME_W +: FRAME_W] = frame_q[l];
    for (int s = 0; s < N_TX; s++)
      for (int i = 0; i < N_TOB; i++) tob_wr[(s*N_TOB+i)*32 +: 32] = tobs[s][i];
  end

  latency_buffer #(.DEPTH(128), .WIDTH(IN_W)) u_lb_in (
    .clk, .rst, .bc_stb, .wr_data(in_wr), .l1a, .latency(cfg.l1a_latency),
    .rd_data(in_rd), .rd_valid(in_rd_v));
  latency_buffer #(.DEPTH(128), .WIDTH(TOB_W)) u_lb_tob (
    .clk, .rst, .bc_stb, .wr_data(tob_wr), .l1a, .latency(cfg.l1a_latency - 7'(TOB_PIPE)),
    .rd_data(tob_rd), .rd_valid(tob_rd_v));

  always_ff @(posedge clk)
    if (l1a) l1a_bcid <= bcid_sub(bcid, int'(cfg.l1a_latency) + 1);

  derandomiser #(.DEPTH(4), .WORDS(EV_WORDS)) u_derand (
    .clk, .rst, .push(in_rd_v), .event_i({tob_rd, in_rd}), .bcid_i(l1a_bcid),
    .rod_data, .rod_valid, .rod_sop, .rod_eop, .busy, .overflow_cnt);

  assert property (@(posedge clk) disable iff (rst) in_rd_v == tob_rd_v);
endmodule
