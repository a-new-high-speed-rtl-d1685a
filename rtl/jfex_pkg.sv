// jfex_pkg: constants, types and helper functions shared by the jFEX processor RTL.
//
// One processor FPGA sees a tower grid of 24 (eta) x 32 (phi) trigger towers of 0.1 x 0.1,
// i.e. 2.4 x 3.2, of which the central 8 x 16 (0.8 x 1.6) is its core: jets, taus and
// global sums are reported only for core positions, the 8-tower margin on every side is
// environment duplicated from the neighbours. These sizes follow the paper. Energies
// inside the design are linear, unsigned, in units of 25 MeV (the finest LAr step);
// trigger objects (TOBs) carry energies in 200 MeV units (a shift by 3), a choice of
// this design. The fabric runs 8 clocks per 25 ns bunch crossing (BC); this matches
// 8 x 32-bit words per BC on a 12.8 Gb/s 8b/10b output link.
package jfex_pkg;

  localparam int ETA_N      = 24;   // towers in eta per FPGA (2.4 / 0.1)
  localparam int PHI_N      = 32;   // towers in phi per FPGA (3.2 / 0.1)
  localparam int ETA_CORE   = 8;    // core towers in eta (0.8 / 0.1)
  localparam int PHI_CORE   = 16;   // core towers in phi (1.6 / 0.1)
  localparam int ETA_MARGIN = (ETA_N - ETA_CORE) / 2;
  localparam int PHI_MARGIN = (PHI_N - PHI_CORE) / 2;
  localparam int N_TOWERS   = ETA_N * PHI_N;
  localparam int N_CORE     = ETA_CORE * PHI_CORE;

  localparam int CLK_PER_BC     = 8;   // fabric clocks per bunch crossing
  localparam int RX_WORDS       = 7;   // 32-bit words per BC on an 11.2 Gb/s input link
  localparam int TOWERS_PER_LINK = 10; // 21-bit towers packed per 224-bit input frame
  localparam int TOWER_BITS     = 21;  // {tile[7:0], lar_sat, lar_code[11:0]}
  localparam int N_LINKS        = (N_TOWERS + TOWERS_PER_LINK - 1) / TOWERS_PER_LINK; // 77
  localparam int N_TOB          = 7;   // TOBs per output fibre per BC
  localparam int N_TX           = 4;   // output streams: small jets, large jets, taus, global
  localparam int BC_PER_ORBIT   = 3564;

  localparam int ET_W   = 16;          // tower E_T, 25 MeV units
  localparam int SUM_W  = 24;          // window sums, 25 MeV units
  localparam int TOB_ET_SHIFT = 3;     // 25 MeV -> 200 MeV
  localparam int TOB_ET_W = 12;

  typedef logic [ET_W-1:0]  et_t;
  typedef logic [SUM_W-1:0] sum_t;
  typedef logic [31:0]      tob_t;

  // Candidate handed from an algorithm to a sorter.
  typedef struct packed {
    logic        valid;
    logic [23:0] key;   // sort key (E_T in 25 MeV units, saturated)
    tob_t        tob;
  } cand_t;

  // Configuration registers (see config_regs for the address map).
  typedef struct packed {
    et_t        thr_lar;
    et_t        thr_tile;
    et_t        seed_thr_sj;
    et_t        seed_thr_lj;
    et_t        seed_thr_tau;
    logic [6:0] l1a_latency;
  } cfg_t;

  // LAr multi-slope decode: 12-bit code -> signed E_T in 25 MeV units.
  // Code 0 is -3.2 GeV (-128); steps of 25, 50, 100, 200 and 400 MeV above the
  // breakpoints 1024, 1536, 2048 and 2638, so that code 4095 is 800.0 GeV (32000).
  function automatic logic signed [16:0] lar_decode(input logic [11:0] c);
    int v;
    if (c < 12'd1024)      v = -128 + int'(c);
    else if (c < 12'd1536) v = -128 + 1024 + 2*(int'(c) - 1024);
    else if (c < 12'd2048) v = -128 + 2048 + 4*(int'(c) - 1536);
    else if (c < 12'd2638) v = -128 + 4096 + 8*(int'(c) - 2048);
    else                   v = -128 + 8816 + 16*(int'(c) - 2638);
    return 17'(v);
  endfunction

  // Tile: 500 MeV per count = 20 x 25 MeV.
  function automatic et_t tile_decode(input logic [7:0] c);
    return et_t'(20 * int'(c));
  endfunction

  // BCID n bunch crossings before b, wrapping at the orbit length.
  function automatic logic [11:0] bcid_sub(input logic [11:0] b, input int n);
    int v;
    v = int'(b) - n;
    while (v < 0) v += BC_PER_ORBIT;
    return 12'(v);
  endfunction

  // Integer square root, used at elaboration for round-window row half widths.
  function automatic int isqrt(input int x);
    int r;
    r = 0;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  // Saturating conversion of a 25 MeV sum to a TOB_ET_W-bit 200 MeV field.
  function automatic logic [TOB_ET_W-1:0] tob_et(input sum_t s);
    sum_t q;
    q = s >> TOB_ET_SHIFT;
    return (q > sum_t'({TOB_ET_W{1'b1}})) ? {TOB_ET_W{1'b1}} : q[TOB_ET_W-1:0];
  endfunction

  function automatic logic tob_ovf(input sum_t s);
    return (s >> TOB_ET_SHIFT) > sum_t'({TOB_ET_W{1'b1}});
  endfunction

  // TOB layout: [4:0] eta (core index), [9:5] phi (core index), [21:10] E_T (200 MeV),
  // [22] reserved, [30:23] auxiliary (tau isolation), [31] saturation.
  function automatic tob_t make_tob(input int eta, input int phi, input sum_t et,
                                    input logic [7:0] aux, input logic sat);
    return {sat | tob_ovf(et), aux, 1'b0, tob_et(et), 5'(phi), 5'(eta)};
  endfunction

endpackage
