// config_regs: run parameters of one processor, written over a simple register bus.
//
// Single-cycle writes (cfg_we with cfg_addr and cfg_wdata); reads return cfg_rdata one
// clock after the address. Address map (16-bit values in 25 MeV units unless noted):
//   0x00 LAr noise threshold     0x01 Tile noise threshold
//   0x02 small-jet seed threshold 0x03 large-jet seed threshold  0x04 tau seed threshold
//   0x05 L1A latency in BCs (7 bits)
//   0x20 + eta (eta = 0..23) pile-up pedestal rho of that eta row
// The paper shows run parameters from the trigger menu and databases feeding every
// algorithm, and control through IPBus on a mezzanine; the register map, reset values and
// the plain bus (standing in for IPBus transactions) are this design's choices.
module config_regs
  import jfex_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [31:0] cfg_rdata,
  output cfg_t        cfg,
  output et_t         rho [ETA_N]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      cfg.thr_lar      <= et_t'(40);   // 1 GeV
      cfg.thr_tile     <= et_t'(20);   // one Tile count
      cfg.seed_thr_sj  <= et_t'(200);  // 5 GeV
      cfg.seed_thr_lj  <= et_t'(200);
      cfg.seed_thr_tau <= et_t'(200);
      cfg.l1a_latency  <= 7'd100;
      for (int e = 0; e < ETA_N; e++) rho[e] <= '0;
      cfg_rdata <= '0;
    end else begin
      if (cfg_we) begin
        case (cfg_addr)
          8'h00: cfg.thr_lar      <= cfg_wdata[15:0];
          8'h01: cfg.thr_tile     <= cfg_wdata[15:0];
          8'h02: cfg.seed_thr_sj  <= cfg_wdata[15:0];
          8'h03: cfg.seed_thr_lj  <= cfg_wdata[15:0];
          8'h04: cfg.seed_thr_tau <= cfg_wdata[15:0];
          8'h05: cfg.l1a_latency  <= cfg_wdata[6:0];
          default:
            if (cfg_addr >= 8'h20 && cfg_addr < 8'(8'h20 + ETA_N))
              rho[cfg_addr - 8'h20] <= cfg_wdata[15:0];
        endcase
      end
      case (cfg_addr)
        8'h00: cfg_rdata <= 32'(cfg.thr_lar);
        8'h01: cfg_rdata <= 32'(cfg.thr_tile);
        8'h02: cfg_rdata <= 32'(cfg.seed_thr_sj);
        8'h03: cfg_rdata <= 32'(cfg.seed_thr_lj);
        8'h04: cfg_rdata <= 32'(cfg.seed_thr_tau);
        8'h05: cfg_rdata <= 32'(cfg.l1a_latency);
        default:
          cfg_rdata <= (cfg_addr >= 8'h20 && cfg_addr < 8'(8'h20 + ETA_N))
                       ? 32'(rho[cfg_addr - 8'h20]) : 32'hDEAD_BEEF;
      endcase
    end
  end
endmodule
