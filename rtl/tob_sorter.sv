// tob_sorter: selects the N_OUT highest-E_T candidates and outputs them in descending order.
//
// Fully parallel rank sort. For every candidate i the rank is the number of candidates j
// that beat it, where j beats i if it has the larger {valid, key}, or the same value and a
// lower index (so ranks are unique). Output slot k takes the candidate whose rank is k.
// Slots left without a valid candidate are zero with tob_valid_o low. The paper says the
// algorithm outputs are sorted on the FPGA before being sent to L1Topo and prints 7 TOBs
// per fibre; the rank-sort structure and the tie rule are this design's choice.
// Timing: registered on bc_stb, one BC of latency.
module tob_sorter
  import jfex_pkg::*;
#(
  parameter int N_IN  = 128,
  parameter int N_OUT = 7
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  bc_stb,
  input  cand_t cand        [N_IN],
  output tob_t  tob_o       [N_OUT],
  output logic  tob_valid_o [N_OUT]
);
  localparam int RW = $clog2(N_IN) + 1;

  logic [RW-1:0] rank   [N_IN];
  tob_t          slot   [N_OUT];
  logic          slot_v [N_OUT];

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      rank[i] = '0;
      for (int j = 0; j < N_IN; j++) begin
        if (j != i) begin
          if ({cand[j].valid, cand[j].key} > {cand[i].valid, cand[i].key} ||
              ({cand[j].valid, cand[j].key} == {cand[i].valid, cand[i].key} && j < i))
            rank[i] = rank[i] + 1'b1;
        end
      end
    end
    for (int k = 0; k < N_OUT; k++) begin
      slot[k]   = '0;
      slot_v[k] = 1'b0;
      for (int i = 0; i < N_IN; i++)
        if (cand[i].valid && rank[i] == RW'(k)) begin
          slot[k]   = slot[k] | cand[i].tob;
          slot_v[k] = 1'b1;
        end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < N_OUT; k++) begin
        tob_o[k]       <= '0;
        tob_valid_o[k] <= 1'b0;
      end
    end else if (bc_stb) begin
      for (int k = 0; k < N_OUT; k++) begin
        tob_o[k]       <= slot[k];
        tob_valid_o[k] <= slot_v[k];
      end
    end
  end
endmodule
