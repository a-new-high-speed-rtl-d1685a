// derandomiser: queues accepted events and sends them to the readout driver (ROD).
//
// Each push stores one event of WORDS 32-bit words (word 0 in bits 31:0) together with
// the BCID and the Level-1 ID (count of L1As since reset). Events leave in order as one
// header word {8'hDA, l1id[11:0], bcid[11:0]} followed by the WORDS data words, one word
// per clock, with rod_sop on the header and rod_eop on the last word. busy is high while
// DEPTH-1 or more events are stored; a push into a full queue is dropped and counted in
// overflow_cnt (its L1ID is still consumed). The paper names the derandomiser between the
// latency buffer and the ROD; queue depth, event format and busy rule are this design's.
module derandomiser #(
  parameter int DEPTH = 4,
  parameter int WORDS = 567
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               push,
  input  logic [WORDS*32-1:0] event_i,
  input  logic [11:0]        bcid_i,
  output logic [31:0]        rod_data,
  output logic               rod_valid,
  output logic               rod_sop,
  output logic               rod_eop,
  output logic               busy,
  output logic [15:0]        overflow_cnt
);
  localparam int AW = $clog2(DEPTH);
  localparam int WW = $clog2(WORDS + 1);

  logic [WORDS*32-1:0] mem    [DEPTH];
  logic [23:0]         hdr    [DEPTH];
  logic [AW-1:0]       wr_ptr, rd_ptr;
  logic [AW:0]         count;
  logic [11:0]         l1id;
  logic                sending;
  logic [WW-1:0]       widx;   // 0 = header, 1..WORDS = data words
  logic                do_push, do_pop;

  assign do_push = push && (count != (AW+1)'(DEPTH));
  assign do_pop  = sending && widx == WW'(WORDS);
  assign busy    = count >= (AW+1)'(DEPTH - 1);

  always_ff @(posedge clk) begin
    if (do_push) begin
      mem[wr_ptr] <= event_i;
      hdr[wr_ptr] <= {l1id, bcid_i};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0; rd_ptr <= '0; count <= '0; l1id <= '0;
      sending <= 1'b0; widx <= '0; overflow_cnt <= '0;
      rod_data <= '0; rod_valid <= 1'b0; rod_sop <= 1'b0; rod_eop <= 1'b0;
    end else begin
      rod_valid <= 1'b0; rod_sop <= 1'b0; rod_eop <= 1'b0;
      if (push) l1id <= l1id + 1'b1;
      if (push && !do_push) overflow_cnt <= overflow_cnt + 1'b1;
      if (do_push) wr_ptr <= AW'(wr_ptr + 1'b1);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (!sending) begin
        if (count != '0) begin
          sending   <= 1'b1;
          widx      <= WW'(1);
          rod_data  <= {8'hDA, hdr[rd_ptr]};
          rod_valid <= 1'b1;
          rod_sop   <= 1'b1;
        end
      end else begin
        rod_data  <= mem[rd_ptr][(widx - 1'b1)*32 +: 32];
        rod_valid <= 1'b1;
        if (widx == WW'(WORDS)) begin
          rod_eop <= 1'b1;
          sending <= 1'b0;
          rd_ptr  <= AW'(rd_ptr + 1'b1);
        end else begin
          widx <= widx + 1'b1;
        end
      end
    end
  end
endmodule
