// latency_buffer: circular store of per-BC data, read back on a Level-1 Accept.
//
// On every bc_stb wr_data is written at the write pointer, which then advances, so the
// buffer always holds the last DEPTH bunch crossings. An l1a pulse (given in a bc_stb
// cycle) reads the entry written `latency` strobes before the current one (latency 0 is
// the entry written in the same cycle and is not supported: use 1..DEPTH-1) to rd_data,
// with rd_valid one clock later. The paper draws the latency buffer fed by the input data
// and the algorithm outputs and read on L1A; depth and interface are this design's.
module latency_buffer #(
  parameter int DEPTH = 128,
  parameter int WIDTH = 896
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     bc_stb,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     l1a,
  input  logic [$clog2(DEPTH)-1:0] latency,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     rd_valid
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr;

  always_ff @(posedge clk) begin
    if (bc_stb) mem[wr_ptr] <= wr_data;
    if (l1a)    rd_data     <= mem[AW'(wr_ptr - latency)];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr   <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= l1a;
      if (bc_stb) wr_ptr <= wr_ptr + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (rst) l1a |-> bc_stb && latency != '0)
    else $error("latency_buffer: l1a outside bc_stb or zero latency");
endmodule
