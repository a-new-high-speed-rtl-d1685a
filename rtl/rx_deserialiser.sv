// rx_deserialiser: assembles the words of one input link into the frame of one bunch crossing.
//
// The transceiver delivers 32-bit words with rx_valid; rx_sof marks the first word of a
// BC frame (taken from comma alignment in the transceiver, not modelled). After WORDS
// words the frame is copied to frame_o and frame_done pulses; frame_o then holds until
// the next frame completes. A start marker in the middle of a frame, or a word outside a
// frame, sets the sticky frame_err (cleared by reset) and restarts the frame. The paper
// names the deserialiser; 7 words per BC follows from its 11.2 Gb/s link rate with 8b/10b
// coding, and the framing rule is this design's choice. Word 0 lands in frame_o[31:0].
// Timing: frame_o is valid the clock after the last word.
module rx_deserialiser #(
  parameter int WORDS = 7
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [31:0]         rx_data,
  input  logic                rx_valid,
  input  logic                rx_sof,
  output logic [WORDS*32-1:0] frame_o,
  output logic                frame_done,
  output logic                frame_err
);
  localparam int CW = $clog2(WORDS + 1);

  logic [31:0]   buf_q [WORDS-1];
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    frame_done <= 1'b0;
    if (rst) begin
      cnt       <= '0;
      frame_o   <= '0;
      frame_err <= 1'b0;
      for (int i = 0; i < WORDS - 1; i++) buf_q[i] <= '0;
    end else if (rx_valid) begin
      if (rx_sof) begin
        if (cnt != '0) frame_err <= 1'b1;
        buf_q[0] <= rx_data;
        cnt      <= CW'(1);
      end else if (cnt == '0) begin
        frame_err <= 1'b1;
      end else if (cnt == CW'(WORDS - 1)) begin
        for (int i = 0; i < WORDS - 1; i++) frame_o[i*32 +: 32] <= buf_q[i];
        frame_o[(WORDS-1)*32 +: 32] <= rx_data;
        frame_done <= 1'b1;
        cnt        <= '0;
      end else begin
        buf_q[cnt] <= rx_data;
        cnt        <= cnt + 1'b1;
      end
    end
  end
endmodule
