// line_buffer: shift-register line buffer producing a 5x5 window.
//
// The padded feature map streams in one pixel per enabled cycle, row after
// row. Following the paper's line-buffer diagram, the buffer is a chain of
// registers folded into five rows of PW registers; the window is the first
// five registers of each row. The chain ends after the fifth register of the
// last row, so it is (K-1)*PW + K registers long.
//
// Interface: shift_en/din push one pixel. window[dy*K+dx] is the pixel at
// window row dy (0 = oldest line) and column dx (0 = leftmost). With the
// pixel at padded position (r, c) the most recent one pushed, window[dy][dx]
// holds padded pixel (r-4+dy, c-4+dx).
// Timing: the window is read straight from the registers, so it reflects a
// push on the next cycle. There is no reset: the contents are stale until
// four lines and five pixels have entered, and the controller ignores the
// window until then.
module line_buffer
  import chipnet_pkg::*;
#(
  parameter int unsigned PW = 184   // padded line length
) (
  input  logic    clk,
  input  logic    shift_en,
  input  data_t   din,
  output kernel_t window
);

  localparam int unsigned LEN = (K - 1) * PW + K;

  data_t sr [LEN];

  always_ff @(posedge clk) begin
    if (shift_en) begin
      sr[0] <= din;
      for (int unsigned i = 1; i < LEN; i++) sr[i] <= sr[i-1];
    end
  end

  always_comb begin
    for (int unsigned dy = 0; dy < K; dy++)
      for (int unsigned dx = 0; dx < K; dx++)
        window[dy*K + dx] = sr[(K-1-dy)*PW + (K-1-dx)];
  end

endmodule
