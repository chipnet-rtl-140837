// tb_line_buffer: pushes random pixels, with random pauses, into a short
// line buffer and checks every 5x5 window tap against a history of the
// pushed pixels (window[dy][dx] = pixel pushed (4-dy)*PW + (4-dx) pushes ago).
module tb_line_buffer;
  import chipnet_pkg::*;
  localparam int unsigned PW = 7;
  logic clk = 0; always #5 clk = ~clk;
  logic shift_en = 0; data_t din = '0; kernel_t window;
  int checks = 0, failures = 0;
  line_buffer #(.PW(PW)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int hist [$];
  initial begin
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      shift_en = ($urandom % 5 != 0);
      din = data_t'($urandom);
      @(posedge clk);
      if (shift_en) hist.push_front(int'(din));
      #1;
      if (hist.size() >= (K-1)*PW + K)
        for (int dy = 0; dy < K; dy++)
          for (int dx = 0; dx < K; dx++) begin
            checks++;
            if (int'(window[dy*K+dx]) != hist[(K-1-dy)*PW + (K-1-dx)]) begin
              failures++;
              if (failures < 5) $display("n=%0d tap %0d,%0d got %0d exp %0d", n, dy, dx, window[dy*K+dx], hist[(K-1-dy)*PW + (K-1-dx)]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
