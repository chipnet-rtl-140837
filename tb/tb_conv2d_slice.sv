// tb_conv2d_slice: loads two random kernels, streams random pixels with
// pauses and checks both sums against the dot product of each kernel with
// the window taken from a pixel history kept here, 7 cycles after the push
// that completed the window. Also checks that wt_en = 0 loads a zero kernel.
module tb_conv2d_slice;
  import chipnet_pkg::*;
  localparam int unsigned PW = 8, PAR = 2, SW = 2*DW + 5, LAT = 7;
  logic clk = 0; always #5 clk = ~clk;
  logic [PAR-1:0] wt_load = '0; logic wt_en = 1; kernel_t wt_in = '0;
  logic in_valid = 0; data_t din = '0; logic signed [SW-1:0] sum [PAR];
  int checks = 0, failures = 0;
  conv2d_slice #(.PW(PW), .PAR(PAR)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  kernel_t kr [PAR];
  int hist [$];
  longint exp0 [$], exp1 [$];
  bit     expv [$];
  initial begin
    for (int phase = 0; phase < 2; phase++) begin
      for (int p = 0; p < PAR; p++) begin
        @(negedge clk);
        for (int t = 0; t < KK; t++) wt_in[t] = data_t'($urandom);
        wt_en = !(phase == 1 && p == 1);
        kr[p] = wt_en ? wt_in : '0;
        wt_load = PAR'(1) << p;
      end
      @(negedge clk); wt_load = '0; wt_en = 1;
      for (int n = 0; n < 120; n++) begin
        @(negedge clk);
        in_valid = ($urandom % 4 != 0);
        din = data_t'($urandom);
        if (in_valid) hist.push_front(int'(din));
        // expected value of the window after this push, due LAT cycles later
        if (in_valid && hist.size() >= (K-1)*PW + K) begin
          automatic longint s0 = 0, s1 = 0;
          for (int dy = 0; dy < K; dy++)
            for (int dx = 0; dx < K; dx++) begin
              s0 += longint'(hist[(K-1-dy)*PW + (K-1-dx)]) * longint'(kr[0][dy*K+dx]);
              s1 += longint'(hist[(K-1-dy)*PW + (K-1-dx)]) * longint'(kr[1][dy*K+dx]);
            end
          exp0.push_back(s0); exp1.push_back(s1); expv.push_back(1);
        end else begin
          exp0.push_back(0); exp1.push_back(0); expv.push_back(0);
        end
        if (expv.size() > LAT) begin
          if (expv[0]) begin
            checks += 2;
            if (longint'(sum[0]) != exp0[0]) begin failures++; if (failures < 5) $display("phase %0d n %0d sum0 got %0d exp %0d", phase, n, sum[0], exp0[0]); end
            if (longint'(sum[1]) != exp1[0]) begin failures++; if (failures < 5) $display("sum1 got %0d exp %0d", sum[1], exp1[0]); end
          end
          void'(exp0.pop_front()); void'(exp1.pop_front()); void'(expv.pop_front());
        end
      end
      @(negedge clk);
      in_valid = 0;
      repeat (LAT + 2) @(negedge clk);
      exp0.delete(); exp1.delete(); expv.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
