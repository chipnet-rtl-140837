// tb_conv3d: a 4-slice unit with one slice disabled. Loads random kernels,
// streams random multi-channel pixels and checks both output-channel sums
// (sum over enabled channels of the 5x5 dot products, from a history kept
// here), the tag and valid side band, and the latency of
// 2 + clog2(25) + clog2(CH) cycles.
module tb_conv3d;
  import chipnet_pkg::*;
  localparam int unsigned CH = 4, PW = 8, PAR = 2, TW = 8;
  localparam int unsigned SW = 2*DW + 5, AW = SW + 2, LAT = 2 + 5 + 2;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0;
  logic [PAR-1:0] wt_load = '0; kernel_t wt_in [CH]; logic [CH-1:0] ch_en = 4'b1011;
  logic in_valid = 0; data_t din [CH]; logic [TW-1:0] in_tag = '0;
  logic out_valid; logic [TW-1:0] out_tag; logic signed [AW-1:0] acc [PAR];
  int checks = 0, failures = 0;
  conv3d #(.CH(CH), .PW(PW), .PAR(PAR), .TW(TW)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  kernel_t kr [PAR][CH];
  int hist [CH][$];
  longint e0 [$], e1 [$]; int ev [$]; int et [$];
  int nvalid = 0;
  initial begin
    for (int c = 0; c < CH; c++) begin din[c] = '0; wt_in[c] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < PAR; p++) begin
      @(negedge clk);
      for (int c = 0; c < CH; c++) begin
        for (int t = 0; t < KK; t++) wt_in[c][t] = data_t'($urandom);
        kr[p][c] = ch_en[c] ? wt_in[c] : '0;
      end
      wt_load = PAR'(1) << p;
    end
    @(negedge clk); wt_load = '0;
    for (int n = 0; n < 150; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 5 != 0);
      in_tag = TW'(n);
      for (int c = 0; c < CH; c++) begin
        din[c] = data_t'($urandom);
        if (in_valid) hist[c].push_front(int'(din[c]));
      end
      if (in_valid && hist[0].size() >= (K-1)*PW + K) begin
        automatic longint s0 = 0, s1 = 0;
        for (int c = 0; c < CH; c++)
          for (int dy = 0; dy < K; dy++)
            for (int dx = 0; dx < K; dx++) begin
              s0 += longint'(hist[c][(K-1-dy)*PW + (K-1-dx)]) * longint'(kr[0][c][dy*K+dx]);
              s1 += longint'(hist[c][(K-1-dy)*PW + (K-1-dx)]) * longint'(kr[1][c][dy*K+dx]);
            end
          e0.push_back(s0); e1.push_back(s1); ev.push_back(2);
      end else begin
        e0.push_back(0); e1.push_back(0); ev.push_back(in_valid ? 1 : 0);
      end
      et.push_back(n);
      if (ev.size() > LAT) begin
        checks++;
        if (out_valid != (ev[0] != 0)) begin failures++; $display("valid mismatch at %0d", n); end
        if (ev[0] != 0) begin
          checks++;
          if (out_tag != TW'(et[0])) begin failures++; $display("tag got %0d exp %0d", out_tag, et[0]); end
        end
        if (ev[0] == 2) begin
          nvalid++;
          checks += 2;
          if (longint'(acc[0]) != e0[0]) begin failures++; if (failures < 5) $display("acc0 got %0d exp %0d", acc[0], e0[0]); end
          if (longint'(acc[1]) != e1[0]) begin failures++; if (failures < 5) $display("acc1 got %0d exp %0d", acc[1], e1[0]); end
        end
        void'(e0.pop_front()); void'(e1.pop_front()); void'(ev.pop_front()); void'(et.pop_front());
      end
    end
    checks++;
    if (nvalid < 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
