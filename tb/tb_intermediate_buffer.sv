// tb_intermediate_buffer: writes pairs of channels per cycle the way the
// convolution passes do, then reads every pixel of all channels and
// compares with a copy kept here; checks the one-cycle read latency.
module tb_intermediate_buffer;
  import chipnet_pkg::*;
  localparam int unsigned NPIX = 20, CH = 4;
  logic clk = 0; always #5 clk = ~clk;
  logic [CH-1:0] we = '0; logic [$clog2(NPIX)-1:0] waddr = '0, raddr = '0; data_t wdata [CH];
  logic re = 0; data_t rdata [CH];
  int checks = 0, failures = 0;
  intermediate_buffer #(.NPIX(NPIX), .CH(CH)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int m [CH][NPIX];
  initial begin
    for (int pass = 0; pass < CH / 2; pass++)
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        we = '0; we[2*pass] = 1; we[2*pass+1] = 1; waddr = 5'(p);
        for (int c = 0; c < CH; c++) wdata[c] = data_t'($urandom);
        m[2*pass][p] = int'(wdata[2*pass]); m[2*pass+1][p] = int'(wdata[2*pass+1]);
      end
    @(negedge clk); we = '0;
    for (int p = NPIX - 1; p >= 0; p--) begin
      @(negedge clk); re = 1; raddr = 5'(p);
      @(posedge clk); #1; re = 0;
      for (int c = 0; c < CH; c++) begin
        checks++;
        if (int'(rdata[c]) != m[c][p]) begin failures++; $display("pix %0d ch %0d got %0d exp %0d", p, c, rdata[c], m[c][p]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
