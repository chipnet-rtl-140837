// tb_weight_memory: writes a random kernel for every (layer, oc, ic), reads
// every (layer, oc) and checks that bank ic returns the kernel written for
// that input channel, one cycle after the read.
module tb_weight_memory;
  import chipnet_pkg::*;
  localparam int unsigned CH = 4, NLAYERS = 3;
  logic clk = 0; always #5 clk = ~clk;
  logic we = 0; logic [1:0] wlayer = '0, rlayer = '0; logic [1:0] woc = '0, wic = '0, roc = '0;
  kernel_t wdata = '0; logic re = 0; kernel_t rdata [CH];
  int checks = 0, failures = 0;
  weight_memory #(.CH(CH), .NLAYERS(NLAYERS)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  kernel_t m [NLAYERS][CH][CH];
  initial begin
    for (int l = 0; l < NLAYERS; l++)
      for (int oc = 0; oc < CH; oc++)
        for (int ic = 0; ic < CH; ic++) begin
          @(negedge clk);
          we = 1; wlayer = 2'(l); woc = 2'(oc); wic = 2'(ic);
          for (int t = 0; t < KK; t++) wdata[t] = data_t'($urandom);
          m[l][oc][ic] = wdata;
        end
    @(negedge clk); we = 0;
    for (int l = NLAYERS - 1; l >= 0; l--)
      for (int oc = 0; oc < CH; oc++) begin
        @(negedge clk); re = 1; rlayer = 2'(l); roc = 2'(oc);
        @(posedge clk); #1; re = 0;
        for (int ic = 0; ic < CH; ic++) begin
          checks++;
          if (rdata[ic] != m[l][oc][ic]) begin failures++; $display("l=%0d oc=%0d ic=%0d mismatch", l, oc, ic); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
