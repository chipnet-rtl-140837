// tb_fmap_buffer: writes a random map (some channels masked off), reads all
// padded addresses in order and checks the zero-padded image: border words
// zero, interior words equal to what was written, masked channels still
// zero. Then overwrites part of one channel and checks that the read
// latency is one cycle.
module tb_fmap_buffer;
  import chipnet_pkg::*;
  localparam int unsigned IMG_W = 6, IMG_H = 3, CH = 3;
  localparam int unsigned PW = IMG_W + 4, PH = IMG_H + 4, DEPTH = PW * PH;
  logic clk = 0; always #5 clk = ~clk;
  logic [CH-1:0] we = '0; logic [$clog2(IMG_H)-1:0] wrow = '0; logic [$clog2(IMG_W)-1:0] wcol = '0;
  data_t wdata [CH]; logic re = 0; logic [$clog2(DEPTH)-1:0] raddr = '0; data_t rdata [CH];
  int checks = 0, failures = 0;
  fmap_buffer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .CH(CH)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int img [CH][IMG_H][IMG_W];
  task automatic read_all();
    for (int a = 0; a < DEPTH; a++) begin
      int r, c, e;
      @(negedge clk); re = 1; raddr = ($bits(raddr))'(a);
      @(posedge clk); #1; re = 0;
      r = a / PW - 2; c = a % PW - 2;
      for (int ch = 0; ch < CH; ch++) begin
        e = (r < 0 || r >= IMG_H || c < 0 || c >= IMG_W) ? 0 : img[ch][r][c];
        checks++;
        if (int'(rdata[ch]) != e) begin failures++; if (failures < 6) $display("addr %0d ch %0d got %0d exp %0d", a, ch, rdata[ch], e); end
      end
    end
  endtask
  initial begin
    for (int ch = 0; ch < CH; ch++) wdata[ch] = '0;
    for (int r = 0; r < IMG_H; r++)
      for (int c = 0; c < IMG_W; c++) begin
        @(negedge clk);
        we = 3'b011; wrow = 2'(r); wcol = 3'(c);
        for (int ch = 0; ch < CH; ch++) begin
          wdata[ch] = data_t'($urandom);
          img[ch][r][c] = (ch < 2) ? int'(wdata[ch]) : 0;
        end
      end
    @(negedge clk); we = '0;
    read_all();
    // overwrite row 1 of channel 2
    for (int c = 0; c < IMG_W; c++) begin
      @(negedge clk);
      we = 3'b100; wrow = 2'd1; wcol = 3'(c); wdata[2] = data_t'(1000 + c);
      img[2][1][c] = 1000 + c;
    end
    @(negedge clk); we = '0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
