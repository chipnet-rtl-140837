// tb_inner_fsm: runs a 3-pass layer on a 6x3 map and checks, cycle by
// cycle, the weight reads (output channels pass*PAR+k), the wt_load strobes
// one cycle after each read, the feature-map address sequence 0..PW*PH-1 of
// every pass, the output-pixel tags of complete windows, the pass length of
// PAR + PW*PH + DRAIN cycles and the single done pulse.
module tb_inner_fsm;
  localparam int unsigned IMG_W = 6, IMG_H = 3, CH = 8, PAR = 2, DRAIN = 5;
  localparam int unsigned PW = IMG_W + 4, PH = IMG_H + 4;
  localparam int unsigned NPASS = 3;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, start = 0; logic [3:0] n_passes = 4'(NPASS);
  logic wt_re; logic [2:0] wt_oc; logic [PAR-1:0] wt_load;
  logic fm_re; logic [$clog2(PW*PH)-1:0] fm_raddr; logic tag_ovalid; logic [$clog2(IMG_W*IMG_H)-1:0] tag_opix;
  logic [2:0] pass_idx; logic busy, done;
  int checks = 0, failures = 0;
  inner_fsm #(.IMG_W(IMG_W), .IMG_H(IMG_H), .CH(CH), .PAR(PAR), .DRAIN(DRAIN)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("%t: %s", $time, what); end
  endtask
  initial begin
    int ndone = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !wt_re && !fm_re, "idle outputs");
    start = 1;
    @(negedge clk);
    start = 0;
    for (int p = 0; p < NPASS; p++) begin
      for (int k = 0; k < PAR; k++) begin
        chk(wt_re && wt_oc == 3'(p*PAR + k), $sformatf("weight read pass %0d k %0d (re=%0b oc=%0d)", p, k, wt_re, wt_oc));
        chk(!fm_re, "no fm read during weight load");
        chk(wt_load == ((k == 0) ? '0 : PAR'(1) << (k-1)), "wt_load strobe");
        @(negedge clk);
      end
      for (int a = 0; a < PW*PH; a++) begin
        automatic int r = a / PW, c = a % PW;
        automatic bit ov = (r >= 4) && (c >= 4);
        if (a == 0) chk(wt_load == PAR'(1) << (PAR-1), "last wt_load on first stream cycle");
        chk(fm_re && fm_raddr == ($bits(fm_raddr))'(a), $sformatf("fm addr %0d got %0d", a, fm_raddr));
        chk(tag_ovalid == ov, "tag valid");
        if (ov) chk(tag_opix == ($bits(tag_opix))'((r-4)*IMG_W + c - 4), "tag pixel");
        chk(pass_idx == 3'(p), "pass index");
        @(negedge clk);
      end
      for (int d = 0; d < DRAIN; d++) begin
        chk(!fm_re && !wt_re && busy, "drain");
        if (done) ndone++;
        @(negedge clk);
      end
    end
    // done is registered: it shows one cycle after the last drain cycle
    if (done) ndone++;
    chk(ndone == 1, $sformatf("done pulses %0d", ndone));
    chk(!busy, "idle after layer");
    repeat (3) begin @(negedge clk); chk(!done && !busy, "stays idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
