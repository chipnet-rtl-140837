// tb_outer_fsm: drives the layer sequencer with a model of the inner FSM
// that answers each start with done after a fixed delay. Checks the input
// handshake and the row/column of every loaded pixel, the layer order and
// per-layer configuration (passes, active input channels, ReLU, output
// mode), the move sequence between layers (read addresses 0..NPIX-1, writes
// one cycle later at the matching row/column) and the frame_done pulse.
module tb_outer_fsm;
  localparam int unsigned IMG_W = 5, IMG_H = 3, CH = 8, IN_CH = 3, PAR = 2, N_BLOCKS = 2;
  localparam int unsigned NLAYERS = N_BLOCKS + 2, NPIX = IMG_W * IMG_H;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, in_valid = 0, in_ready, inner_start, inner_done = 0;
  logic [1:0] layer; logic [3:0] n_passes, n_ch_active; logic relu_en, out_mode;
  logic fm_we_load, fm_we_move; logic [1:0] fm_wrow; logic [2:0] fm_wcol;
  logic ib_re; logic [3:0] ib_raddr; logic busy, frame_done;
  int checks = 0, failures = 0;
  outer_fsm #(.IMG_W(IMG_W), .IMG_H(IMG_H), .CH(CH), .IN_CH(IN_CH), .PAR(PAR), .N_BLOCKS(N_BLOCKS)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("%t: %s", $time, what); end
  endtask
  // inner FSM model
  initial forever begin
    @(posedge clk);
    if (inner_start) begin
      repeat (7) @(posedge clk);
      #1 inner_done = 1;
      @(posedge clk);
      #1 inner_done = 0;
    end
  end
  // layer-order monitor
  int starts [$];
  always @(posedge clk) if (rst_n && inner_start) begin
    starts.push_back(int'(layer));
    chk(n_passes == ((int'(layer) == NLAYERS-1) ? 4'd1 : 4'(CH/PAR)), "n_passes");
    chk(n_ch_active == ((layer == 0) ? 4'(IN_CH) : 4'(CH)), "n_ch_active");
    chk(relu_en == (int'(layer) != NLAYERS-1), "relu_en");
    chk(out_mode == (int'(layer) == NLAYERS-1), "out_mode");
  end
  // move monitor
  int rd_seq [$]; int mv_writes = 0; int last_rd = -1;
  always @(posedge clk) if (rst_n) begin
    if (fm_we_move) begin
      chk(last_rd >= 0 && int'(fm_wrow) * IMG_W + int'(fm_wcol) == last_rd, "move write position");
      mv_writes++;
    end
    last_rd = ib_re ? int'(ib_raddr) : -1;
    if (ib_re) rd_seq.push_back(int'(ib_raddr));
  end
  initial begin
    int nd = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      starts.delete(); rd_seq.delete(); mv_writes = 0;
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        in_valid = 1;
        #1;
        chk(in_ready && fm_we_load, "load accepted");
        chk(int'(fm_wrow) == p / IMG_W && int'(fm_wcol) == p % IMG_W, "load position");
        @(negedge clk);
        in_valid = 0;
      end
      in_valid = 1;
      nd = 0;
      for (int t = 0; t < 2000 && nd == 0; t++) begin
        @(negedge clk);
        chk(!in_ready && !fm_we_load, "input held off while busy");
        if (frame_done) nd++;
      end
      in_valid = 0;
      chk(nd == 1, "frame_done");
      chk(starts.size() == NLAYERS, $sformatf("layer starts %0d", starts.size()));
      for (int l = 0; l < starts.size(); l++) chk(starts[l] == l, "layer order");
      chk(rd_seq.size() == (NLAYERS-1) * NPIX, "move reads");
      for (int i = 0; i < rd_seq.size(); i++) chk(rd_seq[i] == i % NPIX, "move read order");
      chk(mv_writes == (NLAYERS-1) * NPIX, "move writes");
      @(negedge clk);
      chk(in_ready && !busy, "back to load");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
