// tb_chipnet_frame: one complete frame through the accelerator on the
// full 180x64 map with 14 input channels, 10 ChipNet blocks and the output
// mapping (12 layers), but with 16 instead of 64 feature channels, so that
// it finishes in a few minutes of simulation (the 64-channel frame takes
// 4.55 M cycles over 64 slices).
//
// To keep the reference model affordable the network is sparse: every
// output channel of the encoder reads two input channels (plus a junk kernel
// on an unused slice that the chip must ignore), every block output channel
// reads its own channel (so the identity is exercised) and its neighbour,
// and the output mapping reads all channels through its centre tap. The
// reference here is the same fixed-point network as in tb_chipnet_top,
// evaluated over the non-zero kernels only. Every output pixel is checked,
// and the frame latency is checked against the controllers' cycle model.
module tb_chipnet_frame;
  import chipnet_pkg::*;

  localparam int unsigned IMG_W = 180, IMG_H = 64, CH = 16, IN_CH = 14, N_BLOCKS = 10, PAR = 2;
  localparam int unsigned NLAYERS = N_BLOCKS + 2, NPIX = IMG_W * IMG_H;
  localparam int unsigned PXW = $clog2(NPIX), LW = $clog2(NLAYERS), CW = $clog2(CH);
  localparam int unsigned PW = IMG_W + 4, PH = IMG_H + 4;
  localparam int unsigned DRAIN = 2 + $clog2(KK) + $clog2(CH) + 3;
  localparam int unsigned NK = 2;          // non-zero kernels per output channel (hidden layers)

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic wt_we; wt_mode_e wt_mode; logic [LW-1:0] wt_layer; logic [CW-1:0] wt_oc, wt_ic; kernel_t wt_kernel;
  logic in_valid, in_ready; data_t in_pix [IN_CH];
  logic map_valid; logic [PXW-1:0] map_idx; data_t map_data; logic clip, busy, frame_done;

  chipnet_top #(.IMG_W(IMG_W), .IMG_H(IMG_H), .CH(CH), .IN_CH(IN_CH), .N_BLOCKS(N_BLOCKS), .PAR(PAR)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sparse reference network: kernel k of output channel oc in layer l
  int kic [NLAYERS][CH][NK];
  int kw  [NLAYERS][CH][NK][KK];
  int ow  [CH];                          // output layer centre taps
  int fm [CH][IMG_H][IMG_W];
  int nx [CH][IMG_H][IMG_W];

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int clip18(longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return int'(v);
  endfunction

  task automatic write_kernel(int l, int oc, int ic, wt_mode_e m, int t [KK]);
    @(negedge clk);
    wt_we = 1'b1; wt_mode = m; wt_layer = LW'(l); wt_oc = CW'(oc); wt_ic = CW'(ic);
    for (int i = 0; i < KK; i++) wt_kernel[i] = data_t'(t[i]);
    @(negedge clk);
    wt_we = 1'b0;
  endtask

  task automatic load_weights();
    int t [KK];
    for (int oc = 0; oc < CH; oc++) begin
      // encoder
      for (int k = 0; k < NK; k++) begin
        kic[0][oc][k] = (oc + 5*k) % IN_CH;
        for (int i = 0; i < KK; i++) begin t[i] = rnd(-200, 200); kw[0][oc][k][i] = t[i]; end
        write_kernel(0, oc, kic[0][oc][k], WT_FULL5X5, t);
      end
      for (int i = 0; i < KK; i++) t[i] = 3000;
      write_kernel(0, oc, IN_CH + oc % (CH - IN_CH), WT_FULL5X5, t);   // must be masked off
      // blocks
      for (int l = 1; l <= N_BLOCKS; l++)
        for (int k = 0; k < NK; k++) begin
          kic[l][oc][k] = (oc + k) % CH;
          for (int i = 0; i < KK; i++) t[i] = 0;
          for (int i = 0; i < 18; i++) t[i] = rnd(-150, 150);
          for (int i = 0; i < KK; i++) kw[l][oc][k][i] = 0;
          for (int dy = 0; dy < 3; dy++)
            for (int dx = 0; dx < 3; dx++) begin
              kw[l][oc][k][(dy+1)*5 + dx + 1] = t[dy*3+dx];
              kw[l][oc][k][(2*dy)*5 + 2*dx]   = t[9 + dy*3 + dx];
            end
          kw[l][oc][k][12] = clip18(t[4] + t[13] + ((k == 0) ? 1024 : 0));
          write_kernel(l, oc, kic[l][oc][k], WT_BLOCK, t);
        end
    end
    for (int ic = 0; ic < CH; ic++) begin
      for (int i = 0; i < KK; i++) t[i] = 0;
      t[12] = rnd(-300, 300);
      ow[ic] = t[12];
      write_kernel(NLAYERS - 1, 0, ic, WT_FULL5X5, t);
    end
  endtask

  task automatic ref_hidden(int l);
    longint acc; int r2, c2, ic;
    for (int oc = 0; oc < CH; oc++)
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++) begin
          acc = 0;
          for (int k = 0; k < NK; k++) begin
            ic = kic[l][oc][k];
            for (int dy = 0; dy < 5; dy++) begin
              r2 = r + dy - 2;
              if (r2 >= 0 && r2 < IMG_H)
                for (int dx = 0; dx < 5; dx++) begin
                  c2 = c + dx - 2;
                  if (c2 >= 0 && c2 < IMG_W)
                    acc += longint'(fm[ic][r2][c2]) * longint'(kw[l][oc][k][dy*5+dx]);
                end
            end
          end
          nx[oc][r][c] = clip18((acc + 512) >>> 10);
          if (nx[oc][r][c] < 0) nx[oc][r][c] = 0;
        end
    fm = nx;
  endtask

  int expected [NPIX];
  int got [NPIX];
  int ngot = 0;
  always @(posedge clk) if (map_valid) begin got[map_idx] <= int'(map_data); ngot <= ngot + 1; end

  longint t_last_in, t_done, model;

  initial begin
    longint acc;
    wt_we = 1'b0; wt_mode = WT_FULL5X5; wt_layer = '0; wt_oc = '0; wt_ic = '0; wt_kernel = '0;
    in_valid = 1'b0;
    for (int i = 0; i < IN_CH; i++) in_pix[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load_weights();

    for (int ch = 0; ch < CH; ch++)
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++) fm[ch][r][c] = (ch < IN_CH) ? rnd(-3000, 3000) : 0;

    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int i = 0; i < IN_CH; i++) in_pix[i] = data_t'(fm[i][p / IMG_W][p % IMG_W]);
    end
    @(negedge clk);
    in_valid = 1'b0;
    t_last_in = cyc;

    // in_valid is 0 here; using it keeps the layer loop a run-time loop
    for (int l = 0; l <= N_BLOCKS + int'(in_valid); l++) ref_hidden(l);
    for (int r = 0; r < IMG_H; r++)
      for (int c = 0; c < IMG_W; c++) begin
        acc = 0;
        for (int ic = 0; ic < CH; ic++) acc += longint'(fm[ic][r][c]) * longint'(ow[ic]);
        expected[r*IMG_W + c] = clip18((acc + 512) >>> 10);
      end
    $display("reference ready at cycle %0d", cyc);

    while (!frame_done) @(posedge clk);
    t_done = cyc;
    repeat (2) @(posedge clk);

    checks++;
    if (ngot != NPIX) begin failures++; $display("%0d outputs, expected %0d", ngot, NPIX); end
    for (int p = 0; p < NPIX; p++) begin
      checks++;
      if (got[p] != expected[p]) begin
        failures++;
        if (failures < 10) $display("pixel %0d: got %0d expected %0d", p, got[p], expected[p]);
      end
    end
    model = 0;
    for (int l = 0; l < NLAYERS; l++) begin
      model += 2 + ((l == NLAYERS - 1) ? 1 : CH / PAR) * (PAR + PW*PH + DRAIN);
      if (l != NLAYERS - 1) model += NPIX + 1;
    end
    checks++;
    $display("frame latency %0d cycles (model %0d), %0.2f ms at 350 MHz", t_done - t_last_in, model,
             real'(t_done - t_last_in) / 350.0e3);
    if ((t_done - t_last_in) > model + 4 || (t_done - t_last_in) + 4 < model) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // progress
  always @(posedge clk) if (dut.inner_start) $display("layer %0d starts at cycle %0d", dut.layer, cyc);
endmodule
