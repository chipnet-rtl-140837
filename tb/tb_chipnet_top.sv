// tb_chipnet_top: end-to-end test of the accelerator at reduced size.
//
// Loads random weights for every layer (encoder kernels as full 5x5 kernels,
// block kernels as w/v pairs that the chip composes itself, the output
// mapping as a centre tap), streams NFRAMES random input maps and compares
// every output pixel with a reference model of the network written here
// independently of the RTL: zero-padded 5x5 cross-correlation, round-half-up
// requantisation with clipping to 18 bits, ReLU except on the output layer.
// It also checks the frame latency against the cycle model of the
// controllers and counts how often each mechanism occurred: zero padding at
// the map border, the encoder's input-channel mask (junk weights are written
// for unused slices), ReLU clipping, 18-bit saturation, the identity term of
// block kernels, input back-pressure and the intermediate-to-feature-map
// move. A mechanism that never occurred counts as a failure.
module tb_chipnet_top;
  import chipnet_pkg::*;

  localparam int unsigned IMG_W = 9, IMG_H = 6, CH = 4, IN_CH = 3, N_BLOCKS = 2, PAR = 2;
  localparam int unsigned NFRAMES = 2;
  localparam int unsigned NLAYERS = N_BLOCKS + 2;
  localparam int unsigned NPIX = IMG_W * IMG_H;
  localparam int unsigned PXW = $clog2(NPIX), LW = $clog2(NLAYERS), CW = $clog2(CH);
  localparam int unsigned PW = IMG_W + 4, PH = IMG_H + 4;
  localparam int unsigned DRAIN = 2 + $clog2(KK) + $clog2(CH) + 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wt_we; wt_mode_e wt_mode; logic [LW-1:0] wt_layer; logic [CW-1:0] wt_oc, wt_ic; kernel_t wt_kernel;
  logic in_valid, in_ready; data_t in_pix [IN_CH];
  logic map_valid; logic [PXW-1:0] map_idx; data_t map_data; logic clip, busy, frame_done;

  chipnet_top #(.IMG_W(IMG_W), .IMG_H(IMG_H), .CH(CH), .IN_CH(IN_CH), .N_BLOCKS(N_BLOCKS), .PAR(PAR)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  int W [NLAYERS][CH][CH][KK];   // [layer][oc][ic][tap], composed
  int fm [CH][IMG_H][IMG_W];
  int nx [CH][IMG_H][IMG_W];
  int expected [NPIX];
  int n_pad = 0, n_mask = 0, n_relu = 0, n_sat = 0, n_ident = 0, n_bp = 0, n_move = 0, n_clip_port = 0;

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
    int c;
    for (int l = 0; l < NLAYERS; l++)
      for (int oc = 0; oc < CH; oc++)
        for (int ic = 0; ic < CH; ic++) begin
          for (int i = 0; i < KK; i++) t[i] = 0;
          for (int i = 0; i < KK; i++) W[l][oc][ic][i] = 0;
          if (l == 0) begin
            for (int i = 0; i < KK; i++) t[i] = rnd(-300, 300);
            if (oc == 1 && ic == 0) t[12] = 60000;     // drives channel 1 into saturation
            for (int i = 0; i < KK; i++) W[l][oc][ic][i] = (ic < IN_CH) ? t[i] : 0;
            if (ic >= IN_CH) n_mask++;
            write_kernel(l, oc, ic, WT_FULL5X5, t);
          end else if (l <= N_BLOCKS) begin
            for (int i = 0; i < 18; i++) t[i] = rnd(-120, 120);
            for (int i = 18; i < KK; i++) t[i] = rnd(-500, 500);   // ignored by the chip
            for (int dy = 0; dy < 3; dy++)
              for (int dx = 0; dx < 3; dx++) begin
                W[l][oc][ic][(dy+1)*5 + dx + 1] = t[dy*3+dx];
                W[l][oc][ic][(2*dy)*5 + 2*dx]   = t[9 + dy*3 + dx];
              end
            c = t[4] + t[13] + ((oc == ic) ? 1024 : 0);
            if (oc == ic) n_ident++;
            W[l][oc][ic][12] = clip18(c);
            write_kernel(l, oc, ic, WT_BLOCK, t);
          end else begin
            if (oc == 0) begin
              t[12] = rnd(-400, 400);
              W[l][oc][ic][12] = t[12];
              write_kernel(l, oc, ic, WT_FULL5X5, t);
            end
          end
        end
  endtask

  // one layer of the reference network
  task automatic ref_layer(int l, bit act);
    longint acc; int q; int r2, c2; int nic, noc;
    nic = (l == 0) ? IN_CH : CH;
    noc = (l == NLAYERS - 1) ? 1 : CH;
    for (int oc = 0; oc < noc; oc++)
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++) begin
          acc = 0;
          for (int ic = 0; ic < nic; ic++)
            for (int dy = 0; dy < 5; dy++)
              for (int dx = 0; dx < 5; dx++) begin
                r2 = r + dy - 2; c2 = c + dx - 2;
                if (r2 < 0 || r2 >= IMG_H || c2 < 0 || c2 >= IMG_W) begin
                  if (W[l][oc][ic][dy*5+dx] != 0 && oc == 0 && ic == 0) n_pad++;
                end else begin
                  acc += longint'(fm[ic][r2][c2]) * longint'(W[l][oc][ic][dy*5+dx]);
                end
              end
          acc = (acc + 512) >>> 10;
          q = clip18(acc);
          if (longint'(q) != acc) n_sat++;
          if (act && q < 0) begin q = 0; n_relu++; end
          nx[oc][r][c] = q;
        end
    for (int oc = 0; oc < noc; oc++)
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++) fm[oc][r][c] = nx[oc][r][c];
  endtask

  // output collector
  int got [NPIX];
  int ngot;
  always @(posedge clk) begin
    if (map_valid) begin
      got[map_idx] <= int'(map_data);
      ngot <= ngot + 1;
    end
    if (clip) n_clip_port++;
    if (in_valid && !in_ready) n_bp++;
    if (dut.ib_re) n_move++;
  end

  longint t_last_in, t_done, model;
  int inp [IMG_H][IMG_W][IN_CH];

  initial begin
    wt_we = 1'b0; wt_mode = WT_FULL5X5; wt_layer = '0; wt_oc = '0; wt_ic = '0; wt_kernel = '0;
    in_valid = 1'b0;
    for (int i = 0; i < IN_CH; i++) in_pix[i] = '0;
    ngot = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load_weights();

    for (int f = 0; f < NFRAMES; f++) begin
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++)
          for (int i = 0; i < IN_CH; i++) inp[r][c][i] = rnd(-4000, 4000);
      // reference
      for (int ch = 0; ch < CH; ch++)
        for (int r = 0; r < IMG_H; r++)
          for (int c = 0; c < IMG_W; c++) fm[ch][r][c] = (ch < IN_CH) ? inp[r][c][ch] : 0;
      for (int l = 0; l < NLAYERS; l++) ref_layer(l, l != NLAYERS - 1);
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++) expected[r*IMG_W + c] = fm[0][r][c];

      // stream the frame, with idle gaps
      ngot = 0;
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1;
        for (int i = 0; i < IN_CH; i++) in_pix[i] = data_t'(inp[p / IMG_W][p % IMG_W][i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      t_last_in = cyc;
      // keep offering the next frame's first pixel: it must be held off
      @(negedge clk);
      in_valid = 1'b1;
      @(posedge clk);
      while (!frame_done) @(posedge clk);
      t_done = cyc;
      @(negedge clk);
      in_valid = 1'b0;
      repeat (3) @(posedge clk);

      checks++;
      if (ngot != NPIX) begin failures++; $display("frame %0d: %0d outputs, expected %0d", f, ngot, NPIX); end
      for (int p = 0; p < NPIX; p++) begin
        checks++;
        if (got[p] != expected[p]) begin
          failures++;
          if (failures < 10) $display("frame %0d pixel %0d: got %0d expected %0d", f, p, got[p], expected[p]);
        end
      end
      // latency model: per layer start + passes*(PAR + PW*PH + DRAIN) + done, plus a move between layers
      model = 0;
      for (int l = 0; l < NLAYERS; l++) begin
        model += 2 + ((l == NLAYERS - 1) ? 1 : CH / PAR) * (PAR + PW*PH + DRAIN);
        if (l != NLAYERS - 1) model += NPIX + 1;
      end
      checks++;
      if ((t_done - t_last_in) > model + 4 || (t_done - t_last_in) + 4 < model) begin
        failures++;
        $display("frame latency %0d cycles, model %0d", t_done - t_last_in, model);
      end else $display("frame %0d latency %0d cycles (model %0d)", f, t_done - t_last_in, model);
    end

    $display("mechanisms: pad=%0d mask=%0d relu=%0d sat=%0d clip_port=%0d ident=%0d backpressure=%0d move=%0d",
             n_pad, n_mask, n_relu, n_sat, n_clip_port, n_ident, n_bp, n_move);
    if (n_pad == 0)  failures++;
    if (n_mask == 0) failures++;
    if (n_relu == 0) failures++;
    if (n_sat == 0 || n_clip_port == 0) failures++;
    if (n_ident == 0) failures++;
    if (n_bp == 0)   failures++;
    if (n_move == 0) failures++;
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
