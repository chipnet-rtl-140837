// chipnet_top: ChipNet LiDAR segmentation CNN accelerator.
//
// The network is a 5x5 encoder (IN_CH -> CH channels), N_BLOCKS ChipNet
// blocks (identity + 3x3 + dilated 3x3, each equal to one 5x5 convolution,
// CH -> CH channels) and a 1x1 output mapping (CH -> 1), all on an
// IMG_W x IMG_H map with 18-bit fixed-point data. Every layer runs on one
// reused 3D convolution unit:
//
//   host stream -> feature map buffer (zero padded) -> 3D convolution unit
//   (CH slices x PAR kernels, adder trees) -> requantize -> ReLU
//   -> intermediate buffer -> (moved back) -> feature map buffer ...
//
// The outer FSM orders the layers and moves data between the buffers; the
// inner FSM runs the CH/PAR passes of a layer. Kernels live in the on-chip
// weight memory and are written by the host beforehand; a kernel written in
// WT_BLOCK mode is turned into the equivalent 5x5 kernel on the way in.
// The results of the output layer leave the chip as a stream.
//
// Interfaces (all synchronous to clk, active-low asynchronous rst_n):
//   weights:  wt_we, wt_mode, wt_layer, wt_oc, wt_ic, wt_kernel; one
//             kernel per cycle, only while the accelerator is idle.
//   input:    in_valid/in_ready/in_pix, IMG_W*IMG_H beats per frame,
//             row-major, IN_CH channels per beat. in_ready is high only
//             while the accelerator waits for a frame.
//   output:   map_valid/map_idx/map_data, IMG_W*IMG_H results of the output
//             layer in row-major order (map_idx = row*IMG_W + col); no
//             back-pressure. frame_done pulses after the last one.
//   status:   clip pulses when a result word was clipped to 18 bits;
//             busy is high from the last input pixel to frame_done.
// Timing: per layer (CH/PAR) passes of PAR + (IMG_W+4)(IMG_H+4) + DRAIN
// cycles, plus IMG_W*IMG_H + 2 cycles of data move; see README.
// The structure follows the paper; the host ports stand in for its
// Ethernet link, and the handshakes are this design's choice.
module chipnet_top
  import chipnet_pkg::*;
#(
  parameter int unsigned IMG_W    = 180,
  parameter int unsigned IMG_H    = 64,
  parameter int unsigned CH       = 64,
  parameter int unsigned IN_CH    = 14,
  parameter int unsigned N_BLOCKS = 10,
  parameter int unsigned PAR      = 2,
  parameter int unsigned NLAYERS  = N_BLOCKS + 2,
  parameter int unsigned NPIX     = IMG_W * IMG_H,
  parameter int unsigned PXW      = $clog2(NPIX),
  parameter int unsigned LW       = $clog2(NLAYERS),
  parameter int unsigned CW       = $clog2(CH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // weight write port
  input  logic           wt_we,
  input  wt_mode_e       wt_mode,
  input  logic [LW-1:0]  wt_layer,
  input  logic [CW-1:0]  wt_oc,
  input  logic [CW-1:0]  wt_ic,
  input  kernel_t        wt_kernel,
  // input feature map
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t          in_pix [IN_CH],
  // output map
  output logic           map_valid,
  output logic [PXW-1:0] map_idx,
  output data_t          map_data,
  output logic           clip,
  output logic           busy,
  output logic           frame_done
);

  localparam int unsigned PW      = IMG_W + K - 1;
  localparam int unsigned PH      = IMG_H + K - 1;
  localparam int unsigned FAW     = $clog2(PW * PH);
  localparam int unsigned TW      = PXW + 1;
  localparam int unsigned SW      = 2*DW + $clog2(KK);
  localparam int unsigned AW      = SW + $clog2(CH);
  localparam int unsigned CLAT    = 2 + $clog2(KK) + $clog2(CH);
  localparam int unsigned DRAIN   = CLAT + 3;   // RAM read + conv + result reg + write

  // ---------------- controllers ----------------
  logic           inner_start, inner_done, inner_busy;
  logic [LW-1:0]  layer;
  logic [CW:0]    n_passes, n_ch_active;
  logic           relu_en, out_mode;
  logic           fm_we_load, fm_we_move;
  logic [$clog2(IMG_H)-1:0] fm_wrow;
  logic [$clog2(IMG_W)-1:0] fm_wcol;
  logic           ib_re;
  logic [PXW-1:0] ib_raddr;
  logic           wt_re;
  logic [CW-1:0]  wt_roc;
  logic [PAR-1:0] wt_load;
  logic           fm_re;
  logic [FAW-1:0] fm_raddr;
  logic           tag_ovalid;
  logic [PXW-1:0] tag_opix;
  logic [CW-1:0]  pass_idx;

  outer_fsm #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .CH(CH), .IN_CH(IN_CH), .PAR(PAR), .N_BLOCKS(N_BLOCKS)
  ) u_outer (
    .clk, .rst_n,
    .in_valid, .in_ready,
    .inner_start, .inner_done,
    .layer, .n_passes, .n_ch_active, .relu_en, .out_mode,
    .fm_we_load, .fm_we_move, .fm_wrow, .fm_wcol,
    .ib_re, .ib_raddr,
    .busy, .frame_done
  );

  inner_fsm #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .CH(CH), .PAR(PAR), .K(K), .DRAIN(DRAIN)
  ) u_inner (
    .clk, .rst_n,
    .start(inner_start), .n_passes,
    .wt_re, .wt_oc(wt_roc), .wt_load,
    .fm_re, .fm_raddr, .tag_ovalid, .tag_opix,
    .pass_idx, .busy(inner_busy), .done(inner_done)
  );

  // ---------------- weight memory ----------------
  kernel_t wt_composed;
  kernel_t wt_rdata [CH];

  kernel_compose u_compose (
    .mode (wt_mode),
    .ident(wt_oc == wt_ic),
    .kin  (wt_kernel),
    .kout (wt_composed)
  );

  weight_memory #(.CH(CH), .NLAYERS(NLAYERS)) u_wmem (
    .clk,
    .we(wt_we), .wlayer(wt_layer), .woc(wt_oc), .wic(wt_ic), .wdata(wt_composed),
    .re(wt_re), .rlayer(layer), .roc(wt_roc), .rdata(wt_rdata)
  );

  // ---------------- feature map buffer ----------------
  data_t         fm_wdata [CH];
  data_t         fm_rdata [CH];
  data_t         ib_rdata [CH];
  logic [CH-1:0] fm_we;
  logic [CH-1:0] ch_en;

  always_comb begin
    for (int unsigned c = 0; c < CH; c++) begin
      ch_en[c] = (c < 32'(n_ch_active));
      if (fm_we_load) begin
        fm_we[c]    = (c < IN_CH);
        fm_wdata[c] = (c < IN_CH) ? in_pix[c % IN_CH] : '0;
      end else begin
        fm_we[c]    = fm_we_move;
        fm_wdata[c] = ib_rdata[c];
      end
    end
  end

  fmap_buffer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .CH(CH)) u_fmap (
    .clk,
    .we(fm_we), .wrow(fm_wrow), .wcol(fm_wcol), .wdata(fm_wdata),
    .re(fm_re), .raddr(fm_raddr), .rdata(fm_rdata)
  );

  // ---------------- 3D convolution ----------------
  logic          cv_in_valid;
  logic [TW-1:0] cv_in_tag, cv_out_tag;
  logic          cv_out_valid;
  logic signed [AW-1:0] cv_acc [PAR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cv_in_valid <= 1'b0;
      cv_in_tag   <= '0;
    end else begin
      cv_in_valid <= fm_re;                   // aligned with fm_rdata
      cv_in_tag   <= {tag_ovalid, tag_opix};
    end
  end

  conv3d #(.CH(CH), .PW(PW), .PAR(PAR), .TW(TW), .SW(SW), .AW(AW), .LAT(CLAT)) u_conv (
    .clk, .rst_n,
    .wt_load, .wt_in(wt_rdata), .ch_en,
    .in_valid(cv_in_valid), .din(fm_rdata), .in_tag(cv_in_tag),
    .out_valid(cv_out_valid), .out_tag(cv_out_tag), .acc(cv_acc)
  );

  // ---------------- requantize + ReLU ----------------
  data_t          q [PAR];
  data_t          act [PAR];
  logic [PAR-1:0] sat;

  for (genvar p = 0; p < PAR; p++) begin : g_post
    requantize #(.AW(AW)) u_rq (.acc(cv_acc[p]), .q(q[p]), .sat(sat[p]));
    relu u_relu (.en(relu_en), .din(q[p]), .dout(act[p]));
  end

  logic           res_valid;
  logic [PXW-1:0] res_pix;
  logic           res_sat;
  data_t          res [PAR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_pix   <= '0;
      res_sat   <= 1'b0;
    end else begin
      res_valid <= cv_out_valid && cv_out_tag[TW-1];
      res_pix   <= cv_out_tag[PXW-1:0];
      res_sat   <= cv_out_valid && cv_out_tag[TW-1] && (|sat);
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned p = 0; p < PAR; p++) res[p] <= act[p];
  end

  // ---------------- intermediate buffer / output ----------------
  logic [CH-1:0] ib_we;
  data_t         ib_wdata [CH];

  always_comb begin
    for (int unsigned c = 0; c < CH; c++) begin
      ib_we[c]    = res_valid && !out_mode && (c / PAR == 32'(pass_idx));
      ib_wdata[c] = res[c % PAR];
    end
  end

  intermediate_buffer #(.NPIX(NPIX), .CH(CH)) u_ibuf (
    .clk,
    .we(ib_we), .waddr(res_pix), .wdata(ib_wdata),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata)
  );

  assign map_valid = res_valid && out_mode;
  assign map_idx   = res_pix;
  assign map_data  = res[0];
  assign clip      = res_sat;

  // The weight port must not be used while a frame is being processed, and
  // the inner FSM may only run inside a frame.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(wt_we && busy)) else $error("weight write while busy");
      assert (!inner_busy || busy) else $error("inner FSM running outside a frame");
    end
  end

endmodule
