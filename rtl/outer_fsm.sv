// outer_fsm: layer sequencer of the accelerator (the paper's outer FSM).
//
// A frame is processed as NLAYERS = N_BLOCKS + 2 convolution layers run on
// the same 3D convolution unit: layer 0 is the 5x5 encoder (IN_CH input
// channels), layers 1..N_BLOCKS are the ChipNet blocks, and the last layer
// is the 1x1 channel-wise output mapping. The FSM
//   LOAD  accepts the input map, one pixel of IN_CH channels per beat in
//         row-major order, and writes it to the feature map buffer;
//   START/CONV start the inner FSM for the current layer and wait for it;
//   MOVE  copies the intermediate buffer into the feature map buffer, one
//         pixel (all channels) per cycle, then goes on with the next layer;
//   DONE  pulses frame_done after the output layer and returns to LOAD.
// Per layer it drives the layer configuration: number of passes (CH/PAR, or
// 1 for the output layer), number of active input channels (IN_CH for the
// encoder), whether ReLU is applied (not on the output layer) and whether
// results go out of the chip (output layer) or to the intermediate buffer.
// Loading, moving and layer order follow the paper; that convolution starts
// only once the whole input is loaded, and the output-layer settings, are
// this design's choices.
//
// Timing: LOAD takes one cycle per accepted pixel; MOVE takes
// IMG_W*IMG_H + 1 cycles; fm_we_move follows ib_re by one cycle (RAM read
// latency). The per-layer settings n_passes and n_ch_active take only two
// values each, so some of their bits are constant for a given parameter set.
module outer_fsm #(
  parameter int unsigned IMG_W    = 180,
  parameter int unsigned IMG_H    = 64,
  parameter int unsigned CH       = 64,
  parameter int unsigned IN_CH    = 14,
  parameter int unsigned PAR      = 2,
  parameter int unsigned N_BLOCKS = 10,
  parameter int unsigned NLAYERS  = N_BLOCKS + 2,
  parameter int unsigned NPIX     = IMG_W * IMG_H,
  parameter int unsigned PXW      = $clog2(NPIX),
  parameter int unsigned LW       = $clog2(NLAYERS),
  parameter int unsigned CW       = $clog2(CH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input map handshake
  input  logic                     in_valid,
  output logic                     in_ready,
  // inner FSM
  output logic                     inner_start,
  input  logic                     inner_done,
  // layer configuration
  output logic [LW-1:0]            layer,
  output logic [CW:0]              n_passes,
  output logic [CW:0]              n_ch_active,
  output logic                     relu_en,
  output logic                     out_mode,
  // feature map buffer write side
  output logic                     fm_we_load,
  output logic                     fm_we_move,
  output logic [$clog2(IMG_H)-1:0] fm_wrow,
  output logic [$clog2(IMG_W)-1:0] fm_wcol,
  // intermediate buffer read side
  output logic                     ib_re,
  output logic [PXW-1:0]           ib_raddr,
  // status
  output logic                     busy,
  output logic                     frame_done
);

  typedef enum logic [2:0] {S_LOAD, S_START, S_CONV, S_MOVE, S_MVEND, S_DONE} state_e;

  localparam int unsigned RW = $clog2(IMG_H);
  localparam int unsigned CLW = $clog2(IMG_W);

  state_e         state;
  logic [RW-1:0]  row, mv_row_d;
  logic [CLW-1:0] col, mv_col_d;
  logic [PXW-1:0] pix;
  logic           mv_we_d;

  wire last_pix = (pix == PXW'(NPIX - 1));
  wire last_layer = (layer == LW'(NLAYERS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOAD;
      layer    <= '0;
      row      <= '0;
      col      <= '0;
      pix      <= '0;
      mv_we_d  <= 1'b0;
      mv_row_d <= '0;
      mv_col_d <= '0;
    end else begin
      mv_we_d  <= (state == S_MOVE);
      mv_row_d <= row;
      mv_col_d <= col;
      unique case (state)
        S_LOAD: if (in_valid) begin
          pix <= pix + 1'b1;
          if (col == CLW'(IMG_W - 1)) begin
            col <= '0;
            row <= row + 1'b1;
          end else begin
            col <= col + 1'b1;
          end
          if (last_pix) begin
            pix   <= '0;
            row   <= '0;
            col   <= '0;
            layer <= '0;
            state <= S_START;
          end
        end
        S_START: state <= S_CONV;
        S_CONV: if (inner_done) begin
          if (last_layer) begin
            state <= S_DONE;
          end else begin
            pix   <= '0;
            row   <= '0;
            col   <= '0;
            state <= S_MOVE;
          end
        end
        S_MOVE: begin
          pix <= pix + 1'b1;
          if (col == CLW'(IMG_W - 1)) begin
            col <= '0;
            row <= row + 1'b1;
          end else begin
            col <= col + 1'b1;
          end
          if (last_pix) state <= S_MVEND;
        end
        S_MVEND: begin
          pix   <= '0;
          row   <= '0;
          col   <= '0;
          layer <= layer + 1'b1;
          state <= S_START;
        end
        S_DONE: state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  always_comb begin
    in_ready    = (state == S_LOAD);
    fm_we_load  = in_valid && in_ready;
    fm_we_move  = mv_we_d;
    fm_wrow     = (state == S_LOAD) ? row : mv_row_d;
    fm_wcol     = (state == S_LOAD) ? col : mv_col_d;
    ib_re       = (state == S_MOVE);
    ib_raddr    = pix;
    inner_start = (state == S_START);
    n_passes    = last_layer ? (CW+1)'(1) : (CW+1)'(CH / PAR);
    n_ch_active = (layer == '0) ? (CW+1)'(IN_CH) : (CW+1)'(CH);
    relu_en     = !last_layer;
    out_mode    = last_layer;
    busy        = (state != S_LOAD);
    frame_done  = (state == S_DONE);
  end

endmodule
