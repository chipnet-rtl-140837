// inner_fsm: pass controller of one convolution layer (the paper's inner
// FSM).
//
// The 3D convolution unit computes PAR output channels per pass, so a layer
// of CH output channels takes CH/PAR passes (32 at the defaults) over the
// same input feature map. For each pass this FSM
//   1. reads the kernels of output channels pass*PAR .. pass*PAR+PAR-1 from
//      the weight memory, one per cycle, and strobes wt_load[k] one cycle
//      later, when the read data is there (state WT);
//   2. reads the padded feature map at addresses 0 .. PW*PH-1, one per
//      cycle (state STREAM), and marks each address whose 5x5 window is
//      complete with tag_ovalid and the unpadded output pixel tag_opix;
//   3. waits DRAIN cycles for the pipeline to write its last results
//      (state DRAIN).
// The number of passes comes from the outer FSM (n_passes), so the same
// FSM serves the 64-channel layers and the 1-channel output layer.
//
// Timing: a pass lasts PAR + PW*PH + DRAIN cycles; PW*PH = 184*68 = 12,512
// at the defaults, the per-pass cycle count the paper reports. done pulses
// for one cycle after the last pass; start is taken only in IDLE.
module inner_fsm #(
  parameter int unsigned IMG_W = 180,
  parameter int unsigned IMG_H = 64,
  parameter int unsigned CH    = 64,
  parameter int unsigned PAR   = 2,
  parameter int unsigned K     = 5,
  parameter int unsigned DRAIN = 16,
  parameter int unsigned PW    = IMG_W + K - 1,
  parameter int unsigned PH    = IMG_H + K - 1,
  parameter int unsigned FAW   = $clog2(PW * PH),
  parameter int unsigned PXW   = $clog2(IMG_W * IMG_H),
  parameter int unsigned CW    = $clog2(CH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [CW:0]    n_passes,
  // weight memory read
  output logic           wt_re,
  output logic [CW-1:0]  wt_oc,
  output logic [PAR-1:0] wt_load,
  // feature map buffer read, with the tag of the window it completes
  output logic           fm_re,
  output logic [FAW-1:0] fm_raddr,
  output logic           tag_ovalid,
  output logic [PXW-1:0] tag_opix,
  // status
  output logic [CW-1:0]  pass_idx,
  output logic           busy,
  output logic           done
);

  typedef enum logic [1:0] {S_IDLE, S_WT, S_STREAM, S_DRAIN} state_e;

  state_e                       state;
  logic [CW:0]                  pass;
  logic [$clog2(PAR+1)-1:0]     kcnt;
  logic [$clog2(PW+1)-1:0]      pc;
  logic [$clog2(PH+1)-1:0]      pr;
  logic [$clog2(DRAIN+1)-1:0]   dcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pass     <= '0;
      kcnt     <= '0;
      pc       <= '0;
      pr       <= '0;
      dcnt     <= '0;
      fm_raddr <= '0;
      wt_load  <= '0;
      done     <= 1'b0;
    end else begin
      done    <= 1'b0;
      wt_load <= '0;
      if (state == S_WT) wt_load <= PAR'(1) << kcnt;
      unique case (state)
        S_IDLE: if (start) begin
          pass  <= '0;
          kcnt  <= '0;
          state <= S_WT;
        end
        S_WT: begin
          if (kcnt == ($bits(kcnt))'(PAR - 1)) begin
            kcnt     <= '0;
            pc       <= '0;
            pr       <= '0;
            fm_raddr <= '0;
            state    <= S_STREAM;
          end else begin
            kcnt <= kcnt + 1'b1;
          end
        end
        S_STREAM: begin
          fm_raddr <= fm_raddr + 1'b1;
          if (pc == ($bits(pc))'(PW - 1)) begin
            pc <= '0;
            pr <= pr + 1'b1;
            if (pr == ($bits(pr))'(PH - 1)) begin
              dcnt  <= '0;
              state <= S_DRAIN;
            end
          end else begin
            pc <= pc + 1'b1;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == ($bits(dcnt))'(DRAIN - 1)) begin
            if (pass + 1'b1 == n_passes) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              pass  <= pass + 1'b1;
              state <= S_WT;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    wt_re      = (state == S_WT);
    wt_oc      = CW'(32'(pass) * PAR + 32'(kcnt));
    fm_re      = (state == S_STREAM);
    tag_ovalid = fm_re && (32'(pr) >= K - 1) && (32'(pc) >= K - 1);
    tag_opix   = tag_ovalid ? PXW'((32'(pr) - (K - 1)) * IMG_W + 32'(pc) - (K - 1)) : '0;
    pass_idx   = CW'(pass);
    busy       = (state != S_IDLE);
  end

endmodule
