// conv_controller: sequencer of the PASM convolution layer.
//
// It runs the loop nest of the convolution with the PAS / post-pass split:
//   for each output position (oy, ox), rows then columns, stride STRIDE:
//     ACC: for c, ky, kx (N = C*KY*KX cycles): read pixel
//          (c, oy*STRIDE+ky, ox*STRIDE+kx) and tap (c,ky,kx); every PAS unit
//          adds the pixel into the bin its kernel's index selects.
//     MAC: for m in 0..M-1, for b in 0..B-1 (M*B cycles): the shared MAC
//          multiplies bin b of PAS unit m by shared weight b and accumulates;
//          after the last bin of m, outFeat[m][oy][ox] is written (through
//          bias and ReLU) in the following cycle, overlapped with the next
//          operation.
//   DRAIN: one cycle for the last write, then done.
// The state register is gray coded (see pasm_pkg::ctrl_state_e), so each
// transition changes one state bit.
//
// Timing: start is taken in IDLE; busy is high from the next cycle until
// done, a one-cycle pulse. From the cycle after start, a layer takes
// OH*OW*(N + M*B) + 1 busy cycles and done rises in the cycle after that.
// Pipelining at one pair per cycle, one post-pass multiplier for all PAS
// units and the gray state code follow the paper; the exact schedule, the
// overlap of the output write and the handshake are this design's.
// Active-low synchronous reset.
module conv_controller #(
  parameter int unsigned C      = pasm_pkg::DEF_C,
  parameter int unsigned IH     = pasm_pkg::DEF_IH,
  parameter int unsigned IW     = pasm_pkg::DEF_IW,
  parameter int unsigned KY     = pasm_pkg::DEF_KY,
  parameter int unsigned KX     = pasm_pkg::DEF_KX,
  parameter int unsigned M      = pasm_pkg::DEF_M,
  parameter int unsigned B      = pasm_pkg::DEF_B,
  parameter int unsigned STRIDE = pasm_pkg::DEF_STRIDE,
  localparam int unsigned OH    = pasm_pkg::out_dim(IH, KY, STRIDE),
  localparam int unsigned OW    = pasm_pkg::out_dim(IW, KX, STRIDE),
  localparam int unsigned TAPS  = C * KY * KX,
  localparam int unsigned IMG_D = C * IH * IW,
  localparam int unsigned OUT_D = M * OH * OW,
  localparam int unsigned IAW   = $clog2(IMG_D),
  localparam int unsigned TW    = $clog2(TAPS),
  localparam int unsigned OAW   = (OUT_D > 1) ? $clog2(OUT_D) : 1,
  localparam int unsigned WCI   = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  // image buffer / bin index buffer read addresses
  output logic [IAW-1:0] img_raddr,
  output logic [TW-1:0]  tap,
  // PAS control
  output logic           acc_en,
  output logic           acc_first,
  // post-pass MAC control
  output logic           mac_en,
  output logic           mac_first,
  output logic [MW-1:0]  mac_pas,
  output logic [WCI-1:0] mac_bin,
  // output feature map write (bias channel select = out_m)
  output logic           out_we,
  output logic [MW-1:0]  out_m,
  output logic [OAW-1:0] out_waddr
);

  import pasm_pkg::*;

  ctrl_state_e state_q;
  int unsigned oy, ox, c, ky, kx, t, m, b;
  logic        wr_pend;
  logic [MW-1:0]  wr_m;
  logic [OAW-1:0] wr_addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      {oy, ox, c, ky, kx, t, m, b} <= '0;
      wr_pend <= 1'b0;
      wr_m    <= '0;
      wr_addr <= '0;
      done    <= 1'b0;
    end else begin
      wr_pend <= 1'b0;
      done    <= 1'b0;
      unique case (state_q)
        ST_IDLE: begin
          if (start) begin
            state_q <= ST_ACC;
            {oy, ox, c, ky, kx, t, m, b} <= '0;
          end
        end
        ST_ACC: begin
          t <= t + 1;
          if (kx == KX - 1) begin
            kx <= 0;
            if (ky == KY - 1) begin
              ky <= 0;
              c  <= (c == C - 1) ? 0 : c + 1;
            end else begin
              ky <= ky + 1;
            end
          end else begin
            kx <= kx + 1;
          end
          if (t == TAPS - 1) begin
            t       <= 0;
            m       <= 0;
            b       <= 0;
            state_q <= ST_MAC;
          end
        end
        ST_MAC: begin
          if (b == B - 1) begin
            b       <= 0;
            wr_pend <= 1'b1;
            wr_m    <= MW'(m);
            wr_addr <= OAW'((m * OH + oy) * OW + ox);
            if (m == M - 1) begin
              m <= 0;
              if (ox == OW - 1) begin
                ox <= 0;
                if (oy == OH - 1) begin
                  oy      <= 0;
                  state_q <= ST_DRAIN;
                end else begin
                  oy      <= oy + 1;
                  state_q <= ST_ACC;
                end
              end else begin
                ox      <= ox + 1;
                state_q <= ST_ACC;
              end
            end else begin
              m <= m + 1;
            end
          end else begin
            b <= b + 1;
          end
        end
        ST_DRAIN: begin
          state_q <= ST_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state_q != ST_IDLE);
    acc_en    = (state_q == ST_ACC);
    acc_first = (state_q == ST_ACC) && (t == 0);
    mac_en    = (state_q == ST_MAC);
    mac_first = (state_q == ST_MAC) && (b == 0);
    mac_pas   = MW'(m);
    mac_bin   = WCI'(b);
    tap       = TW'(t);
    img_raddr = IAW'((c * IH + (oy * STRIDE + ky)) * IW + (ox * STRIDE + kx));
    out_we    = wr_pend;
    out_m     = wr_m;
    out_waddr = wr_addr;
  end

  // Every state change flips exactly one bit of the gray-coded state.
  a_gray: assert property (@(posedge clk) disable iff (!rst_n)
      (state_q != $past(state_q)) |-> $onehot(state_q ^ $past(state_q)));

endmodule
