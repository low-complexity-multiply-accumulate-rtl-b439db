// pasm_conv_top: one convolution layer of a weight-shared CNN accelerator
// whose multiply-accumulate is done by PASM (pre-accumulate, then multiply).
//
// The kernels are dictionary encoded: each tap holds only a log2(B)-bit bin
// index into a table of B shared weights. M PAS units (one per output kernel)
// each build, for one output position, the per-bin sums of the C*KY*KX image
// values under that kernel's window. One shared post-pass MAC then multiplies
// the M*B bin sums by their shared weights; bias and ReLU follow, and the
// result goes to the outFeat register file. Image tile, bin indices, shared
// weights, bias and output map are all held in registers.
//
// Host interface (all synchronous to clk, active-low synchronous reset):
//   ld_we/ld_sel/ld_addr/ld_data  write one word into the register file chosen
//     by ld_sel (pasm_pkg::load_target_e). Addresses: image (c*IH+y)*IW+x;
//     bin index m*C*KY*KX + (c*KY+ky)*KX + kx; weight = bin; bias = m.
//     Loads are only allowed while busy is low.
//   start/busy/done  start in idle runs the whole layer; done pulses once.
//   clamp_event  status: the outFeat word written this cycle was clamped by ReLU.
//   of_raddr/of_rdata  combinational read of outFeat[(m*OH+oy)*OW+ox].
// Timing: OH*OW*(C*KY*KX + M*B) + 1 busy cycles per layer (see
// conv_controller). Results equal a direct weight-shared convolution with
// bias and ReLU, computed modulo the widths: bins W bits, results W+WW bits.
module pasm_conv_top #(
  parameter int unsigned C      = pasm_pkg::DEF_C,
  parameter int unsigned IH     = pasm_pkg::DEF_IH,
  parameter int unsigned IW     = pasm_pkg::DEF_IW,
  parameter int unsigned KY     = pasm_pkg::DEF_KY,
  parameter int unsigned KX     = pasm_pkg::DEF_KX,
  parameter int unsigned M      = pasm_pkg::DEF_M,
  parameter int unsigned B      = pasm_pkg::DEF_B,
  parameter int unsigned STRIDE = pasm_pkg::DEF_STRIDE,
  parameter int unsigned W      = pasm_pkg::DEF_W,
  parameter int unsigned WW     = pasm_pkg::DEF_WW,
  localparam int unsigned OH    = pasm_pkg::out_dim(IH, KY, STRIDE),
  localparam int unsigned OW    = pasm_pkg::out_dim(IW, KX, STRIDE),
  localparam int unsigned TAPS  = C * KY * KX,
  localparam int unsigned IMG_D = C * IH * IW,
  localparam int unsigned BI_D  = M * TAPS,
  localparam int unsigned OUT_D = M * OH * OW,
  localparam int unsigned IAW   = $clog2(IMG_D),
  localparam int unsigned BAW   = $clog2(BI_D),
  localparam int unsigned TW    = $clog2(TAPS),
  localparam int unsigned LAW   = (IAW > BAW) ? IAW : BAW,
  localparam int unsigned OAW   = (OUT_D > 1) ? $clog2(OUT_D) : 1,
  localparam int unsigned WCI   = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned R_W   = W + WW
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // load port
  input  logic                    ld_we,
  input  pasm_pkg::load_target_e  ld_sel,
  input  logic [LAW-1:0]          ld_addr,
  input  logic [W-1:0]            ld_data,
  // control
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic                    clamp_event,
  // output feature map read port
  input  logic [OAW-1:0]          of_raddr,
  output logic signed [R_W-1:0]   of_rdata
);

  import pasm_pkg::*;

  logic [IAW-1:0]          img_raddr;
  logic signed [W-1:0]     pixel;
  logic [TW-1:0]           tap;
  logic [M-1:0][WCI-1:0]   tap_idx;
  logic                    acc_en, acc_first, mac_en, mac_first;
  logic [MW-1:0]           mac_pas, out_m;
  logic [WCI-1:0]          mac_bin;
  logic                    out_we;
  logic [OAW-1:0]          out_waddr;
  logic signed [R_W-1:0]   mac_result, activated;
  logic                    relu_clamped;

  conv_controller #(
    .C(C), .IH(IH), .IW(IW), .KY(KY), .KX(KX), .M(M), .B(B), .STRIDE(STRIDE)
  ) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .img_raddr, .tap, .acc_en, .acc_first,
    .mac_en, .mac_first, .mac_pas, .mac_bin,
    .out_we, .out_m, .out_waddr
  );

  image_buffer #(.C(C), .IH(IH), .IW(IW), .W(W)) u_image (
    .clk, .rst_n,
    .we    (ld_we && ld_sel == LD_IMAGE),
    .waddr (IAW'(ld_addr)),
    .wdata (ld_data),
    .raddr (img_raddr),
    .rdata (pixel)
  );

  bin_index_buffer #(.C(C), .KY(KY), .KX(KX), .M(M), .B(B)) u_binidx (
    .clk, .rst_n,
    .we     (ld_we && ld_sel == LD_BINIDX),
    .waddr  (BAW'(ld_addr)),
    .wdata  (WCI'(ld_data)),
    .tap    (tap),
    .rd_idx (tap_idx)
  );

  pasm_cluster #(.N_PAS(M), .B(B), .W(W), .WW(WW), .BIN_W(W)) u_pasm (
    .clk, .rst_n,
    .acc_en, .acc_first,
    .image   (pixel),
    .bin_idx (tap_idx),
    .mac_en, .mac_first, .mac_pas, .mac_bin,
    .w_we    (ld_we && ld_sel == LD_WEIGHT),
    .w_addr  (WCI'(ld_addr)),
    .w_data  (WW'(ld_data)),
    .result  (mac_result)
  );

  bias_relu #(.M(M), .BIAS_W(W), .R_W(R_W)) u_bias (
    .clk, .rst_n,
    .b_we    (ld_we && ld_sel == LD_BIAS),
    .b_addr  (MW'(ld_addr)),
    .b_data  (ld_data),
    .m_sel   (out_m),
    .sum     (mac_result),
    .y       (activated),
    .clamped (relu_clamped)
  );

  outfeat_buffer #(.M(M), .OH(OH), .OW(OW), .D_W(R_W)) u_outfeat (
    .clk, .rst_n,
    .we    (out_we),
    .waddr (out_waddr),
    .wdata (activated),
    .raddr (of_raddr),
    .rdata (of_rdata)
  );

  // An outFeat word was written as zero because ReLU clamped it.
  assign clamp_event = out_we && relu_clamped;

  // The register files are not double buffered: no loads while a layer runs.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> !ld_we);

endmodule
