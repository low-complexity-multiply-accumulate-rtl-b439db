// pasm_cluster: N_PAS pre-accumulate units sharing one post-pass MAC.
//
// This is the PASM arrangement: N_PAS pas_unit instances take one image
// value per cycle (the same value for all of them) together with one bin
// index each, so N_PAS weighted histograms are built in parallel. A single
// shared_mac then walks the bins: a multiplexer selects bin mac_bin of PAS
// unit mac_pas, the weight_regfile supplies shared weight mac_bin, and the
// MAC accumulates their product. With one multiplier for N_PAS units, one
// sequence of N pairs costs N cycles of accumulation plus N_PAS x B cycles
// of post-pass multiplication.
//
// Interface: acc_en/acc_first/image/bin_idx drive the PAS units (see
// pas_unit); mac_en/mac_first/mac_pas/mac_bin drive the post pass (see
// shared_mac); w_we/w_addr/w_data load the shared weights. result is the
// MAC register, valid the cycle after the last mac_en of a sum. acc_en and
// mac_en must never be high together (asserted).
module pasm_cluster #(
  parameter int unsigned N_PAS = pasm_pkg::DEF_M,
  parameter int unsigned B     = pasm_pkg::DEF_B,
  parameter int unsigned W     = pasm_pkg::DEF_W,
  parameter int unsigned WW    = pasm_pkg::DEF_WW,
  parameter int unsigned BIN_W = W,
  localparam int unsigned WCI  = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned PW   = (N_PAS > 1) ? $clog2(N_PAS) : 1,
  localparam int unsigned R_W  = BIN_W + WW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // pre-accumulate phase
  input  logic                      acc_en,
  input  logic                      acc_first,
  input  logic signed [W-1:0]       image,
  input  logic [N_PAS-1:0][WCI-1:0] bin_idx,
  // post-pass multiply phase
  input  logic                      mac_en,
  input  logic                      mac_first,
  input  logic [PW-1:0]             mac_pas,
  input  logic [WCI-1:0]            mac_bin,
  // shared weight loading
  input  logic                      w_we,
  input  logic [WCI-1:0]            w_addr,
  input  logic signed [WW-1:0]      w_data,
  output logic signed [R_W-1:0]     result
);

  logic signed [BIN_W-1:0] pas_out [N_PAS];
  logic signed [BIN_W-1:0] sel_bin;
  logic signed [WW-1:0]    sel_weight;

  for (genvar p = 0; p < int'(N_PAS); p++) begin : g_pas
    pas_unit #(.B(B), .W(W), .BIN_W(BIN_W)) u_pas (
      .clk       (clk),
      .rst_n     (rst_n),
      .acc_en    (acc_en),
      .acc_first (acc_first),
      .image     (image),
      .bin_idx   (bin_idx[p]),
      .rd_bin    (mac_bin),
      .rd_data   (pas_out[p])
    );
  end

  // Multiplexer from the PAS outputs to the shared multiplier
  assign sel_bin = (32'(mac_pas) < N_PAS) ? pas_out[mac_pas] : '0;

  weight_regfile #(.B(B), .WW(WW)) u_weights (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (w_we),
    .waddr (w_addr),
    .wdata (w_data),
    .raddr (mac_bin),
    .rdata (sel_weight)
  );

  shared_mac #(.A_W(BIN_W), .B_W(WW)) u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .mac_en    (mac_en),
    .mac_first (mac_first),
    .a         (sel_bin),
    .b         (sel_weight),
    .result    (result)
  );

  // The post pass reads the bins, so the two phases must not overlap.
  a_phases_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
      !(acc_en && mac_en));

endmodule
