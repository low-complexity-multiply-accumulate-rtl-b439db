// outfeat_buffer: register file of the output feature map, M x OH x OW
// words of D_W bits, stored as addr = (m*OH + oy)*OW + ox.
//
// The datapath writes one finished output per write cycle; the host reads
// the map through a combinational read port once the layer is done.
// Active-low synchronous reset to zero.
module outfeat_buffer #(
  parameter int unsigned M   = pasm_pkg::DEF_M,
  parameter int unsigned OH  = pasm_pkg::out_dim(pasm_pkg::DEF_IH, pasm_pkg::DEF_KY, pasm_pkg::DEF_STRIDE),
  parameter int unsigned OW  = pasm_pkg::out_dim(pasm_pkg::DEF_IW, pasm_pkg::DEF_KX, pasm_pkg::DEF_STRIDE),
  parameter int unsigned D_W = pasm_pkg::DEF_W + pasm_pkg::DEF_WW,
  localparam int unsigned DEPTH = M * OH * OW,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic signed [D_W-1:0] wdata,
  input  logic [AW-1:0]         raddr,
  output logic signed [D_W-1:0] rdata
);

  logic signed [D_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else if (we && 32'(waddr) < DEPTH) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : '0;

endmodule
