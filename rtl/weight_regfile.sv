// weight_regfile: the shared-weight dictionary, B signed WW-bit entries.
//
// After training, every weight of the layer is replaced by one of B shared
// values; this register file holds those values, indexed by bin index.
// In the PASM organisation it is read only in the post-pass multiply phase,
// one entry per cycle, to supply the shared MAC's second operand. One
// synchronous write port for loading, one combinational read port.
// Active-low synchronous reset to zero.
module weight_regfile #(
  parameter int unsigned B  = pasm_pkg::DEF_B,
  parameter int unsigned WW = pasm_pkg::DEF_WW,
  localparam int unsigned WCI = (B > 1) ? $clog2(B) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [WCI-1:0]       waddr,
  input  logic signed [WW-1:0] wdata,
  input  logic [WCI-1:0]       raddr,
  output logic signed [WW-1:0] rdata
);

  logic signed [WW-1:0] mem [B];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(B); i++) mem[i] <= '0;
    end else if (we && 32'(waddr) < B) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = (32'(raddr) < B) ? mem[raddr] : '0;

endmodule
