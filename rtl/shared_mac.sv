// shared_mac: the post-pass multiply-accumulate unit of PASM.
//
// A conventional MAC: multiplier, adder and a result register. In PASM it is
// no longer used once per input pair but once per bin, and is shared by
// several PAS units. Each cycle with mac_en high it multiplies a binned image
// sum (A_W bits) by the shared weight of that bin (B_W bits) and adds the
// product to the result register. mac_first starts a new sum: the register
// is loaded with the product instead of accumulating, so results follow each
// other with no idle cycle. The result is A_W + B_W bits (2W in the block
// diagram), two's complement, and is valid from the clock edge after the last
// operand pair. Active-low synchronous reset.
module shared_mac #(
  parameter int unsigned A_W = pasm_pkg::DEF_W,
  parameter int unsigned B_W = pasm_pkg::DEF_WW,
  localparam int unsigned R_W = A_W + B_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  mac_en,
  input  logic                  mac_first,
  input  logic signed [A_W-1:0] a,
  input  logic signed [B_W-1:0] b,
  output logic signed [R_W-1:0] result
);

  logic signed [R_W-1:0] product;

  assign product = R_W'(a) * R_W'(b);

  always_ff @(posedge clk) begin
    if (!rst_n)
      result <= '0;
    else if (mac_en)
      result <= (mac_first ? '0 : result) + product;
  end

endmodule
