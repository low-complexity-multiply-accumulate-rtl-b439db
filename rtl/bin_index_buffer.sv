// bin_index_buffer: register file of the dictionary-encoded kernels, one
// WCI-bit bin index per kernel tap, M x C x KY x KX entries.
//
// A bin index names which of the B shared weights a kernel tap uses. Each of
// the M output kernels has its own indices, and one PAS unit works per
// kernel, so the read port takes one tap number t = (c*KY + ky)*KX + kx and
// returns the M indices of that tap at once, one per PAS unit, in the same
// cycle. The host writes entry addr = m*C*KY*KX + t. Indices are log2(B)
// bits wide. Active-low synchronous reset to zero.
module bin_index_buffer #(
  parameter int unsigned C  = pasm_pkg::DEF_C,
  parameter int unsigned KY = pasm_pkg::DEF_KY,
  parameter int unsigned KX = pasm_pkg::DEF_KX,
  parameter int unsigned M  = pasm_pkg::DEF_M,
  parameter int unsigned B  = pasm_pkg::DEF_B,
  localparam int unsigned TAPS  = C * KY * KX,
  localparam int unsigned DEPTH = M * TAPS,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned TW    = $clog2(TAPS),
  localparam int unsigned WCI   = (B > 1) ? $clog2(B) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [WCI-1:0]        wdata,
  input  logic [TW-1:0]         tap,
  output logic [M-1:0][WCI-1:0] rd_idx
);

  logic [WCI-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else if (we && 32'(waddr) < DEPTH) begin
      mem[waddr] <= wdata;
    end
  end

  always_comb begin
    for (int m = 0; m < int'(M); m++) begin
      rd_idx[m] = (32'(tap) < TAPS) ? mem[m * TAPS + int'(tap)] : '0;
    end
  end

endmodule
