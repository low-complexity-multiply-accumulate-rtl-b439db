// bias_relu: per-output-channel bias and ReLU activation.
//
// Bias and activation are not weight-shared, so they sit after the post-pass
// MAC unchanged by PASM. M bias registers (signed BIAS_W bits, loaded by the
// host) are kept here; the combinational output is
//   y = max(0, sum + bias[m])
// at the width of the MAC result. clamped flags that ReLU replaced a
// negative value by zero. Bias width and the placement of ReLU after the
// bias add are this design's choices. Active-low synchronous reset.
module bias_relu #(
  parameter int unsigned M      = pasm_pkg::DEF_M,
  parameter int unsigned BIAS_W = pasm_pkg::DEF_W,
  parameter int unsigned R_W    = pasm_pkg::DEF_W + pasm_pkg::DEF_WW,
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     b_we,
  input  logic [MW-1:0]            b_addr,
  input  logic signed [BIAS_W-1:0] b_data,
  input  logic [MW-1:0]            m_sel,
  input  logic signed [R_W-1:0]    sum,
  output logic signed [R_W-1:0]    y,
  output logic                     clamped
);

  logic signed [BIAS_W-1:0] bias [M];
  logic signed [R_W-1:0]    biased;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(M); i++) bias[i] <= '0;
    end else if (b_we && 32'(b_addr) < M) begin
      bias[b_addr] <= b_data;
    end
  end

  always_comb begin
    biased  = sum + ((32'(m_sel) < M) ? R_W'(bias[m_sel]) : '0);
    clamped = biased[R_W-1];
    y       = clamped ? '0 : biased;
  end

endmodule
