// image_buffer: the on-chip image cache, a register file of C x IH x IW
// signed W-bit pixels.
//
// The accelerator keeps a small multi-channel tile of the input image in
// registers (no SRAM), so every pixel of the tile can be read in the cycle it
// is addressed. Words are stored channel-major: addr = (c*IH + y)*IW + x.
// One synchronous write port (host loading) and one combinational read port
// (the convolution datapath, one pixel per cycle). All words reset to zero on
// the active-low synchronous reset, as the accelerator's registers do. The
// port layout and the address order are this design's choices.
module image_buffer #(
  parameter int unsigned C  = pasm_pkg::DEF_C,
  parameter int unsigned IH = pasm_pkg::DEF_IH,
  parameter int unsigned IW = pasm_pkg::DEF_IW,
  parameter int unsigned W  = pasm_pkg::DEF_W,
  localparam int unsigned DEPTH = C * IH * IW,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic signed [W-1:0] wdata,
  input  logic [AW-1:0]       raddr,
  output logic signed [W-1:0] rdata
);

  logic signed [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else if (we && 32'(waddr) < DEPTH) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : '0;

endmodule
