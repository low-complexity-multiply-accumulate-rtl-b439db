// pas_unit: pre-accumulation stage of PASM (pre-accumulate, then multiply).
//
// Instead of multiplying every image value by its weight, the unit keeps B
// accumulators ("image bins"), one per shared weight, and each cycle adds the
// incoming image value to the accumulator named by the tap's bin index. After
// a sequence of N input pairs, bin b holds the sum of the image values that
// were paired with shared weight b: a weighted histogram of the bin indices.
// The multiply by the weights is done later by the shared MAC.
//
// Timing: one (image, bin_idx) pair per cycle when acc_en is high; the bins
// update at the clock edge. acc_first marks the first pair of a sequence: the
// bins are cleared and that pair loaded in the same cycle, so no separate
// clear cycle is needed. The bins are read through a combinational read port
// (rd_bin -> rd_data), the second register-file port the PAS needs.
// Bin width is BIN_W bits (W by default, as printed on the PAS output of the
// block diagram); sums wrap modulo 2^BIN_W. Active-low synchronous reset.
module pas_unit #(
  parameter int unsigned B     = pasm_pkg::DEF_B,
  parameter int unsigned W     = pasm_pkg::DEF_W,
  parameter int unsigned BIN_W = W,
  localparam int unsigned WCI  = (B > 1) ? $clog2(B) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    acc_en,
  input  logic                    acc_first,
  input  logic signed [W-1:0]     image,
  input  logic [WCI-1:0]          bin_idx,
  input  logic [WCI-1:0]          rd_bin,
  output logic signed [BIN_W-1:0] rd_data
);

  logic signed [BIN_W-1:0] image_bin [B];
  logic signed [BIN_W-1:0] image_ext;

  assign image_ext = BIN_W'(image);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < int'(B); b++) image_bin[b] <= '0;
    end else if (acc_en) begin
      for (int b = 0; b < int'(B); b++) begin
        if (b == int'(bin_idx))
          image_bin[b] <= (acc_first ? '0 : image_bin[b]) + image_ext;
        else if (acc_first)
          image_bin[b] <= '0;
      end
    end
  end

  assign rd_data = (32'(rd_bin) < B) ? image_bin[rd_bin] : '0;

endmodule
