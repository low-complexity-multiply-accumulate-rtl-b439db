// tb_bin_index_buffer: self-checking test of the bin-index register file.
// Writes a random index into every entry, then for every tap checks that the
// read port returns the index of each of the M kernels in parallel.
module tb_bin_index_buffer;
  localparam int unsigned C = 15, KY = 3, KX = 3, M = 2, B = 4;
  localparam int unsigned TAPS = C * KY * KX, DEPTH = M * TAPS;
  localparam int unsigned AW = $clog2(DEPTH), TW = $clog2(TAPS), WCI = $clog2(B);

  logic clk = 0, rst_n = 0, we = 0;
  logic [AW-1:0] waddr = '0;
  logic [WCI-1:0] wdata = '0;
  logic [TW-1:0] tap = '0;
  logic [M-1:0][WCI-1:0] rd_idx;
  int checks = 0, failures = 0;
  logic [WCI-1:0] model [DEPTH];

  bin_index_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    tap = 7; #1;
    checks++; if (rd_idx !== '0) failures++;
    for (int a = 0; a < int'(DEPTH); a++) begin
      model[a] = WCI'($urandom);
      @(negedge clk); we = 1; waddr = AW'(a); wdata = model[a];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < int'(TAPS); t++) begin
      tap = TW'(t); #1;
      for (int m = 0; m < int'(M); m++) begin
        checks++;
        if (rd_idx[m] !== model[m * TAPS + t]) begin
          failures++; $display("tap %0d kernel %0d: got %0d want %0d", t, m, rd_idx[m], model[m * TAPS + t]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
