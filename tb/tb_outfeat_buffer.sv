// tb_outfeat_buffer: self-checking test of the output feature map register
// file: reset to zero, random fill, full read-back.
module tb_outfeat_buffer;
  localparam int unsigned M = 2, OH = 3, OW = 3, D_W = 64;
  localparam int unsigned DEPTH = M * OH * OW, AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic signed [D_W-1:0] wdata = '0, rdata;
  logic [D_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  outfeat_buffer dut (.*);

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
    for (int a = 0; a < int'(DEPTH); a++) begin
      raddr = AW'(a); #1; checks++; if (rdata !== '0) failures++;
    end
    for (int r = 0; r < 3; r++) begin
      for (int a = 0; a < int'(DEPTH); a++) begin
        model[a] = {$urandom, $urandom};
        @(negedge clk); we = 1; waddr = AW'(a); wdata = model[a];
      end
      @(negedge clk); we = 0;
      for (int a = 0; a < int'(DEPTH); a++) begin
        raddr = AW'(a); #1; checks++;
        if (rdata !== model[a]) begin failures++; $display("addr %0d mismatch", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
