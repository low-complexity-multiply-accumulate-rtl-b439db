// tb_image_buffer: self-checking test of the image register file.
// Checks reset to zero, then writes a random word to every address and reads
// all of them back (and an out-of-range read returns zero). A watchdog ends
// the run with a failure if it hangs.
module tb_image_buffer;
  localparam int unsigned C = 15, IH = 5, IW = 5, W = 32;
  localparam int unsigned DEPTH = C * IH * IW;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic signed [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [DEPTH];

  image_buffer dut (.*);

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
      raddr = AW'(a); #1;
      checks++; if (rdata !== '0) begin failures++; $display("reset value wrong at %0d", a); end
    end
    for (int a = 0; a < int'(DEPTH); a++) begin
      model[a] = $urandom;
      @(negedge clk); we = 1; waddr = AW'(a); wdata = model[a];
    end
    @(negedge clk); we = 0;
    for (int a = DEPTH - 1; a >= 0; a--) begin
      raddr = AW'(a); #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("addr %0d: got %h want %h", a, rdata, model[a]); end
    end
    raddr = AW'(DEPTH); #1;
    checks++; if (rdata !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
