// tb_weight_regfile: self-checking test of the shared-weight dictionary.
// Loads the four example weights 1.7, 0.4, 1.3, 2.0 (scaled by 10 to
// integers), reads them back by bin index, then overwrites with random
// values and checks again.
module tb_weight_regfile;
  localparam int unsigned B = 4, WW = 32, WCI = 2;

  logic clk = 0, rst_n = 0, we = 0;
  logic [WCI-1:0] waddr = '0, raddr = '0;
  logic signed [WW-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic signed [WW-1:0] model [B];

  weight_regfile dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_and_check();
    for (int b = 0; b < int'(B); b++) begin
      @(negedge clk); we = 1; waddr = WCI'(b); wdata = model[b];
    end
    @(negedge clk); we = 0;
    for (int b = 0; b < int'(B); b++) begin
      raddr = WCI'(b); #1;
      checks++;
      if (rdata !== model[b]) begin failures++; $display("bin %0d: got %0d want %0d", b, rdata, model[b]); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    raddr = 2; #1;
    checks++; if (rdata !== '0) failures++;
    model = '{17, 4, 13, 20};
    load_and_check();
    for (int r = 0; r < 5; r++) begin
      foreach (model[b]) model[b] = $urandom;
      load_and_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
