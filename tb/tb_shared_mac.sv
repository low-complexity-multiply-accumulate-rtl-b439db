// tb_shared_mac: self-checking test of the post-pass MAC.
// Replays the second phase of the worked example: bins 32.8, 3.4, 4.8, 17.7
// times weights 1.7, 0.4, 1.3, 2.0 (both scaled by 10) must give 9876, i.e.
// 98.76, the 98.8 of the example. Then random signed sums of random length,
// including full-width operands, are checked against a 64-bit model, with
// mac_first starting each sum, and the one-cycle result latency is checked.
module tb_shared_mac;
  localparam int unsigned A_W = 32, B_W = 32, R_W = 64;

  logic clk = 0, rst_n = 0, mac_en = 0, mac_first = 0;
  logic signed [A_W-1:0] a = '0;
  logic signed [B_W-1:0] b = '0;
  logic signed [R_W-1:0] result;
  longint model;
  int checks = 0, failures = 0;

  shared_mac dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic op(input logic signed [A_W-1:0] x, input logic signed [B_W-1:0] y, input bit first);
    @(negedge clk);
    mac_en = 1; mac_first = first; a = x; b = y;
    if (first) model = 0;
    model = model + longint'(x) * longint'(y);
  endtask

  task automatic check(string what);
    @(negedge clk); mac_en = 0; mac_first = 0;  // result valid after the last edge
    checks++;
    if (result !== model) begin failures++; $display("%s: got %0d want %0d", what, result, model); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    op(328, 17, 1); op(34, 4, 0); op(48, 13, 0); op(177, 20, 0);
    check("example");
    checks++; if (result !== 64'sd9876) failures++;
    for (int s = 0; s < 100; s++) begin
      automatic int n = 1 + $urandom_range(0, 20);
      for (int i = 0; i < n; i++) op($urandom, $urandom, i == 0);
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
