// tb_bias_relu: self-checking test of the bias registers and ReLU.
// Loads a random bias per channel and checks y = max(0, sum + bias[m]) and
// the clamped flag for random sums, including sums near zero so both the
// clamping and the pass-through cases occur.
module tb_bias_relu;
  localparam int unsigned M = 2, BIAS_W = 32, R_W = 64, MW = 1;

  logic clk = 0, rst_n = 0, b_we = 0;
  logic [MW-1:0] b_addr = '0, m_sel = '0;
  logic signed [BIAS_W-1:0] b_data = '0;
  logic signed [R_W-1:0] sum = '0, y;
  logic clamped;
  int checks = 0, failures = 0, n_clamp = 0, n_pass = 0;

  bias_relu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [BIAS_W-1:0] bias [M];
    longint t;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 10; r++) begin
      for (int m = 0; m < int'(M); m++) begin
        bias[m] = $signed($urandom) >>> 4;
        @(negedge clk); b_we = 1; b_addr = MW'(m); b_data = bias[m];
      end
      @(negedge clk); b_we = 0;
      for (int i = 0; i < 100; i++) begin
        m_sel = MW'($urandom_range(0, M - 1));
        sum = (i % 2 != 0) ? longint'($signed($urandom)) >>> 2 : {$urandom, $urandom};
        #1;
        t = sum + longint'(bias[m_sel]);
        checks += 2;
        if (t < 0) begin
          n_clamp++;
          if (y !== 0 || !clamped) begin failures++; $display("clamp: sum %0d y %0d", sum, y); end
        end else begin
          n_pass++;
          if (y !== t || clamped) begin failures++; $display("pass: got %0d want %0d", y, t); end
        end
      end
    end
    checks++;
    if (n_clamp == 0 || n_pass == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
