// tb_pasm_cluster: self-checking test of N_PAS PAS units sharing one MAC.
// Each round loads random shared weights, streams N random (image, index)
// pairs into all PAS units at one pair per cycle, then runs the post pass
// for each PAS unit (B cycles each) and compares every result with the
// direct weight-shared sum  sum_i image[i] * weight[index_p[i]]  computed
// without binning. It also checks that one round takes N + N_PAS*B cycles.
module tb_pasm_cluster;
  localparam int unsigned N_PAS = 2, B = 4, W = 32, WW = 32;
  localparam int unsigned WCI = 2, PW = 1, R_W = 64;
  localparam int unsigned N = 135;

  logic clk = 0, rst_n = 0;
  logic acc_en = 0, acc_first = 0, mac_en = 0, mac_first = 0, w_we = 0;
  logic signed [W-1:0] image = '0;
  logic [N_PAS-1:0][WCI-1:0] bin_idx = '0;
  logic [PW-1:0] mac_pas = '0;
  logic [WCI-1:0] mac_bin = '0, w_addr = '0;
  logic signed [WW-1:0] w_data = '0;
  logic signed [R_W-1:0] result;
  int checks = 0, failures = 0;
  longint cycles;

  pasm_cluster dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [WW-1:0] wt [B];
    longint expect_sum [N_PAS];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 20; r++) begin
      for (int b = 0; b < int'(B); b++) begin
        wt[b] = $signed($urandom) >>> 12;
        @(negedge clk); w_we = 1; w_addr = WCI'(b); w_data = wt[b];
      end
      @(negedge clk); w_we = 0;
      foreach (expect_sum[p]) expect_sum[p] = 0;
      cycles = 0;
      for (int i = 0; i < int'(N); i++) begin
        @(negedge clk);
        acc_en = 1; acc_first = (i == 0);
        image = $signed($urandom) >>> 12;
        for (int p = 0; p < int'(N_PAS); p++) begin
          bin_idx[p] = WCI'($urandom);
          expect_sum[p] += longint'(image) * longint'(wt[bin_idx[p]]);
        end
        cycles++;
      end
      for (int p = 0; p < int'(N_PAS); p++) begin
        for (int b = 0; b < int'(B); b++) begin
          @(negedge clk);
          acc_en = 0; acc_first = 0;
          mac_en = 1; mac_first = (b == 0); mac_pas = PW'(p); mac_bin = WCI'(b);
          cycles++;
        end
        @(posedge clk); #1;
        checks++;
        if (result !== expect_sum[p]) begin
          failures++; $display("round %0d pas %0d: got %0d want %0d", r, p, result, expect_sum[p]);
        end
      end
      @(negedge clk); mac_en = 0;
      checks++;
      if (cycles != longint'(N + N_PAS * B)) begin failures++; $display("cycles %0d", cycles); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
