// tb_pas_unit: self-checking test of one PAS (pre-accumulation) unit.
// First replays the worked example of the PASM method: image values 26.7,
// 3.4, 4.8, 17.7, 6.1 (scaled by 10) with bin indices 0,1,2,3,0 must leave
// the bins at 32.8, 3.4, 4.8, 17.7. Then random signed sequences are checked
// against a bin-by-bin model, with acc_first restarting each sequence and
// idle cycles (acc_en low) in between that must not change the bins.
module tb_pas_unit;
  localparam int unsigned B = 4, W = 32, WCI = 2;

  logic clk = 0, rst_n = 0, acc_en = 0, acc_first = 0;
  logic signed [W-1:0] image = '0, rd_data;
  logic [WCI-1:0] bin_idx = '0, rd_bin = '0;
  int checks = 0, failures = 0;
  logic signed [W-1:0] model [B];

  pas_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic feed(input logic signed [W-1:0] v, input int b, input bit first);
    @(negedge clk);
    acc_en = 1; acc_first = first; image = v; bin_idx = WCI'(b);
    if (first) foreach (model[i]) model[i] = 0;
    model[b] = model[b] + v;
  endtask

  task automatic check_bins(string what);
    @(negedge clk); acc_en = 0; acc_first = 0;
    for (int b = 0; b < int'(B); b++) begin
      rd_bin = WCI'(b); #1;
      checks++;
      if (rd_data !== model[b]) begin
        failures++; $display("%s bin %0d: got %0d want %0d", what, b, rd_data, model[b]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // worked example (values x10)
    feed(267, 0, 1); feed(34, 1, 0); feed(48, 2, 0); feed(177, 3, 0); feed(61, 0, 0);
    check_bins("example");
    checks++; rd_bin = 0; #1; if (rd_data !== 328) failures++;
    // random sequences
    for (int s = 0; s < 50; s++) begin
      automatic int n = 1 + $urandom_range(0, 140);
      for (int i = 0; i < n; i++) begin
        feed($signed($urandom) >>> 8, $urandom_range(0, B - 1), i == 0);
        if ($urandom_range(0, 7) == 0) begin @(negedge clk); acc_en = 0; end
      end
      check_bins("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
