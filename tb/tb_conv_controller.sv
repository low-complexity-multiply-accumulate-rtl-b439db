// tb_conv_controller: self-checking test of the PASM convolution sequencer.
// Runs the controller with a 2-channel 7x7 tile, 3x3 kernels and stride 2
// (so the window skips pixels) and compares, cycle by cycle, every control
// output with a schedule built here from the loop nest: N = C*KY*KX
// accumulate cycles with the pixel address of each tap, then M*B post-pass
// cycles, and each outFeat write one cycle after the last bin of a kernel.
// Also checks busy for OH*OW*(N+M*B)+1 cycles, one done pulse, and that
// start while busy is ignored. The run is repeated twice back to back.
module tb_conv_controller;
  localparam int unsigned C = 2, IH = 7, IW = 7, KY = 3, KX = 3, M = 2, B = 4, S = 2;
  localparam int unsigned OH = (IH - 2 * (KY / 2) + S - 1) / S;
  localparam int unsigned OW = (IW - 2 * (KX / 2) + S - 1) / S;
  localparam int unsigned N = C * KY * KX;
  localparam int unsigned LAT = OH * OW * (N + M * B) + 1;
  localparam int unsigned IAW = $clog2(C * IH * IW), TW = $clog2(N);
  localparam int unsigned OAW = $clog2(M * OH * OW), WCI = 2, MW = 1;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, acc_en, acc_first, mac_en, mac_first, out_we;
  logic [IAW-1:0] img_raddr;
  logic [TW-1:0] tap;
  logic [MW-1:0] mac_pas, out_m;
  logic [WCI-1:0] mac_bin;
  logic [OAW-1:0] out_waddr;
  int checks = 0, failures = 0;

  conv_controller #(.C(C), .IH(IH), .IW(IW), .KY(KY), .KX(KX), .M(M), .B(B), .STRIDE(S)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint unsigned got, longint unsigned want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("%0t %s: got %0d want %0d", $time, what, got, want);
    end
  endtask

  // One expected cycle: compares all outputs sampled just before the edge.
  task automatic step(bit e_acc, bit e_af, int e_addr, int e_tap,
                      bit e_mac, bit e_mf, int e_pas, int e_bin,
                      bit e_we, int e_wm, int e_waddr);
    #1;
    expect_eq("busy", busy, 1);
    expect_eq("acc_en", acc_en, e_acc);
    expect_eq("mac_en", mac_en, e_mac);
    expect_eq("out_we", out_we, e_we);
    if (e_acc) begin
      expect_eq("acc_first", acc_first, e_af);
      expect_eq("img_raddr", img_raddr, e_addr);
      expect_eq("tap", tap, e_tap);
    end
    if (e_mac) begin
      expect_eq("mac_first", mac_first, e_mf);
      expect_eq("mac_pas", mac_pas, e_pas);
      expect_eq("mac_bin", mac_bin, e_bin);
    end
    if (e_we) begin
      expect_eq("out_m", out_m, e_wm);
      expect_eq("out_waddr", out_waddr, e_waddr);
    end
    @(negedge clk);
  endtask

  task automatic run_layer();
    bit pend = 0; int pm = 0, pa = 0;
    int busy_cycles = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 1;  // held high while busy: must be ignored
    for (int oy = 0; oy < int'(OH); oy++)
      for (int ox = 0; ox < int'(OW); ox++) begin
        int t = 0;
        for (int c = 0; c < int'(C); c++)
          for (int ky = 0; ky < int'(KY); ky++)
            for (int kx = 0; kx < int'(KX); kx++) begin
              step(1, t == 0, (c * IH + oy * S + ky) * IW + ox * S + kx, t,
                   0, 0, 0, 0, pend, pm, pa);
              if (t == 0) start = 0;
              pend = 0; t++; busy_cycles++;
            end
        for (int m = 0; m < int'(M); m++)
          for (int b = 0; b < int'(B); b++) begin
            step(0, 0, 0, 0, 1, b == 0, m, b, pend, pm, pa);
            pend = (b == B - 1); pm = m; pa = (m * OH + oy) * OW + ox;
            busy_cycles++;
          end
      end
    step(0, 0, 0, 0, 0, 0, 0, 0, pend, pm, pa);  // drain
    busy_cycles++;
    expect_eq("latency", busy_cycles, LAT);
    #1;
    expect_eq("done", done, 1);
    expect_eq("idle", busy, 0);
    @(negedge clk); #1;
    expect_eq("done pulse", done, 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    #1; expect_eq("idle after reset", busy, 0);
    run_layer();
    run_layer();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
