// tb_pasm_conv_top: end-to-end test of the PASM convolution accelerator at
// its default (full) size: 15-channel 5x5 tile, two 3x3 kernels, 4 shared
// weights, 32-bit data, stride 1.
// Each layer loads random pixels, bin indices, shared weights and biases
// through the load port, starts the accelerator, checks the busy time
// against OH*OW*(C*KY*KX + M*B) + 1 cycles and compares every outFeat word
// with a direct weight-shared convolution plus bias and ReLU computed here
// without any binning. It counts how often each mechanism happened (bin
// reuse, the shared post-pass MAC serving both PAS units, window moves,
// ReLU clamping and passing, back-to-back layers) and fails if one never did.
module tb_pasm_conv_top;
  localparam int unsigned C = pasm_pkg::DEF_C, IH = pasm_pkg::DEF_IH, IW = pasm_pkg::DEF_IW;
  localparam int unsigned KY = pasm_pkg::DEF_KY, KX = pasm_pkg::DEF_KX, M = pasm_pkg::DEF_M;
  localparam int unsigned B = pasm_pkg::DEF_B, STRIDE = pasm_pkg::DEF_STRIDE;
  localparam int unsigned W = pasm_pkg::DEF_W, WW = pasm_pkg::DEF_WW;
  localparam int LAYERS = 4;
  localparam int WATCHDOG = 200000;

  localparam int unsigned OH    = pasm_pkg::out_dim(IH, KY, STRIDE);
  localparam int unsigned OW    = pasm_pkg::out_dim(IW, KX, STRIDE);
  localparam int unsigned TAPS  = C * KY * KX;
  localparam int unsigned IMG_D = C * IH * IW;
  localparam int unsigned BI_D  = M * TAPS;
  localparam int unsigned OUT_D = M * OH * OW;
  localparam int unsigned IAW   = $clog2(IMG_D);
  localparam int unsigned BAW   = $clog2(BI_D);
  localparam int unsigned LAW   = (IAW > BAW) ? IAW : BAW;
  localparam int unsigned OAW   = (OUT_D > 1) ? $clog2(OUT_D) : 1;
  localparam int unsigned R_W   = W + WW;
  localparam int unsigned LAT   = OH * OW * (TAPS + M * B) + 1;

  logic clk = 0, rst_n = 0;
  logic ld_we = 0;
  pasm_pkg::load_target_e ld_sel = pasm_pkg::LD_IMAGE;
  logic [LAW-1:0] ld_addr = '0;
  logic [W-1:0] ld_data = '0;
  logic start = 0, busy, done, clamp_event;
  logic [OAW-1:0] of_raddr = '0;
  logic signed [R_W-1:0] of_rdata;

  int checks = 0, failures = 0;
  // how often each mechanism of the design was exercised
  int n_layers = 0, n_outputs = 0, n_clamped = 0, n_positive = 0;
  int n_bin_reuse = 0, n_pas_used = 0, n_window_shift = 0;

  // reference data
  longint img [IMG_D];
  int unsigned bi [BI_D];
  longint sk [B];
  longint bias [M];

  pasm_conv_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(pasm_pkg::load_target_e sel, int unsigned addr, longint data);
    @(negedge clk);
    ld_we = 1; ld_sel = sel; ld_addr = LAW'(addr); ld_data = W'(data);
    @(negedge clk);
    ld_we = 0;
  endtask

  // Random layer: pixels and weights small enough that no bin or result
  // wraps, so PASM must equal the direct weight-shared convolution exactly.
  task automatic load_layer(int seed_kind);
    for (int a = 0; a < int'(IMG_D); a++) begin
      img[a] = longint'($signed($urandom)) >>> (32 - (W > 24 ? 20 : W - 6));
      load(pasm_pkg::LD_IMAGE, a, img[a]);
    end
    for (int a = 0; a < int'(BI_D); a++) begin
      bi[a] = $urandom_range(0, B - 1);
      load(pasm_pkg::LD_BINIDX, a, bi[a]);
    end
    for (int b = 0; b < int'(B); b++) begin
      sk[b] = longint'($signed($urandom)) >>> (32 - (WW > 16 ? 10 : WW - 1));
      load(pasm_pkg::LD_WEIGHT, b, sk[b]);
    end
    for (int m = 0; m < int'(M); m++) begin
      bias[m] = (seed_kind == 0 && m == 0) ? -64'sd1000 : longint'($signed($urandom)) >>> 16;
      load(pasm_pkg::LD_BIAS, m, bias[m]);
    end
  endtask

  task automatic run_and_check();
    int cyc = 0;
    longint want, got;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      cyc++;
      if (clamp_event) n_clamped++;
      if (cyc > int'(LAT) + 10) break;
      @(negedge clk);
    end
    checks++;
    if (cyc != int'(LAT)) begin
      failures++; $display("latency: %0d busy cycles, expected %0d", cyc, LAT);
    end
    n_layers++;
    @(negedge clk);
    for (int m = 0; m < int'(M); m++)
      for (int oy = 0; oy < int'(OH); oy++)
        for (int ox = 0; ox < int'(OW); ox++) begin
          int cnt [B];
          int ihi = KY / 2 + oy * STRIDE, iwi = KX / 2 + ox * STRIDE;
          foreach (cnt[b]) cnt[b] = 0;
          // direct weight-shared convolution (no binning)
          want = 0;
          for (int c = 0; c < int'(C); c++)
            for (int ky = 0; ky < int'(KY); ky++)
              for (int kx = 0; kx < int'(KX); kx++) begin
                int unsigned idx = bi[((m * C + c) * KY + ky) * KX + kx];
                want += img[(c * IH + ihi + ky - KY / 2) * IW + iwi + kx - KX / 2] * sk[idx];
                cnt[idx]++;
              end
          foreach (cnt[b]) if (cnt[b] > 1) n_bin_reuse++;
          want += bias[m];
          if (want < 0) want = 0; else n_positive++;
          of_raddr = OAW'((m * OH + oy) * OW + ox);
          #1;
          got = longint'(of_rdata);
          checks++;
          n_outputs++;
          if (got != want) begin
            failures++;
            if (failures < 10) $display("outFeat[%0d][%0d][%0d]: got %0d want %0d", m, oy, ox, got, want);
          end
        end
    n_pas_used = M;
    n_window_shift += OH * OW - 1;
  endtask

  task automatic mechanism(string what, int count);
    $display("  %-38s %0d", what, count);
    checks++;
    if (count == 0) begin failures++; $display("  mechanism never exercised: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < LAYERS; r++) begin
      load_layer(r);
      run_and_check();
    end
    $display("mechanisms exercised (C=%0d IH=%0d IW=%0d KY=%0d KX=%0d M=%0d B=%0d S=%0d W=%0d WW=%0d):",
             C, IH, IW, KY, KX, M, B, STRIDE, W, WW);
    mechanism("layers run back to back", n_layers);
    mechanism("outFeat words checked", n_outputs);
    mechanism("PAS bins hit more than once", n_bin_reuse);
    mechanism("PAS units sharing the post-pass MAC", n_pas_used > 1 ? n_pas_used : (M == 1 ? 1 : 0));
    mechanism("window moves (stride)", n_window_shift);
    mechanism("ReLU clamps to zero", n_clamped);
    mechanism("ReLU passes a positive value", n_positive);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
