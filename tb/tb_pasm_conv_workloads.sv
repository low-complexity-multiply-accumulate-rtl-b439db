// tb_pasm_conv_workloads: end-to-end runs of the accelerator in the other
// configurations it is evaluated in, each checked against a direct
// weight-shared convolution by pasm_layer_tester:
//   8 and 16 shared weights with 32-bit weights, 4 and 8 shared weights
//   with 8-bit weights (all on the default 15x5x5 tile, two 3x3 kernels),
//   a stride-2 layer on a 7x7 tile, and one 32-channel 5x5-kernel output
//   (800 pre-accumulations per output, 2x2 outputs on a 6x6 tile) with 16 bins.
// Ends with the summed TB_RESULT line once every tester has finished.
module tb_pasm_conv_workloads;
  localparam int NT = 6;
  logic [NT-1:0] fin;
  int ch [NT];
  int fl [NT];

  pasm_layer_tester #(.B(8))              u_b8   (.finished(fin[0]), .n_checks(ch[0]), .n_failures(fl[0]));
  pasm_layer_tester #(.B(16))             u_b16  (.finished(fin[1]), .n_checks(ch[1]), .n_failures(fl[1]));
  pasm_layer_tester #(.B(4), .WW(8))      u_i8b4 (.finished(fin[2]), .n_checks(ch[2]), .n_failures(fl[2]));
  pasm_layer_tester #(.B(8), .WW(8))      u_i8b8 (.finished(fin[3]), .n_checks(ch[3]), .n_failures(fl[3]));
  pasm_layer_tester #(.IH(7), .IW(7), .C(3), .STRIDE(2)) u_s2 (.finished(fin[4]), .n_checks(ch[4]), .n_failures(fl[4]));
  pasm_layer_tester #(.C(32), .IH(6), .IW(6), .KY(5), .KX(5), .B(16)) u_c32k5 (.finished(fin[5]), .n_checks(ch[5]), .n_failures(fl[5]));

  initial begin
    int checks = 0, failures = 0;
    wait (&fin);
    #1;
    for (int i = 0; i < NT; i++) begin
      checks += ch[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
