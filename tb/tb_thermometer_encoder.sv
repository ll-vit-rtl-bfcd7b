// tb_thermometer_encoder: full-size encoder (192 channels x 8 bits); random
// rows plus the extreme values, each bit compared with x > threshold, and the
// code checked to be a thermometer (bit t+1 set implies bit t set).
module tb_thermometer_encoder;
  import llvit_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 192, TB = 8;
  logic signed [7:0] row [D];
  logic [D*TB-1:0]   bits;
  int checks = 0, failures = 0;
  thermometer_encoder #(.D(D), .TB(TB)) dut (.row, .bits);
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    vec_t x, r;
    for (int t = 0; t < 30; t++) begin
      x = rand_vec(D, -128, 127);
      if (t == 0) foreach (x[i]) x[i] = -128;
      if (t == 1) foreach (x[i]) x[i] = 127;
      foreach (x[i]) row[i] = 8'(x[i]);
      #1;
      r = thermo_ref(x, TB);
      for (int c = 0; c < D; c++) begin
        for (int b = 0; b < TB; b++) begin
          checks++;
          if (bits[c*TB + b] !== r[c*TB + b][0]) failures++;
          if (b > 0 && bits[c*TB + b] && !bits[c*TB + b - 1]) failures++;
        end
        if (t == 0 && bits[c*TB +: TB] != '0) failures++;
        if (t == 1 && bits[c*TB +: TB] != '1) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
