// tb_lut_layer: drives random bit vectors into the first LUT layer at its
// full size (1536 inputs, 768 LUT6 neurons) and compares all outputs with a
// software model that forms each address from the connection map.
module tb_lut_layer;
  import llvit_pkg::*;
  import tb_ref_pkg::*;
  localparam int IN_W = 1536, N_LUT = 768;
  logic [IN_W-1:0]  in_bits;
  logic [N_LUT-1:0] out_bits;
  int checks = 0, failures = 0;
  lut_layer #(.IN_W(IN_W), .N_LUT(N_LUT), .K(6), .LAYER(1)) dut (.in_bits, .out_bits);
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    vec_t b, r;
    int ones = 0;
    for (int t = 0; t < 20; t++) begin
      b = rand_vec(IN_W, 0, 1);
      foreach (b[i]) in_bits[i] = b[i][0];
      #1;
      r = lut_layer_ref(b, N_LUT, 6, 1);
      foreach (r[n]) begin
        checks++;
        ones += r[n];
        if (out_bits[n] !== r[n][0]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lut=%0d", t, n);
        end
      end
    end
    if (ones == 0 || ones == 20 * N_LUT) begin failures++; $display("FAIL outputs constant"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
