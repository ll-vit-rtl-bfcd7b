// tb_lut_neuron: applies every address to a 6-input LUT neuron with a
// random-looking truth table and checks y == T[{x1..x6}], x1 the MSB.
module tb_lut_neuron;
  localparam logic [63:0] TABLE = 64'hD3A5_0F96_C3E1_7B28;
  logic [5:0] addr;
  logic       y;
  int checks = 0, failures = 0;
  lut_neuron #(.K(6), .INIT(TABLE)) dut (.addr(addr), .y(y));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int a = 0; a < 64; a++) begin
      logic [5:0] xs;
      xs = 6'(a);
      // x1..x6 driven individually; address is {x1,...,x6}
      addr = {xs[5], xs[4], xs[3], xs[2], xs[1], xs[0]};
      #1;
      checks++;
      if (y !== TABLE[a]) begin
        failures++;
        $display("FAIL addr=%0d y=%0b exp=%0b", a, y, TABLE[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
