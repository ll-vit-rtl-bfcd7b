// thermometer_encoder: turns a row of int8 activations into thermometer code.
//
// Channel c is compared with TB ascending thresholds; output bit t of the
// channel is 1 when the activation is greater than threshold t, so a larger
// value sets more bits (a thermometer). One comparator per bit, all in
// parallel, purely combinational. Thresholds are learned; here they come
// from llvit_pkg::thermo_threshold(). Bits of channel c are at
// bits[c*TB +: TB], threshold 0 in the lowest position.
module thermometer_encoder
  import llvit_pkg::*;
#(
  parameter int unsigned D  = D_MODEL,
  parameter int unsigned TB = THERMO_B
) (
  input  logic signed [7:0] row [D],
  output logic [D*TB-1:0]   bits
);
  for (genvar c = 0; c < D; c++) begin : g_ch
    for (genvar t = 0; t < TB; t++) begin : g_thr
      localparam int THR = thermo_threshold(c, t, TB);
      assign bits[c*TB + t] = (int'(row[c]) > THR);
    end
  end
endmodule
