// lut_layer: one feed-forward layer of LUT neurons of the channel mixer.
//
// Neuron n reads K bits of the previous layer through a fixed connection
// map, bit lut_conn(LAYER, n, k) feeding its input x(k+1), and looks its
// output up in truth table lut_init(LAYER, n). Map and tables are learned
// and fixed at synthesis (here taken from llvit_pkg). The layer is purely
// combinational; every output bit of the previous layer is available at
// once, which is why the channel mixer processes a whole token row at a time.
module lut_layer
  import llvit_pkg::*;
#(
  parameter int unsigned IN_W  = D_MODEL * THERMO_B,
  parameter int unsigned N_LUT = LUT1_N,
  parameter int unsigned K     = LUT_K,
  parameter int unsigned LAYER = 1
) (
  input  logic [IN_W-1:0]  in_bits,
  output logic [N_LUT-1:0] out_bits
);
  for (genvar n = 0; n < N_LUT; n++) begin : g_lut
    localparam logic [63:0] TABLE = lut_init(LAYER, n);
    logic [K-1:0] addr;
    for (genvar k = 0; k < K; k++) begin : g_in
      assign addr[K-1-k] = in_bits[lut_conn(LAYER, n, k, IN_W)];
    end
    lut_neuron #(.K(K), .INIT(TABLE[(1<<K)-1:0])) u_neuron (.addr(addr), .y(out_bits[n]));
  end
endmodule
