// lut_neuron: one LUT (RAM-node) neuron.
//
// The K input bits are concatenated into an address, {x1, x2, ..., xK} with
// x1 as the most significant bit, and the neuron's output is entry
// T[address] of its 2^K-entry truth table. There is no arithmetic: the table
// is learned during training and becomes a constant, so on an FPGA one
// neuron with K <= 6 is a single LUT6. Purely combinational.
module lut_neuron #(
  parameter int unsigned       K    = 6,
  parameter logic [(1<<K)-1:0] INIT = '0   // truth table, bit a = T[a]
) (
  input  logic [K-1:0] addr,  // addr[K-1] = x1, addr[0] = xK
  output logic         y
);
  assign y = INIT[addr];
endmodule
