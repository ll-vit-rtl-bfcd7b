// ll_vit_top: the LL-ViT accelerator, a stack of L encoder layers.
//
// Each encoder layer has its own dedicated hardware (token mixer with its
// systolic array, two I-LayerNorms, LUT channel mixer), so L frames can be
// in flight at once, one per layer: while layer l works on frame f,
// layer l-1 may already hold frame f+1. Layer l streams its output into
// layer l+1 as soon as that layer is ready to load a frame, otherwise it
// waits (back-pressure).
//
// Interface: embedded tokens (N x D int8, row-major, one per cycle) enter
// on in_*; encoded tokens of the last layer leave on out_* (out_last marks
// the last element of each token row). Patch embedding and classification head are
// outside. Weights are written once at initialisation through wl_*:
// wl_layer selects the layer, wl_sel the memory, wl_addr the entry.
// layer_busy shows which token mixers are working on a frame.
module ll_vit_top
  import llvit_pkg::*;
#(
  parameter int unsigned L  = N_LAYERS,
  parameter int unsigned N  = N_TOKENS,
  parameter int unsigned D  = D_MODEL,
  parameter int unsigned H  = N_HEADS,
  parameter int unsigned P  = SA_P,
  parameter int unsigned TB = THERMO_B,
  parameter int unsigned N1 = LUT1_N,
  parameter int unsigned N2 = LUT2_N,
  parameter int unsigned K  = LUT_K
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic signed [7:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic signed [7:0] out_data,
  output logic              out_last,
  input  logic              wl_en,
  input  logic [7:0]        wl_layer,
  input  mem_sel_e          wl_sel,
  input  logic [15:0]       wl_addr,
  input  logic signed [7:0] wl_data,
  output logic [L-1:0]      layer_busy
);
  logic              v [L+1];
  logic              r [L+1];
  logic signed [7:0] d [L+1];
  logic              last [L];

  assign v[0]     = in_valid;
  assign d[0]     = in_data;
  assign in_ready = r[0];

  for (genvar l = 0; l < L; l++) begin : g_layer
    encoder_layer #(.N(N), .D(D), .H(H), .P(P), .TB(TB), .N1(N1), .N2(N2), .K(K), .LID(l)) u_enc (
      .clk, .rst_n,
      .in_valid(v[l]), .in_ready(r[l]), .in_data(d[l]),
      .out_valid(v[l+1]), .out_ready(r[l+1]), .out_data(d[l+1]), .out_last(last[l]),
      .wl_en(wl_en && wl_layer == 8'(l)), .wl_sel, .wl_addr, .wl_data,
      .tm_busy(layer_busy[l]));
  end

  assign out_valid = v[L];
  assign r[L]      = out_ready;
  assign out_data  = d[L];
  assign out_last  = last[L-1];
endmodule
