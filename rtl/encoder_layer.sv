// encoder_layer: one LL-ViT encoder layer, a dedicated block per layer.
//
// Token mixer (multi-head self-attention, residual added at its output) ->
// I-LayerNorm 1 -> LUT-based channel mixer (its conditional summation adds
// the residual) -> I-LayerNorm 2, i.e. Attention, Add & Norm, LUT channel
// mixer, Add & Norm in the post-norm order of the LL-ViT encoder drawing.
// The stages are joined by element streams (one value per cycle,
// valid/ready), so LayerNorm 1, the channel mixer and LayerNorm 2 work on
// successive token rows at the same time, while the token mixer needs the
// whole frame before it can produce its first output row.
//
// Weights are written through one load port: wl_sel chooses the memory
// (llvit_pkg::mem_sel_e) and wl_addr the entry.
module encoder_layer
  import llvit_pkg::*;
#(
  parameter int unsigned N  = N_TOKENS,
  parameter int unsigned D  = D_MODEL,
  parameter int unsigned H  = N_HEADS,
  parameter int unsigned P  = SA_P,
  parameter int unsigned TB = THERMO_B,
  parameter int unsigned N1 = LUT1_N,
  parameter int unsigned N2 = LUT2_N,
  parameter int unsigned K  = LUT_K,
  parameter int unsigned LID = 0   // index of this layer in the stack
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
  input  mem_sel_e          wl_sel,
  input  logic [15:0]       wl_addr,
  input  logic signed [7:0] wl_data,
  output logic              tm_busy
);
  logic               tm_valid, tm_ready, tm_last;
  logic signed [15:0] tm_data;
  logic               n1_valid, n1_ready, n1_last;
  logic signed [7:0]  n1_data;
  logic               cm_valid, cm_ready, cm_last;
  logic signed [15:0] cm_data;

  logic wl_tm, wl_n1, wl_n2, wl_cs;
  assign wl_tm = wl_en && (wl_sel inside {MEM_WQ, MEM_WK, MEM_WV, MEM_WO});
  assign wl_n1 = wl_en && (wl_sel inside {MEM_G1, MEM_B1});
  assign wl_n2 = wl_en && (wl_sel inside {MEM_G2, MEM_B2});
  assign wl_cs = wl_en && (wl_sel == MEM_ENC);

  token_mixer #(.N(N), .D(D), .H(H), .P(P)) u_tm (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(tm_valid), .out_ready(tm_ready), .out_data(tm_data), .out_last(tm_last),
    .wl_en(wl_tm), .wl_sel, .wl_addr, .wl_data, .busy(tm_busy));

  i_layernorm #(.D(D), .IN_W(16)) u_ln1 (
    .clk, .rst_n, .in_valid(tm_valid), .in_ready(tm_ready), .in_data(tm_data),
    .out_valid(n1_valid), .out_ready(n1_ready), .out_data(n1_data), .out_last(n1_last),
    .wl_en(wl_n1), .wl_sel(wl_sel == MEM_B1), .wl_addr, .wl_data);

  channel_mixer_pe #(.D(D), .TB(TB), .N1(N1), .N2(N2), .K(K), .ENC(ENC_W), .OUT_W(16), .LID(LID)) u_cm (
    .clk, .rst_n, .in_valid(n1_valid), .in_ready(n1_ready), .in_data(n1_data),
    .out_valid(cm_valid), .out_ready(cm_ready), .out_data(cm_data), .out_last(cm_last),
    .wl_en(wl_cs), .wl_addr, .wl_data(wl_data[ENC_W-1:0]));

  i_layernorm #(.D(D), .IN_W(16)) u_ln2 (
    .clk, .rst_n, .in_valid(cm_valid), .in_ready(cm_ready), .in_data(cm_data),
    .out_valid, .out_ready, .out_data, .out_last,
    .wl_en(wl_n2), .wl_sel(wl_sel == MEM_B2), .wl_addr, .wl_data);
endmodule
