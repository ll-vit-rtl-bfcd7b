// channel_mixer_pe: the LUT-based channel mixer processing element.
//
// Replaces the two-layer MLP of a transformer encoder. A token row of D int8
// activations (the output of the first Add & Norm) streams in one element
// per cycle into a ping-pong buffer. A full row is thermometer-encoded
// (D*TB bits), passed through LUT layer 1 (N1 LUT neurons) into a register,
// then through LUT layer 2 (N2 neurons) into the conditional summation,
// which adds one learned encoded value per fired LUT to every channel,
// starting from the row itself (the skip connection). The D sums leave
// through an output bank, one element per cycle.
//
// All channels of a row are processed together because any LUT may read any
// bit of the previous layer; rows follow one another in a pipeline:
// ping-pong fill (D cycles) | LUT layers (2 register stages) | summation
// (N2 cycles) | output serialisation (D cycles). Steady-state rate is one
// row per max(D, N2 + 2) cycles. The stage boundaries and the serial output
// are this design's choices; thermometer, LUT layers, MUX-and-adder
// summation with skip accumulation and the ping-pong buffer follow the
// published description.
module channel_mixer_pe
  import llvit_pkg::*;
#(
  parameter int unsigned D     = D_MODEL,
  parameter int unsigned TB    = THERMO_B,
  parameter int unsigned N1    = LUT1_N,
  parameter int unsigned N2    = LUT2_N,
  parameter int unsigned K     = LUT_K,
  parameter int unsigned ENC   = ENC_W,
  parameter int unsigned OUT_W = 16,
  parameter int unsigned AW    = 16,
  parameter int unsigned LID   = 0    // encoder layer index: selects its LUT network
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [7:0]       in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [OUT_W-1:0] out_data,
  output logic                    out_last,
  input  logic                    wl_en,
  input  logic [AW-1:0]           wl_addr,
  input  logic [ENC-1:0]          wl_data
);
  localparam int unsigned IW = $clog2(D);

  // Ping-pong input buffer.
  logic              pp_valid, pp_release;
  logic signed [7:0] pp_row [D];
  pingpong_buffer #(.D(D)) u_pp (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .rd_valid(pp_valid), .rd_row(pp_row), .rd_release(pp_release));

  // Thermometer encoding and LUT layer 1 (combinational), then register.
  logic [D*TB-1:0] th_bits;
  logic [N1-1:0]   l1_bits, l1_q;
  logic signed [7:0] skip_q [D];
  logic            s1_valid_q;
  thermometer_encoder #(.D(D), .TB(TB)) u_thermo (.row(pp_row), .bits(th_bits));
  lut_layer #(.IN_W(D*TB), .N_LUT(N1), .K(K), .LAYER(2 * LID + 1)) u_l1 (.in_bits(th_bits), .out_bits(l1_bits));

  // LUT layer 2 feeds the conditional summation.
  logic [N2-1:0] l2_bits;
  lut_layer #(.IN_W(N1), .N_LUT(N2), .K(K), .LAYER(2 * LID + 2)) u_l2 (.in_bits(l1_q), .out_bits(l2_bits));

  logic cs_ready, cs_valid, cs_ack, s1_take;
  logic signed [OUT_W-1:0] cs_y [D];
  assign s1_take    = s1_valid_q && cs_ready;
  assign pp_release = pp_valid && (!s1_valid_q || s1_take);

  cond_sum #(.D(D), .J(N2), .ENC_W(ENC), .ACC_W(OUT_W), .AW(AW)) u_cs (
    .clk, .rst_n, .start(s1_take), .in_ready(cs_ready), .x(l2_bits), .skip(skip_q),
    .y_valid(cs_valid), .y_ack(cs_ack), .y(cs_y), .wl_en, .wl_addr, .wl_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid_q <= 1'b0;
      l1_q       <= '0;
      for (int i = 0; i < D; i++) skip_q[i] <= '0;
    end else if (pp_release) begin
      s1_valid_q <= 1'b1;
      l1_q       <= l1_bits;
      skip_q     <= pp_row;
    end else if (s1_take) begin
      s1_valid_q <= 1'b0;
    end
  end

  // Output bank and serialiser.
  logic signed [OUT_W-1:0] ob_q [D];
  logic                    ob_valid_q;
  logic [IW-1:0]           oidx_q;
  assign cs_ack    = cs_valid && !ob_valid_q;
  assign out_valid = ob_valid_q;
  assign out_data  = ob_q[oidx_q];
  assign out_last  = ob_valid_q && (oidx_q == IW'(D - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_valid_q <= 1'b0;
      oidx_q     <= '0;
    end else if (cs_ack) begin
      ob_q       <= cs_y;
      ob_valid_q <= 1'b1;
      oidx_q     <= '0;
    end else if (ob_valid_q && out_ready) begin
      if (oidx_q == IW'(D - 1)) ob_valid_q <= 1'b0;
      else                      oidx_q     <= oidx_q + 1'b1;
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
