// cond_sum: conditional summation layer of the LUT channel mixer.
//
// For every output channel i it computes y_i = skip_i + sum_j (x_j ? W_ij : 0),
// where x_j is the output of LUT j of the last LUT layer and W_ij a learned
// signed ENC_W-bit encoded value. Each channel has one 2:1 multiplexer
// (W_ij or 0) in front of one adder; the D channels work in parallel and
// step through the J LUT outputs one per cycle, so no multiplier and no
// adder tree is needed. The accumulator is preset with the skip
// (residual) value of the channel, which performs the residual add.
//
// Timing: a start accepted while in_ready is high is followed by J cycles of
// accumulation; then y_valid rises and y holds until y_ack. The next row is
// accepted once the result has been acknowledged.
// Encoded values live in a J-deep memory whose word j holds W_.j of all
// channels (asynchronous read); they are written at initialisation through
// the wl_* port, address j*D + i.
module cond_sum #(
  parameter int unsigned D     = 192,
  parameter int unsigned J     = 192,
  parameter int unsigned ENC_W = 4,
  parameter int unsigned ACC_W = 16,
  parameter int unsigned AW    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    in_ready,
  input  logic [J-1:0]            x,
  input  logic signed [7:0]       skip [D],
  output logic                    y_valid,
  input  logic                    y_ack,
  output logic signed [ACC_W-1:0] y [D],
  input  logic                    wl_en,
  input  logic [AW-1:0]           wl_addr,
  input  logic [ENC_W-1:0]        wl_data
);
  localparam int unsigned JW = $clog2(J);

  logic [D*ENC_W-1:0]      enc_mem [J];
  logic [J-1:0]            x_q;
  logic [JW-1:0]           j_q;
  logic                    busy_q;
  logic signed [ACC_W-1:0] acc_q [D];
  logic                    yv_q;

  assign in_ready = !busy_q && !yv_q;
  assign y_valid  = yv_q;
  assign y        = acc_q;

  logic [AW-1:0] wl_j, wl_i;
  assign wl_j = wl_addr / AW'(D);
  assign wl_i = wl_addr % AW'(D);
  always_ff @(posedge clk) begin
    if (wl_en && wl_j < AW'(J)) enc_mem[wl_j[JW-1:0]][int'(wl_i) * ENC_W +: ENC_W] <= wl_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      yv_q   <= 1'b0;
      j_q    <= '0;
      x_q    <= '0;
      for (int i = 0; i < D; i++) acc_q[i] <= '0;
    end else begin
      if (start && in_ready) begin
        x_q    <= x;
        j_q    <= '0;
        busy_q <= 1'b1;
        for (int i = 0; i < D; i++) acc_q[i] <= ACC_W'(skip[i]);
      end else if (busy_q) begin
        for (int i = 0; i < D; i++) begin
          // 2:1 MUX in front of the adder: the encoded value or zero.
          acc_q[i] <= acc_q[i] + (x_q[j_q] ? ACC_W'(signed'(enc_mem[j_q][i*ENC_W +: ENC_W]))
                                           : ACC_W'(0));
        end
        if (j_q == JW'(J - 1)) begin
          busy_q <= 1'b0;
          yv_q   <= 1'b1;
        end else begin
          j_q <= j_q + 1'b1;
        end
      end
      if (yv_q && y_ack) yv_q <= 1'b0;
    end
  end
endmodule
