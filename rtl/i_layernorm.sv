// i_layernorm: integer-only LayerNorm over one token row (the "Norm" of
// Add & Norm), with learned per-channel gamma and beta.
//
// With S = sum(x) and Q = sum(x^2) over the D elements of a row,
//   (x - mean) / std = (D*x - S) / sqrt(D*Q - S^2),
// so no division by D is needed. The row streams in one element per cycle
// while S and Q accumulate; then s = isqrt(D*Q - S^2) is found one bit per
// cycle (24 cycles), factor = 2^21 / s by a sequential divider (22 cycles),
// and the row streams out: z = ((D*x - S) * factor) >>> 16 is the
// normalised value with 5 fractional bits, and
//   y = sat8(((z * gamma) >>> 6) + beta)
// with gamma holding 6 fractional bits (64 = 1.0). A row takes
// D (in) + 24 + 23 + D (out) cycles; the next row is accepted after the
// last output element has been taken. I-ViT computes the square root by a
// Newton iteration; the bit-serial root and these fixed-point scalings are
// this design's choices. gamma (wl_sel=0) and beta (wl_sel=1) are written
// through the wl_* port, address = channel.
module i_layernorm #(
  parameter int unsigned D    = 192,
  parameter int unsigned IN_W = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [IN_W-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic signed [7:0]     out_data,
  output logic                  out_last,
  input  logic                  wl_en,
  input  logic                  wl_sel,
  input  logic [15:0]           wl_addr,
  input  logic signed [7:0]     wl_data
);
  localparam int unsigned IW = $clog2(D);
  localparam int unsigned RW = 24;     // square-root width

  typedef enum logic [2:0] {S_IN, S_VAR, S_SQRT, S_DIV, S_OUT} state_e;
  state_e st_q;

  logic signed [7:0]      gamma [D];
  logic signed [7:0]      beta  [D];
  logic signed [IN_W-1:0] x_q [D];
  logic [IW-1:0]          idx_q;
  logic signed [63:0]     sum_q, sq_q, var_q;
  logic [RW-1:0]          root_q;
  logic [$clog2(RW+1)-1:0] bit_q;

  always_ff @(posedge clk) begin
    if (wl_en && wl_addr < 16'(D)) begin
      if (wl_sel) beta[wl_addr[IW-1:0]]  <= wl_data;
      else        gamma[wl_addr[IW-1:0]] <= wl_data;
    end
  end

  logic          div_start, div_busy, div_done, div_started_q;
  logic [21:0]   factor;
  seq_div #(.NW(22), .DW(RW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(22'h20_0000), .divisor(root_q),
    .busy(div_busy), .done(div_done), .quotient(factor));
  assign div_start = (st_q == S_DIV) && !div_started_q;

  // Output element.
  logic signed [63:0] z_c, y_c;
  always_comb begin
    z_c = ((64'(signed'(D)) * 64'(x_q[idx_q]) - sum_q) * 64'(signed'({1'b0, factor}))) >>> 16;
    y_c = ((z_c * 64'(gamma[idx_q])) >>> 6) + 64'(beta[idx_q]);
  end

  assign in_ready  = (st_q == S_IN);
  assign out_valid = (st_q == S_OUT);
  assign out_data  = (y_c > 64'sd127) ? 8'sd127 : (y_c < -64'sd128) ? -8'sd128 : 8'(y_c);
  assign out_last  = out_valid && (idx_q == IW'(D - 1));

  logic [RW-1:0] trial;
  assign trial = root_q | (RW'(1) << (bit_q - 1'b1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q          <= S_IN;
      idx_q         <= '0;
      sum_q         <= '0;
      sq_q          <= '0;
      var_q         <= '0;
      root_q        <= '0;
      bit_q         <= '0;
      div_started_q <= 1'b0;
    end else begin
      unique case (st_q)
        S_IN: if (in_valid) begin
          x_q[idx_q] <= in_data;
          sum_q      <= sum_q + 64'(in_data);
          sq_q       <= sq_q + 64'(in_data) * 64'(in_data);
          if (idx_q == IW'(D - 1)) begin
            idx_q <= '0;
            st_q  <= S_VAR;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        S_VAR: begin
          var_q  <= 64'(signed'(D)) * sq_q - sum_q * sum_q;
          root_q <= '0;
          bit_q  <= ($clog2(RW+1))'(RW);
          st_q   <= S_SQRT;
        end
        S_SQRT: begin
          if (64'(trial) * 64'(trial) <= var_q) root_q <= trial;
          bit_q <= bit_q - 1'b1;
          if (bit_q == 1) begin
            div_started_q <= 1'b0;
            st_q          <= S_DIV;
          end
        end
        S_DIV: begin
          if (div_start) div_started_q <= 1'b1;
          if (div_done && div_started_q) st_q <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (idx_q == IW'(D - 1)) begin
            idx_q <= '0;
            sum_q <= '0;
            sq_q  <= '0;
            st_q  <= S_IN;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        default: st_q <= S_IN;
      endcase
    end
  end
endmodule
