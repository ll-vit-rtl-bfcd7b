// shiftmax: integer-only softmax of one attention-score row (I-ViT style).
//
// Scores are signed fixed point with F fractional bits. For each element
// x~ = x - max(row) <= 0 is scaled by log2(e) with shifts only,
// p = x~ + (x~ >>> 1) - (x~ >>> 4); -p is split into an integer part q and a
// fraction u, and 2^p is approximated as (1 - u/2) >> q, kept with 15
// fractional bits (e_i). The sum of all e_i is inverted once by a
// sequential divider, factor = 2^31 / sum, and each probability is
// (e_i * factor) >> 23, i.e. scaled by 256 and saturated to 255.
//
// The whole row is processed in parallel. Timing: start (accepted when not
// busy) captures row_in; 1 cycle for max/exponent/sum, 32 cycles of
// division, 1 cycle for the products; done pulses with row_out valid, and
// row_out holds until the next start (37 cycles from the start edge to done).
module shiftmax #(
  parameter int unsigned N    = 197,
  parameter int unsigned IN_W = 16,
  parameter int unsigned F    = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic signed [IN_W-1:0] row_in [N],
  output logic                   busy,
  output logic                   done,
  output logic [7:0]             row_out [N]
);
  localparam int unsigned EW = 16;   // e_i in [0, 2^15]
  localparam int unsigned SW = EW + $clog2(N) + 1;

  typedef enum logic [1:0] {S_IDLE, S_EXP, S_DIV, S_OUT} state_e;
  state_e st_q;

  logic signed [IN_W-1:0] x_q [N];
  logic [EW-1:0]          e_q [N];
  logic [EW-1:0]          e_c [N];
  logic [SW-1:0]          sum_c;
  logic signed [IN_W-1:0] max_c;

  always_comb begin
    max_c = x_q[0];
    for (int i = 1; i < N; i++) if (x_q[i] > max_c) max_c = x_q[i];
    sum_c = '0;
    for (int i = 0; i < N; i++) begin
      logic signed [IN_W+2:0] xt, p;
      logic [IN_W+2:0]        np, q;
      logic [F-1:0]           u;
      logic [EW-1:0]          mant;
      xt   = (IN_W+3)'(x_q[i]) - (IN_W+3)'(max_c);
      p    = xt + (xt >>> 1) - (xt >>> 4);
      np   = (IN_W+3)'(-p);
      q    = np >> F;
      u    = np[F-1:0];
      mant = EW'((32'(1) << F) - 32'(u >> 1)) << (EW - 1 - F);
      e_c[i] = (q >= (IN_W+3)'(EW)) ? '0 : (mant >> q);
      sum_c  = sum_c + SW'(e_c[i]);
    end
  end

  logic          div_start, div_busy, div_done;
  logic [31:0]   factor;
  logic [SW-1:0] sum_q;
  seq_div #(.NW(32), .DW(SW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(32'h8000_0000), .divisor(sum_q),
    .busy(div_busy), .done(div_done), .quotient(factor));

  assign busy      = (st_q != S_IDLE);
  assign div_start = (st_q == S_DIV) && !div_busy && !div_done;

  logic started_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= S_IDLE;
      done      <= 1'b0;
      sum_q     <= '0;
      started_q <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        S_IDLE: if (start) begin
          x_q  <= row_in;
          st_q <= S_EXP;
        end
        S_EXP: begin
          e_q       <= e_c;
          sum_q     <= sum_c;
          started_q <= 1'b0;
          st_q      <= S_DIV;
        end
        S_DIV: begin
          if (div_start) started_q <= 1'b1;
          if (div_done && started_q) st_q <= S_OUT;
        end
        S_OUT: begin
          for (int i = 0; i < N; i++) begin
            logic [47:0] prod;
            prod       = 48'(e_q[i]) * 48'(factor);
            row_out[i] <= ((prod >> 23) > 48'd255) ? 8'd255 : 8'(prod >> 23);
          end
          done <= 1'b1;
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
