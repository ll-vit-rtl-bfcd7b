// systolic_pe: one multiply-accumulate cell of the output-stationary
// systolic array. Each cycle it adds a_in * b_in to its accumulator and
// passes a_in to the right and b_in downwards through registers. clr
// zeroes the accumulator (it takes priority over the accumulation).
module systolic_pe #(
  parameter int unsigned A_W   = 9,
  parameter int unsigned B_W   = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic signed [A_W-1:0]   a_in,
  input  logic signed [B_W-1:0]   b_in,
  output logic signed [A_W-1:0]   a_out,
  output logic signed [B_W-1:0]   b_out,
  output logic signed [ACC_W-1:0] acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= clr ? '0 : acc + ACC_W'(a_in * b_in);
    end
  end
endmodule
