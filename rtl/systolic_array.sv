// systolic_array: P x P output-stationary systolic array for the matrix
// products of the multi-head attention (token mixer).
//
// Computes one P x P tile C = A(P x K) * B(K x P). In cycle k the caller
// presents column k of A (a_col[r] = A[r][k]) and row k of B
// (b_row[c] = B[k][c]), unskewed; the array delays row r of A by r cycles
// and column c of B by c cycles, so A[r][k] and B[k][c] meet in cell (r,c)
// k + r + c cycles after they were presented. After the last operand pair
// has been presented the caller must present zeros for 2P-2 more cycles;
// acc then holds the tile, cell (r,c) at acc[r][c]. clr (one cycle, before
// the first operands) zeroes all accumulators. The output-stationary
// dataflow is this design's choice; only the P x P array is specified.
module systolic_array #(
  parameter int unsigned P     = 32,
  parameter int unsigned A_W   = 9,
  parameter int unsigned B_W   = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic signed [A_W-1:0]   a_col [P],
  input  logic signed [B_W-1:0]   b_row [P],
  output logic signed [ACC_W-1:0] acc [P][P]
);
  logic signed [A_W-1:0] a_w [P][P+1];  // a_w[r][c] enters cell (r,c)
  logic signed [B_W-1:0] b_w [P+1][P];  // b_w[r][c] enters cell (r,c)

  // Input skew: row r of A and column c of B delayed by r and c cycles.
  for (genvar i = 0; i < P; i++) begin : g_skew
    if (i == 0) begin : g_direct
      assign a_w[0][0] = a_col[0];
      assign b_w[0][0] = b_row[0];
    end else begin : g_delay
      logic signed [A_W-1:0] a_sr [i];
      logic signed [B_W-1:0] b_sr [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < i; s++) begin
            a_sr[s] <= '0;
            b_sr[s] <= '0;
          end
        end else begin
          a_sr[0] <= a_col[i];
          b_sr[0] <= b_row[i];
          for (int s = 1; s < i; s++) begin
            a_sr[s] <= a_sr[s-1];
            b_sr[s] <= b_sr[s-1];
          end
        end
      end
      assign a_w[i][0] = a_sr[i-1];
      assign b_w[0][i] = b_sr[i-1];
    end
  end

  for (genvar r = 0; r < P; r++) begin : g_row
    for (genvar c = 0; c < P; c++) begin : g_col
      systolic_pe #(.A_W(A_W), .B_W(B_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .clr,
        .a_in(a_w[r][c]), .b_in(b_w[r][c]),
        .a_out(a_w[r][c+1]), .b_out(b_w[r+1][c]),
        .acc(acc[r][c]));
    end
  end
endmodule
