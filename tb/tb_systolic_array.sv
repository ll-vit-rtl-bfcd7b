// tb_systolic_array: 8 x 8 array; random int tiles with random depth K are
// fed unskewed (column k of A, row k of B per cycle, then 2P-2 cycles of
// zeros) and every accumulator is compared with A*B exactly K + 2P - 2
// cycles after the first operands; also checks that clr empties the array.
module tb_systolic_array;
  import tb_ref_pkg::*;
  localparam int P = 8;
  logic clk = 0, rst_n = 0, clr;
  logic signed [8:0]  a_col [P];
  logic signed [7:0]  b_row [P];
  logic signed [31:0] acc [P][P];
  int checks = 0, failures = 0;
  systolic_array #(.P(P), .A_W(9), .B_W(8), .ACC_W(32)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    vec_t a, b, c;
    int k;
    clr = 0;
    foreach (a_col[i]) a_col[i] = 0;
    foreach (b_row[i]) b_row[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      k = (t == 0) ? 1 : 3 + int'($urandom_range(40));
      a = rand_vec(P * k, -256, 255);
      b = rand_vec(k * P, -128, 127);
      c = matmul_ref(a, b, P, k, P);
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int s = 0; s < k + 2 * P - 2; s++) begin
        for (int i = 0; i < P; i++) begin
          a_col[i] = (s < k) ? 9'(a[i * k + s]) : 9'sd0;
          b_row[i] = (s < k) ? 8'(b[s * P + i]) : 8'sd0;
        end
        @(negedge clk);
        // one cycle before the end the far corner must still be incomplete
        if (s == k + 2 * P - 4) begin
          checks++;
          if (c[P*P-1] != 0 && acc[P-1][P-1] == c[P*P-1]) begin
            failures++; $display("FAIL corner finished early");
          end
        end
      end
      for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
        checks++;
        if (acc[i][j] != c[i*P + j]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d (%0d,%0d) got %0d exp %0d", t, i, j, acc[i][j], c[i*P+j]);
        end
      end
    end
    clr = 1;
    @(negedge clk);
    clr = 0;
    foreach (acc[i, j]) begin checks++; if (acc[i][j] != 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
