// tb_i_layernorm: loads gamma/beta into a 16-channel I-LayerNorm, streams
// rows with random input gaps and output back-pressure, and compares every
// output with the integer reference (includes a constant row, whose
// variance is zero).
module tb_i_layernorm;
  import tb_ref_pkg::*;
  localparam int D = 16, ROWS = 30;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last, wl_en, wl_sel;
  logic signed [15:0] in_data;
  logic signed [7:0]  out_data, wl_data;
  logic [15:0] wl_addr;
  int checks = 0, failures = 0;
  vec_t g, b, rows[ROWS];
  i_layernorm #(.D(D), .IN_W(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    in_valid = 0; in_data = 0; wl_en = 0; wl_sel = 0; wl_addr = 0; wl_data = 0;
    g = rand_vec(D, 20, 120);
    b = rand_vec(D, -20, 20);
    foreach (rows[r]) begin
      rows[r] = rand_vec(D, -300 * (r % 4 + 1), 300 * (r % 4 + 1));
      if (r == 2) foreach (rows[r][i]) rows[r][i] = 42;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      wl_en <= 1; wl_sel <= 0; wl_addr <= 16'(i); wl_data <= 8'(g[i]); @(posedge clk);
      wl_sel <= 1; wl_data <= 8'(b[i]); @(posedge clk);
    end
    wl_en <= 0;
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < D; i++) begin
        while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1; in_data <= 16'(rows[r][i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
  end
  always @(posedge clk) out_ready <= ($urandom_range(4) != 0);
  initial begin
    vec_t y;
    @(posedge rst_n);
    for (int r = 0; r < ROWS; r++) begin
      y = layernorm_ref(rows[r], g, b);
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        while (!(out_valid && out_ready)) @(negedge clk);
        checks++;
        if (out_data != 8'(y[i]) || out_last != (i == D - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d i %0d got %0d exp %0d", r, i, out_data, y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
