// tb_cond_sum: loads random 4-bit encoded values into a 10-channel,
// 12-LUT conditional summation, applies random LUT-output vectors and skip
// rows, checks y_i = skip_i + sum of W_ij over fired LUTs j, and checks that
// the result appears exactly J cycles after the start.
module tb_cond_sum;
  import tb_ref_pkg::*;
  localparam int D = 10, J = 12;
  logic clk = 0, rst_n = 0;
  logic start, in_ready, y_valid, y_ack, wl_en;
  logic [J-1:0] x;
  logic signed [7:0] skip [D];
  logic signed [15:0] y [D];
  logic [15:0] wl_addr;
  logic [3:0]  wl_data;
  int checks = 0, failures = 0;
  cond_sum #(.D(D), .J(J), .ENC_W(4), .ACC_W(16), .AW(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    vec_t enc, sk, xb;
    int exp_y, cyc;
    logic signed [7:0] skip_l [D];
    logic [J-1:0] x_l;
    start = 0; y_ack = 0; wl_en = 0; wl_addr = 0; wl_data = 0; x = 0;
    foreach (skip[i]) skip[i] = 0;
    enc = rand_vec(J * D, -8, 7);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < J * D; a++) begin
      wl_en <= 1; wl_addr <= 16'(a); wl_data <= 4'(enc[a]);
      @(posedge clk);
    end
    wl_en <= 0;
    for (int t = 0; t < 60; t++) begin
      sk = rand_vec(D, -128, 127);
      xb = rand_vec(J, 0, 1);
      if (t == 0) foreach (xb[j]) xb[j] = 1;
      if (t == 1) foreach (xb[j]) xb[j] = 0;
      foreach (sk[i]) skip_l[i] = 8'(sk[i]);
      foreach (xb[j]) x_l[j] = xb[j][0];
      @(negedge clk);
      skip  = skip_l;
      x     = x_l;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!y_valid) begin cyc++; @(negedge clk); end
      checks++;
      if (cyc != J) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int i = 0; i < D; i++) begin
        exp_y = sk[i];
        for (int j = 0; j < J; j++) if (xb[j] != 0) exp_y += enc[j * D + i];
        checks++;
        if (y[i] != 16'(exp_y)) begin
          failures++;
          $display("FAIL t=%0d ch=%0d got %0d exp %0d", t, i, y[i], exp_y);
        end
      end
      y_ack = 1;
      @(negedge clk);
      y_ack = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
