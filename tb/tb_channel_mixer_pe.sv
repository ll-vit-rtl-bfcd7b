// tb_channel_mixer_pe: a reduced channel mixer (16 channels, 8-bit
// thermometer, LUT layers of 32 and 16 LUT6 neurons). Loads random encoded
// values, streams 24 rows (first half with output back-pressure, second half
// free-running) and compares every output with the reference (thermometer,
// both LUT layers, conditional summation plus skip). Also measures the
// steady-state row period, which must be max(D, N2 + 2) cycles, and checks
// that the ping-pong buffer was filled while a row was being processed.
module tb_channel_mixer_pe;
  import tb_ref_pkg::*;
  localparam int D = 16, TB = 8, N1 = 32, N2 = 16, K = 6, ROWS = 24;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last, wl_en;
  logic signed [7:0]  in_data;
  logic signed [15:0] out_data;
  logic [15:0] wl_addr;
  logic [3:0]  wl_data;
  int checks = 0, failures = 0, overlap = 0;
  vec_t enc, rows[ROWS];
  int last_t[ROWS];
  channel_mixer_pe #(.D(D), .TB(TB), .N1(N1), .N2(N2), .K(K), .ENC(4), .OUT_W(16)) dut (.*);
  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (dut.u_pp.full_q != 0 && dut.u_cs.busy_q) overlap++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    in_valid = 0; in_data = 0; wl_en = 0; wl_addr = 0; wl_data = 0;
    enc = rand_vec(N2 * D, -8, 7);
    foreach (rows[r]) rows[r] = rand_vec(D, -128, 127);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < N2 * D; a++) begin
      wl_en <= 1; wl_addr <= 16'(a); wl_data <= 4'(enc[a]); @(posedge clk);
    end
    wl_en <= 0;
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < D; i++) begin
        in_valid <= 1; in_data <= 8'(rows[r][i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
  end
  bit free_run = 0;
  always @(posedge clk) out_ready <= free_run || ($urandom_range(3) != 0);
  initial begin
    vec_t y;
    int period, exp_period;
    @(posedge rst_n);
    for (int r = 0; r < ROWS; r++) begin
      y = channel_mixer_ref(rows[r], enc, TB, N1, N2, K);
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        while (!(out_valid && out_ready)) @(negedge clk);
        checks++;
        if (out_data != 16'(y[i]) || out_last != (i == D - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d i %0d got %0d exp %0d", r, i, out_data, y[i]);
        end
      end
      last_t[r] = cycle;
      if (r == ROWS / 2) free_run = 1;
    end
    period     = (last_t[ROWS-1] - last_t[ROWS-5]) / 4;
    exp_period = (D > N2 + 2) ? D : N2 + 2;
    checks++;
    if (period != exp_period) begin failures++; $display("FAIL period %0d exp %0d", period, exp_period); end
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL no fill/process overlap"); end
    $display("period=%0d overlap_cycles=%0d", period, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
