// tb_shiftmax: 16-element rows (random, constant, widely spread and near
// the int16 limits) through ShiftMax; every probability is compared with
// the integer reference, and the start-to-done latency must be 37 cycles.
module tb_shiftmax;
  import tb_ref_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, start, busy, done;
  logic signed [15:0] row_in [N];
  logic [7:0] row_out [N];
  int checks = 0, failures = 0;
  shiftmax #(.N(N), .IN_W(16), .F(4)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    vec_t x, r;
    int cyc, total;
    logic signed [15:0] r_l [N];
    start = 0;
    foreach (row_in[i]) row_in[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      case (t)
        0: begin x = new[N]; foreach (x[i]) x[i] = 5; end
        1: x = rand_vec(N, -32768, 32767);
        2: begin x = rand_vec(N, -20, 20); x[3] = 32767; end
        default: x = rand_vec(N, -200 * (t % 5 + 1), 200 * (t % 5 + 1));
      endcase
      foreach (x[i]) r_l[i] = 16'(x[i]);
      @(negedge clk);
      row_in = r_l;
      start  = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin cyc++; @(negedge clk); end
      checks++;
      if (cyc != 37) begin failures++; $display("FAIL latency %0d", cyc); end
      r = shiftmax_ref(x, 4);
      total = 0;
      for (int i = 0; i < N; i++) begin
        checks++;
        total += row_out[i];
        if (row_out[i] != 8'(r[i])) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d i=%0d got %0d exp %0d", t, i, row_out[i], r[i]);
        end
      end
      if (t == 0) begin checks++; if (row_out[0] != 8'd16) failures++; end // uniform: 256/16
      checks++;
      if (total < 200 || total > 300) begin failures++; $display("FAIL sum %0d", total); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
