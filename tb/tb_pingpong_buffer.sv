// tb_pingpong_buffer: streams rows into an 8-element ping-pong buffer while
// the consumer releases rows after random delays; checks row order and
// content, that a second row is accepted while the first is held, and that
// the input stalls when both buffers are full.
module tb_pingpong_buffer;
  localparam int D = 8, ROWS = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, rd_valid, rd_release;
  logic signed [7:0] in_data;
  logic signed [7:0] rd_row [D];
  int checks = 0, failures = 0, stalls = 0, overlap = 0;
  pingpong_buffer #(.D(D)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic logic signed [7:0] val(int r, int c);
    return 8'(r * 13 + c * 7 - 50);
  endfunction
  // producer
  initial begin
    in_valid = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < D; c++) begin
        in_valid <= 1; in_data <= val(r, c);
        @(posedge clk);
        while (!in_ready) begin stalls++; @(posedge clk); end
      end
    in_valid <= 0;
  end
  // consumer
  initial begin
    rd_release = 0;
    @(posedge rst_n);
    for (int r = 0; r < ROWS; r++) begin
      @(posedge clk);
      while (!rd_valid) @(posedge clk);
      repeat ($urandom_range(r < 20 ? 30 : 2)) @(posedge clk);
      if (dut.full_q == 2'b11) overlap++;
      for (int c = 0; c < D; c++) begin
        checks++;
        if (rd_row[c] !== val(r, c)) begin
          failures++;
          $display("FAIL row %0d col %0d got %0d exp %0d", r, c, rd_row[c], val(r, c));
        end
      end
      rd_release <= 1;
      @(posedge clk);
      rd_release <= 0;
    end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    checks++; if (overlap == 0) begin failures++; $display("FAIL never both full"); end
    $display("stalls=%0d both_full=%0d", stalls, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
