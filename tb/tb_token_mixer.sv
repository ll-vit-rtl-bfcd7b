// tb_token_mixer: multi-head attention at a reduced size (N=10 tokens,
// D=12, 2 heads, 4 x 4 systolic array, so every product has partial edge
// tiles). Loads random weights, sends two frames and compares every element
// of X + MHA(X) with the integer reference model. Also checks the compute
// time of a frame against the tile schedule: each tile of depth K costs
// K + 2P cycles, each ShiftMax row 38 cycles.
module tb_token_mixer;
  import llvit_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 10, D = 12, H = 2, P = 4, DH = D / H, FRAMES = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last, wl_en, busy;
  logic signed [7:0]  in_data, wl_data;
  logic signed [15:0] out_data;
  mem_sel_e    wl_sel;
  logic [15:0] wl_addr;
  int checks = 0, failures = 0;
  int cycle = 0, t_in_done, t_out_start;
  token_mixer #(.N(N), .D(D), .H(H), .P(P)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic load(mem_sel_e sel, vec_t v);
    foreach (v[a]) begin
      @(negedge clk);
      wl_en = 1; wl_sel = sel; wl_addr = 16'(a); wl_data = 8'(v[a]);
    end
    @(negedge clk);
    wl_en = 0;
  endtask
  initial begin
    layer_w_t w;
    vec_t x, y;
    int tn, td, tdh, exp_cyc, accepted;
    in_valid = 0; in_data = 0; out_ready = 0; wl_en = 0; wl_sel = MEM_WQ; wl_addr = 0; wl_data = 0;
    w = rand_layer_w(D, 4);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(MEM_WQ, w.wq); load(MEM_WK, w.wk); load(MEM_WV, w.wv); load(MEM_WO, w.wo);
    tn = (N + P - 1) / P; td = (D + P - 1) / P; tdh = (DH + P - 1) / P;
    exp_cyc = 4 * tn * td * (D + 2 * P) + H * (tn * tn * (DH + 2 * P) + 38 * N + tn * tdh * (N + 2 * P));
    for (int f = 0; f < FRAMES; f++) begin
      x = rand_vec(N * D, -128, 127);
      y = token_mixer_ref(x, w.wq, w.wk, w.wv, w.wo, N, D, H);
      for (int e = 0; e < N * D; e++) begin
        @(negedge clk);
        in_valid = 1; in_data = 8'(x[e]);
        accepted = in_ready;
        while (!accepted) begin @(negedge clk); accepted = in_ready; end
      end
      @(negedge clk);
      in_valid  = 0;
      t_in_done = cycle;
      while (!out_valid) @(negedge clk);
      t_out_start = cycle;
      checks++;
      if (t_out_start - t_in_done != exp_cyc) begin
        failures++;
        $display("FAIL compute cycles %0d exp %0d", t_out_start - t_in_done, exp_cyc);
      end
      for (int e = 0; e < N * D; ) begin
        out_ready = ($urandom_range(3) != 0);
        if (out_valid && out_ready) begin
          checks++;
          if (out_data != 16'(y[e]) || out_last != (e == N * D - 1)) begin
            failures++;
            if (failures < 10) $display("FAIL f=%0d e=%0d got %0d exp %0d", f, e, out_data, y[e]);
          end
          e++;
        end
        @(negedge clk);
      end
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
