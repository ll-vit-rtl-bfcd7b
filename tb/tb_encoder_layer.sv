// tb_encoder_layer: one encoder layer at a reduced size (N=6 tokens, D=16,
// 2 heads, 4 x 4 array, LUT layers of 32 and 16 neurons). Loads every weight
// memory through the load port, sends two frames back to back and compares
// each output element with the reference chain: attention + residual,
// LayerNorm, LUT channel mixer with skip, LayerNorm.
module tb_encoder_layer;
  import llvit_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 6, D = 16, H = 2, P = 4, TB = 8, N1 = 32, N2 = 16, K = 6, FRAMES = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last, wl_en, tm_busy;
  logic signed [7:0] in_data, wl_data, out_data;
  mem_sel_e    wl_sel;
  logic [15:0] wl_addr;
  int checks = 0, failures = 0;
  vec_t frames[FRAMES];
  layer_w_t w;
  encoder_layer #(.N(N), .D(D), .H(H), .P(P), .TB(TB), .N1(N1), .N2(N2), .K(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
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
  // producer
  initial begin
    int accepted;
    in_valid = 0; in_data = 0; wl_en = 0; wl_sel = MEM_WQ; wl_addr = 0; wl_data = 0;
    w = rand_layer_w(D, N2);
    foreach (frames[f]) frames[f] = rand_vec(N * D, -128, 127);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(MEM_WQ, w.wq); load(MEM_WK, w.wk); load(MEM_WV, w.wv); load(MEM_WO, w.wo);
    load(MEM_G1, w.g1); load(MEM_B1, w.b1); load(MEM_G2, w.g2); load(MEM_B2, w.b2);
    load(MEM_ENC, w.enc);
    for (int f = 0; f < FRAMES; f++)
      for (int e = 0; e < N * D; e++) begin
        @(negedge clk);
        in_valid = 1; in_data = 8'(frames[f][e]);
        accepted = in_ready;
        while (!accepted) begin @(negedge clk); accepted = in_ready; end
      end
    @(negedge clk);
    in_valid = 0;
  end
  // consumer
  initial begin
    vec_t y;
    out_ready = 0;
    @(posedge rst_n);
    for (int f = 0; f < FRAMES; f++) begin
      y = encoder_ref(frames[f], w, N, D, H, TB, N1, N2, K);
      for (int e = 0; e < N * D; ) begin
        @(negedge clk);
        out_ready = ($urandom_range(4) != 0);
        if (out_valid && out_ready) begin
          checks++;
          if (out_data != 8'(y[e]) || out_last != (e % D == D - 1)) begin
            failures++;
            if (failures < 10) $display("FAIL f=%0d e=%0d got %0d exp %0d", f, e, out_data, y[e]);
          end
          e++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
