// tb_ll_vit_full: the accelerator at its full size (12 encoder layers,
// 197 tokens x 192 channels, 3 heads, 32 x 32 systolic arrays, LUT layers of
// 768 and 192 LUT6 neurons, 8-bit thermometer code, 4-bit encoded values).
// Writes every weight of every layer through the load port, sends one
// frame, compares all 197 x 192 outputs with the chained reference encoders
// and reports the cycles from the last input element to the last output.
module tb_ll_vit_full;
  import llvit_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = N_LAYERS, N = N_TOKENS, D = D_MODEL, H = N_HEADS;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last, wl_en;
  logic signed [7:0] in_data, wl_data, out_data;
  logic [7:0]  wl_layer;
  mem_sel_e    wl_sel;
  logic [15:0] wl_addr;
  logic [L-1:0] layer_busy;
  int checks = 0, failures = 0, cycle = 0, t0;
  vec_t frame;
  layer_w_t w[L];
  ll_vit_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic load(int l, mem_sel_e sel, vec_t v);
    foreach (v[a]) begin
      @(negedge clk);
      wl_en = 1; wl_layer = 8'(l); wl_sel = sel; wl_addr = 16'(a); wl_data = 8'(v[a]);
    end
    @(negedge clk);
    wl_en = 0;
  endtask
  initial begin
    vec_t y;
    int accepted;
    in_valid = 0; in_data = 0; out_ready = 1; wl_en = 0; wl_layer = 0; wl_sel = MEM_WQ;
    wl_addr = 0; wl_data = 0;
    foreach (w[l]) begin
      w[l] = rand_layer_w(D, LUT2_N);
      // keep the attention logits in a useful range at D = 192
      foreach (w[l].wq[i]) begin w[l].wq[i] /= 3; w[l].wk[i] /= 3; end
    end
    frame = rand_vec(N * D, -100, 100);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < L; l++) begin
      load(l, MEM_WQ, w[l].wq); load(l, MEM_WK, w[l].wk); load(l, MEM_WV, w[l].wv);
      load(l, MEM_WO, w[l].wo); load(l, MEM_G1, w[l].g1); load(l, MEM_B1, w[l].b1);
      load(l, MEM_G2, w[l].g2); load(l, MEM_B2, w[l].b2); load(l, MEM_ENC, w[l].enc);
    end
    $display("weights loaded at cycle %0d", cycle);
    for (int e = 0; e < N * D; e++) begin
      @(negedge clk);
      in_valid = 1; in_data = 8'(frame[e]);
      accepted = in_ready;
      while (!accepted) begin @(negedge clk); accepted = in_ready; end
    end
    @(negedge clk);
    in_valid = 0;
    t0 = cycle;
    y = frame;
    for (int l = 0; l < L; l++) y = encoder_ref(y, w[l], N, D, H, THERMO_B, LUT1_N, LUT2_N, LUT_K, l);
    for (int e = 0; e < N * D; ) begin
      if (out_valid) begin
        checks++;
        if (out_data != 8'(y[e])) begin
          failures++;
          if (failures < 10) $display("FAIL e=%0d got %0d exp %0d", e, out_data, y[e]);
        end
        e++;
      end
      @(negedge clk);
    end
    $display("frame latency %0d cycles after the last input element", cycle - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
