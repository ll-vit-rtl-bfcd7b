// tb_ll_vit_top: end-to-end test of the accelerator with two encoder
// layers at a reduced size (N=5 tokens, D=16, 2 heads, 4 x 4 arrays, LUT
// layers of 128 and 192 neurons, so that the channel mixer is slower than
// the LayerNorm in front of it and its ping-pong buffer is exercised). Loads different weights into each layer,
// streams three frames back to back under random output back-pressure and
// compares every output element with two chained reference encoders.
// It counts how often each mechanism of the design occurred and fails if
// one never did: frames in flight in both layers at once, input stall while
// layer 0 is busy, output back-pressure, a ping-pong buffer filled while the
// other holds a row, ShiftMax rows (partial systolic tiles occur in every
// product, since N and D/H are not multiples of P).
module tb_ll_vit_top;
  import llvit_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 2, N = 5, D = 16, H = 2, P = 4, TB = 8, N1 = 128, N2 = 192, K = 6;
  localparam int FRAMES = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last, wl_en;
  logic signed [7:0] in_data, wl_data, out_data;
  logic [7:0]  wl_layer;
  mem_sel_e    wl_sel;
  logic [15:0] wl_addr;
  logic [L-1:0] layer_busy;
  int checks = 0, failures = 0;
  int n_overlap = 0, n_in_stall = 0, n_bp = 0, n_pp_full = 0, n_smax = 0;
  vec_t frames[FRAMES];
  layer_w_t w[L];
  ll_vit_top #(.L(L), .N(N), .D(D), .H(H), .P(P), .TB(TB), .N1(N1), .N2(N2), .K(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) if (rst_n) begin
    if (layer_busy == '1) n_overlap++;
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_bp++;
    if (dut.g_layer[0].u_enc.u_cm.u_pp.full_q != 2'b00 && dut.g_layer[0].u_enc.u_cm.u_pp.in_valid &&
        dut.g_layer[0].u_enc.u_cm.u_pp.in_ready) n_pp_full++;
    if (dut.g_layer[0].u_enc.u_tm.sm_done) n_smax++;
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
    int accepted;
    in_valid = 0; in_data = 0; wl_en = 0; wl_layer = 0; wl_sel = MEM_WQ; wl_addr = 0; wl_data = 0;
    foreach (w[l]) w[l] = rand_layer_w(D, N2);
    foreach (frames[f]) frames[f] = rand_vec(N * D, -128, 127);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < L; l++) begin
      load(l, MEM_WQ, w[l].wq); load(l, MEM_WK, w[l].wk); load(l, MEM_WV, w[l].wv);
      load(l, MEM_WO, w[l].wo); load(l, MEM_G1, w[l].g1); load(l, MEM_B1, w[l].b1);
      load(l, MEM_G2, w[l].g2); load(l, MEM_B2, w[l].b2); load(l, MEM_ENC, w[l].enc);
    end
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
  initial begin
    vec_t y;
    out_ready = 0;
    @(posedge rst_n);
    for (int f = 0; f < FRAMES; f++) begin
      y = frames[f];
      for (int l = 0; l < L; l++) y = encoder_ref(y, w[l], N, D, H, TB, N1, N2, K, l);
      for (int e = 0; e < N * D; ) begin
        @(negedge clk);
        out_ready = ($urandom_range(2) != 0);
        if (out_valid && out_ready) begin
          checks++;
          if (out_data != 8'(y[e])) begin
            failures++;
            if (failures < 10) $display("FAIL f=%0d e=%0d got %0d exp %0d", f, e, out_data, y[e]);
          end
          e++;
        end
      end
    end
    $display("frames_in_flight_cycles=%0d input_stalls=%0d backpressure=%0d pingpong_fill_while_held=%0d shiftmax_rows=%0d",
             n_overlap, n_in_stall, n_bp, n_pp_full, n_smax);
    checks += 5;
    if (n_overlap == 0)  begin failures++; $display("FAIL frame pipelining never seen"); end
    if (n_in_stall == 0) begin failures++; $display("FAIL input stall never seen"); end
    if (n_bp == 0)       begin failures++; $display("FAIL back-pressure never seen"); end
    if (n_pp_full == 0)  begin failures++; $display("FAIL ping-pong fill during processing never seen"); end
    if (n_smax != FRAMES * H * N) begin failures++; $display("FAIL shiftmax rows %0d", n_smax); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
