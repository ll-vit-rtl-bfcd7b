// token_mixer: multi-head self-attention block of one encoder layer.
//
// Holds one frame of N tokens x D int8 activations and all attention
// weights on chip (weights are written once, at initialisation, through the
// wl_* port and stay stationary). All matrix products run on one P x P
// systolic array, tile by tile, in this order:
//   Q = X Wq, K = X Wk, V = X Wv                (N x D, D x D)
//   for each head h (DH = D/H columns):
//     S_h = Q_h K_h^T   (N x N), then ShiftMax row by row -> probabilities
//     O_h = P_h V_h     (N x DH), written into columns h*DH.. of O
//   R = O Wo                                    (multi-head concat)
// and finally streams out X + R, the "Add" of the first Add & Norm, as
// 16-bit elements in row-major order.
//
// Products are requantised by arithmetic right shifts with saturation:
// Q/K/V and R to int8, S to int16 with 4 fractional bits (the shift also
// applies the 1/sqrt(DH) scaling), O to int8. Attention probabilities are
// unsigned 8-bit (x 256), so the array's A operand is 9 bits signed.
// Biases are not modelled. Shift values, tile order and the absence of
// biases are this design's choices.
//
// Timing: a frame is accepted one element per cycle (in_valid/in_ready),
// then each tile of an M x Ncol x K product takes K + 2P cycles, each
// ShiftMax row 37 cycles, and the output streams one element per cycle.
// A new frame is accepted after the last output element has been taken.
module token_mixer
  import llvit_pkg::*;
#(
  parameter int unsigned N          = N_TOKENS,
  parameter int unsigned D          = D_MODEL,
  parameter int unsigned H          = N_HEADS,
  parameter int unsigned P          = SA_P,
  parameter int unsigned QKV_SHIFT  = 7,
  parameter int unsigned S_SHIFT    = 9,
  parameter int unsigned PV_SHIFT   = 8,
  parameter int unsigned O_SHIFT    = 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [7:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [15:0] out_data,
  output logic               out_last,
  input  logic               wl_en,
  input  mem_sel_e           wl_sel,
  input  logic [15:0]        wl_addr,
  input  logic signed [7:0]  wl_data,
  output logic               busy
);
  localparam int unsigned DH = D / H;
  localparam int unsigned NW = $clog2(N + 1);
  localparam int unsigned DW = $clog2(D + 1);
  localparam int unsigned KW = $clog2(N + D + 2 * P + 1);

  typedef enum logic [2:0] {OP_Q, OP_K, OP_V, OP_S, OP_PV, OP_O} op_e;
  typedef enum logic [2:0] {S_LOAD, S_CLR, S_FEED, S_WB, S_SM_START, S_SM_WAIT, S_OUT} state_e;

  // On-chip memories (BRAM on an FPGA).
  logic signed [7:0]  wq [D][D], wk [D][D], wv [D][D], wo [D][D];
  logic signed [7:0]  x_m [N][D], q_m [N][D], k_m [N][D], v_m [N][D], o_m [N][D], r_m [N][D];
  logic signed [15:0] s_m [N][N];
  logic [7:0]         p_m [N][N];

  state_e         st_q;
  op_e            op_q;
  logic [7:0]     h_q;
  logic [NW-1:0]  ti_q, tj_q, row_q;
  logic [KW-1:0]  kc_q;
  logic [DW-1:0]  col_q;

  // Weight load port.
  logic [DW-1:0] wl_r, wl_c;
  assign wl_r = DW'(wl_addr / 16'(D));
  assign wl_c = DW'(wl_addr % 16'(D));
  always_ff @(posedge clk) begin
    if (wl_en && wl_addr < 16'(D * D)) begin
      unique case (wl_sel)
        MEM_WQ:  wq[wl_r][wl_c] <= wl_data;
        MEM_WK:  wk[wl_r][wl_c] <= wl_data;
        MEM_WV:  wv[wl_r][wl_c] <= wl_data;
        MEM_WO:  wo[wl_r][wl_c] <= wl_data;
        default: ;
      endcase
    end
  end

  // Dimensions of the current product.
  int unsigned n_dim, k_dim, n_tiles_j;
  localparam int unsigned M_TILES = (N + P - 1) / P;
  always_comb begin
    unique case (op_q)
      OP_S:    begin n_dim = N;  k_dim = DH; end
      OP_PV:   begin n_dim = DH; k_dim = N;  end
      default: begin n_dim = D;  k_dim = D;  end
    endcase
    n_tiles_j = (n_dim + P - 1) / P;
  end

  // Operand fetch for the systolic array.
  logic signed [8:0] a_col [P];
  logic signed [7:0] b_row [P];
  always_comb begin
    int unsigned k, hb;
    k  = int'(kc_q);
    hb = int'(h_q) * DH;
    for (int r = 0; r < P; r++) begin
      int unsigned i;
      i = int'(ti_q) * P + r;
      a_col[r] = '0;
      if (st_q == S_FEED && i < N && k < k_dim) begin
        unique case (op_q)
          OP_S:    a_col[r] = 9'(q_m[i][hb + k]);
          OP_PV:   a_col[r] = 9'({1'b0, p_m[i][k]});
          OP_O:    a_col[r] = 9'(o_m[i][k]);
          default: a_col[r] = 9'(x_m[i][k]);
        endcase
      end
    end
    for (int c = 0; c < P; c++) begin
      int unsigned j;
      j = int'(tj_q) * P + c;
      b_row[c] = '0;
      if (st_q == S_FEED && j < n_dim && k < k_dim) begin
        unique case (op_q)
          OP_Q:    b_row[c] = wq[k][j];
          OP_K:    b_row[c] = wk[k][j];
          OP_V:    b_row[c] = wv[k][j];
          OP_S:    b_row[c] = k_m[j][hb + k];
          OP_PV:   b_row[c] = v_m[k][hb + j];
          default: b_row[c] = wo[k][j];
        endcase
      end
    end
  end

  logic signed [31:0] acc [P][P];
  systolic_array #(.P(P), .A_W(9), .B_W(8), .ACC_W(32)) u_sa (
    .clk, .rst_n, .clr(st_q == S_CLR), .a_col, .b_row, .acc);

  // ShiftMax unit, one score row at a time.
  logic       sm_start, sm_busy, sm_done;
  logic [7:0] sm_out [N];
  shiftmax #(.N(N), .IN_W(16), .F(4)) u_sm (
    .clk, .rst_n, .start(sm_start), .row_in(s_m[row_q]), .busy(sm_busy), .done(sm_done),
    .row_out(sm_out));
  assign sm_start = (st_q == S_SM_START);

  assign in_ready  = (st_q == S_LOAD);
  assign out_valid = (st_q == S_OUT);
  assign out_data  = 16'(x_m[row_q][col_q]) + 16'(r_m[row_q][col_q]);
  assign out_last  = out_valid && row_q == NW'(N - 1) && col_q == DW'(D - 1);
  assign busy      = !(st_q == S_LOAD && row_q == '0 && col_q == '0);

  logic last_tile;
  assign last_tile = (ti_q == NW'(M_TILES - 1)) && (int'(tj_q) == n_tiles_j - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= S_LOAD;
      op_q  <= OP_Q;
      h_q   <= '0;
      ti_q  <= '0;
      tj_q  <= '0;
      kc_q  <= '0;
      row_q <= '0;
      col_q <= '0;
    end else begin
      unique case (st_q)
        S_LOAD: if (in_valid) begin
          x_m[row_q][col_q] <= in_data;
          if (col_q == DW'(D - 1)) begin
            col_q <= '0;
            if (row_q == NW'(N - 1)) begin
              row_q <= '0;
              op_q  <= OP_Q;
              h_q   <= '0;
              ti_q  <= '0;
              tj_q  <= '0;
              st_q  <= S_CLR;
            end else begin
              row_q <= row_q + 1'b1;
            end
          end else begin
            col_q <= col_q + 1'b1;
          end
        end
        S_CLR: begin
          kc_q <= '0;
          st_q <= S_FEED;
        end
        S_FEED: begin
          kc_q <= kc_q + 1'b1;
          if (int'(kc_q) == k_dim + 2 * P - 3) st_q <= S_WB;
        end
        S_WB: begin
          for (int r = 0; r < P; r++) begin
            for (int c = 0; c < P; c++) begin
              int unsigned i, j;
              i = int'(ti_q) * P + r;
              j = int'(tj_q) * P + c;
              if (i < N && j < n_dim) begin
                unique case (op_q)
                  OP_Q:  q_m[i][j] <= 8'(sat(longint'(acc[r][c]) >>> QKV_SHIFT, 8));
                  OP_K:  k_m[i][j] <= 8'(sat(longint'(acc[r][c]) >>> QKV_SHIFT, 8));
                  OP_V:  v_m[i][j] <= 8'(sat(longint'(acc[r][c]) >>> QKV_SHIFT, 8));
                  OP_S:  s_m[i][j] <= 16'(sat(longint'(acc[r][c]) >>> S_SHIFT, 16));
                  OP_PV: o_m[i][int'(h_q) * DH + j] <= 8'(sat(longint'(acc[r][c]) >>> PV_SHIFT, 8));
                  default: r_m[i][j] <= 8'(sat(longint'(acc[r][c]) >>> O_SHIFT, 8));
                endcase
              end
            end
          end
          st_q <= S_CLR;
          if (!last_tile) begin
            if (int'(tj_q) == n_tiles_j - 1) begin
              tj_q <= '0;
              ti_q <= ti_q + 1'b1;
            end else begin
              tj_q <= tj_q + 1'b1;
            end
          end else begin
            ti_q <= '0;
            tj_q <= '0;
            unique case (op_q)
              OP_Q: op_q <= OP_K;
              OP_K: op_q <= OP_V;
              OP_V: op_q <= OP_S;
              OP_S: begin
                row_q <= '0;
                st_q  <= S_SM_START;
              end
              OP_PV: begin
                if (int'(h_q) == H - 1) op_q <= OP_O;
                else begin
                  h_q  <= h_q + 1'b1;
                  op_q <= OP_S;
                end
              end
              default: begin
                row_q <= '0;
                col_q <= '0;
                st_q  <= S_OUT;
              end
            endcase
          end
        end
        S_SM_START: st_q <= S_SM_WAIT;
        S_SM_WAIT: if (sm_done) begin
          p_m[row_q] <= sm_out;
          if (row_q == NW'(N - 1)) begin
            row_q <= '0;
            op_q  <= OP_PV;
            st_q  <= S_CLR;
          end else begin
            row_q <= row_q + 1'b1;
            st_q  <= S_SM_START;
          end
        end
        S_OUT: if (out_ready) begin
          if (col_q == DW'(D - 1)) begin
            col_q <= '0;
            if (row_q == NW'(N - 1)) begin
              row_q <= '0;
              st_q  <= S_LOAD;
            end else begin
              row_q <= row_q + 1'b1;
            end
          end else begin
            col_q <= col_q + 1'b1;
          end
        end
        default: st_q <= S_LOAD;
      endcase
    end
  end

  a_sm_idle: assert property (@(posedge clk) disable iff (!rst_n) sm_start |-> !sm_busy);
endmodule
