// pingpong_buffer: two-row staging buffer at the input of the channel-mixer PE.
//
// Elements of a token row arrive one per cycle on a valid/ready stream and
// are written into the buffer selected by the write pointer. When D elements
// have been written the buffer is marked full and writing moves to the other
// buffer, so the next row can be filled while the PE still reads this one.
// The PE sees the oldest full buffer as a whole row (rd_valid, rd_row) and
// frees it with a one-cycle rd_release; the read pointer then toggles.
// in_ready is low only while both buffers are full.
module pingpong_buffer #(
  parameter int unsigned D = 192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic signed [7:0] in_data,
  output logic              rd_valid,
  output logic signed [7:0] rd_row [D],
  input  logic              rd_release
);
  localparam int unsigned IW = $clog2(D);

  logic signed [7:0] buf_q [2][D];
  logic [1:0]        full_q;
  logic              wsel_q, rsel_q;
  logic [IW-1:0]     widx_q;

  assign in_ready = !full_q[wsel_q];
  assign rd_valid = full_q[rsel_q];
  assign rd_row   = buf_q[rsel_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= '0;
      wsel_q <= 1'b0;
      rsel_q <= 1'b0;
      widx_q <= '0;
    end else begin
      if (in_valid && in_ready) begin
        buf_q[wsel_q][widx_q] <= in_data;
        if (widx_q == IW'(D - 1)) begin
          widx_q         <= '0;
          full_q[wsel_q] <= 1'b1;
          wsel_q         <= ~wsel_q;
        end else begin
          widx_q <= widx_q + 1'b1;
        end
      end
      if (rd_release && rd_valid) begin
        full_q[rsel_q] <= 1'b0;
        rsel_q         <= ~rsel_q;
      end
    end
  end

  // A release is only legal while a full row is presented.
  a_release: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_valid);
endmodule
