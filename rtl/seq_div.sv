// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// A start pulse (accepted when not busy) loads dividend and divisor; NW
// cycles later `done` pulses for one cycle and `quotient` holds
// floor(dividend / divisor) until the next start. Division by zero gives an
// all-ones quotient. Used by ShiftMax (reciprocal of the exponent sum) and
// I-LayerNorm (reciprocal of the standard deviation).
module seq_div #(
  parameter int unsigned NW = 32,   // dividend / quotient width
  parameter int unsigned DW = 32    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quotient
);
  localparam int unsigned CW = $clog2(NW + 1);

  logic [DW:0]   rem_q;
  logic [NW-1:0] quo_q;
  logic [DW-1:0] dvs_q;
  logic [CW-1:0] cnt_q;
  logic [DW:0]   trial;

  assign trial    = {rem_q[DW-1:0], quo_q[NW-1]};
  assign quotient = quo_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      rem_q <= '0;
      quo_q <= '0;
      dvs_q <= '0;
      cnt_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        rem_q <= '0;
        quo_q <= dividend;
        dvs_q <= divisor;
        cnt_q <= CW'(NW);
      end else if (busy) begin
        if (trial >= {1'b0, dvs_q}) begin
          rem_q <= trial - {1'b0, dvs_q};
          quo_q <= {quo_q[NW-2:0], 1'b1};
        end else begin
          rem_q <= trial;
          quo_q <= {quo_q[NW-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
