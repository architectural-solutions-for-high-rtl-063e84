// tau_divider: sequential signed-by-unsigned divider used for the averages
// of the tau parameter calculation.
//
// num is a signed NW-bit dividend, den an unsigned DW-bit divisor. A start
// pulse loads the operands; a restoring shift-subtract loop then produces one
// quotient bit per cycle on the dividend's magnitude, and the sign is applied
// at the end, so the quotient is truncated toward zero. Division by zero
// yields 0. done is a one-cycle pulse NW+2 cycles after start, with quo valid
// from then until the next start.
// The original design uses two divisions per seed group; the algorithm of
// the divider is this design's choice.
module tau_divider #(
  parameter int unsigned NW = 40,
  parameter int unsigned DW = 24
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic signed [NW-1:0] num,
  input  logic [DW-1:0]        den,
  output logic                 busy,
  output logic                 done,
  output logic signed [NW-1:0] quo
);
  logic [NW-1:0] q;          // dividend magnitude shifting out, quotient shifting in
  logic [DW:0]   r;          // partial remainder
  logic [DW-1:0] d;
  logic          neg;
  logic [$clog2(NW+1)-1:0] n;
  logic [DW:0]   r_sh, r_sub;

  assign r_sh  = {r[DW-1:0], q[NW-1]};
  assign r_sub = r_sh - {1'b0, d};

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      quo  <= '0;
      n    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q    <= num[NW-1] ? NW'(-num) : NW'(num);
        neg  <= num[NW-1];
        d    <= den;
        r    <= '0;
        n    <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (32'(n) == NW) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= (d == '0) ? '0 : (neg ? -$signed(q) : $signed(q));
        end else begin
          n <= n + 1'b1;
          if (!r_sub[DW]) begin
            r <= r_sub;
            q <= {q[NW-2:0], 1'b1};
          end else begin
            r <= r_sh;
            q <= {q[NW-2:0], 1'b0};
          end
        end
      end
    end
  end
endmodule
