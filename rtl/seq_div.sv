// seq_div: sequential signed divider, a signed dividend by an unsigned
// divisor, quotient truncated toward zero.
//
// A restoring shift-subtract divider on the dividend's magnitude, one
// quotient bit per cycle: `start` loads the operands, `busy` stays high for
// DW cycles and `valid` pulses with the quotient one cycle after the last
// step. The sign is restored at the end. Division by zero returns zero. Used
// by the MEAN accelerator to divide its column sums by the number of rows.
module seq_div #(
  parameter int unsigned DW = 64,   // dividend and quotient width
  parameter int unsigned VW = 32    // divisor width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] dividend,
  input  logic        [VW-1:0] divisor,
  output logic                 busy,
  output logic                 valid,
  output logic signed [DW-1:0] quotient
);

  logic [DW-1:0]   q;       // shifts the dividend magnitude out, quotient in
  logic [VW-1:0]   r;       // partial remainder
  logic [VW-1:0]   d;
  logic            neg;
  logic [$clog2(DW+1)-1:0] n;

  logic [VW:0]   r_shift;
  logic [VW:0]   r_sub;
  logic          take;
  logic [DW-1:0] q_next;
  assign r_shift = {r, q[DW-1]};
  assign r_sub   = r_shift - {1'b0, d};
  assign take    = (r_shift >= {1'b0, d});
  assign q_next  = {q[DW-2:0], take};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q        <= '0;
      r        <= '0;
      d        <= '0;
      neg      <= 1'b0;
      n        <= '0;
      busy     <= 1'b0;
      valid    <= 1'b0;
      quotient <= '0;
    end else begin
      valid <= 1'b0;
      if (start && !busy) begin
        q    <= dividend[DW-1] ? DW'(-dividend) : dividend;
        neg  <= dividend[DW-1];
        d    <= divisor;
        r    <= '0;
        n    <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        r <= take ? r_sub[VW-1:0] : r_shift[VW-1:0];
        q <= q_next;
        n <= n + 1'b1;
        if (n == ($clog2(DW+1))'(DW - 1)) begin
          busy  <= 1'b0;
          valid <= 1'b1;
          if (d == '0)  quotient <= '0;
          else if (neg) quotient <= -$signed(q_next);
          else          quotient <= $signed(q_next);
        end
      end
    end
  end

endmodule
