// seq_divider: the divider that turns a bucket's coordinate sum into its
// arithmetic mean, the split value.
//
// Computes quot = ceil(num / den) for a signed dividend and an unsigned,
// non-zero divisor, by restoring division on |num|, one quotient bit per
// clock (NW clocks), then rounding toward +infinity. Rounding up is this
// implementation's choice: with integer coordinates, "coord < ceil(mean)"
// puts the smallest coordinate on the left and the largest on the right
// whenever they differ, so neither child is ever empty.
//
// Interface: start (when !busy) latches num/den; done pulses for one clock
// when quot is valid; quot holds until the next start. Latency NW+1 clocks.
module seq_divider #(
  parameter int NW = 40,   // dividend width (signed)
  parameter int DW = 32    // divisor width (unsigned)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [NW-1:0] num,
  input  logic        [DW-1:0] den,
  output logic                 busy,
  output logic                 done,
  output logic signed [NW-1:0] quot
);
  logic [NW-1:0]  a, q;
  logic [DW:0]    rem;
  logic [DW-1:0]  d;
  logic           neg;
  logic [$clog2(NW+1)-1:0] i;
  logic [DW:0]    trial;

  always_comb trial = {rem[DW-1:0], a[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a <= '0; q <= '0; rem <= '0; d <= '0; neg <= 1'b0; i <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        neg  <= num[NW-1];
        a    <= num[NW-1] ? NW'(-num) : NW'(num);
        d    <= den;
        rem  <= '0;
        q    <= '0;
        i    <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        a <= a << 1;
        if (trial >= {1'b0, d}) begin
          rem <= trial - {1'b0, d};
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[NW-2:0], 1'b0};
        end
        i <= i + 1'b1;
        if (i == ($clog2(NW+1))'(NW-1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ceil(): add one for a positive quotient with a remainder; a negative
  // quotient truncated toward zero is already the ceiling.
  always_comb begin
    quot = neg ? -$signed(q) : $signed(q) + NW'(rem != '0);
  end
endmodule
