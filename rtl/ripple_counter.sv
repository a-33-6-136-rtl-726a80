// ripple_counter: per-column output counter of the in-memory ADC.
//
// During a ramp conversion the column's sense amplifier is strobed once per
// ramp step and produces a thermometer sequence; this counter adds up the
// strobes at which the sense amplifier output was high and so holds the
// binary ADC code at the end of the conversion. The chip uses a ripple
// counter; here the same count is kept by a synchronous counter that
// increments on the system clock when strobe and SA output are both high,
// which is this design's choice for clean single-clock timing. The count
// saturates at all-ones.
//
// Interface and timing:
//   clr - synchronous clear (held during precharge).
//   inc - strobe AND sense-amp output; adds one at the clock edge.
//   q   - current count.
module ripple_counter #(
  parameter int unsigned W = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         inc,
  output logic [W-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 q <= '0;
    else if (clr)               q <= '0;
    else if (inc && (q != '1))  q <= q + 1'b1;
  end

endmodule
