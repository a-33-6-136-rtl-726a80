// pwm_generator: turns one signed row input into a read-word-line pulse.
//
// The macro feeds multi-bit signed inputs to the bitcell array as pulse-width
// modulated word-line pulses: a positive input raises +RWL, a negative input
// raises -RWL, and the pulse lasts |input| clock cycles. Zero produces no
// pulse. This follows the described PWM input scheme; the register interface
// (load / start) and the symmetric input range are this design's choices:
// the most negative code -2^(IN_BITS-1) is clipped to -(2^(IN_BITS-1)-1) so
// that the two signs have equal range.
//
// Interface and timing:
//   load  - captures din into the input register (any time while idle).
//   start - one-cycle strobe; the pulse occupies the |din| cycles right
//           after the cycle in which start is high.
//   rwl   - {p, n} word-line pair, driven straight from registers.
module pwm_generator
  import nlim_pkg::*;
#(
  parameter int unsigned W = IN_BITS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic signed [W-1:0] din,
  input  logic                start,
  output rwl_t                rwl
);

  localparam int unsigned MAXMAG = (1 << (W - 1)) - 1;

  logic signed [W-1:0] in_q;
  logic [W-1:0]        cnt_q;
  logic                neg_q;
  logic [W-1:0]        mag;

  always_comb begin
    if (in_q[W-1]) mag = (in_q == {1'b1, {(W-1){1'b0}}}) ? W'(MAXMAG) : W'(-in_q);
    else           mag = W'(in_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q  <= '0;
      cnt_q <= '0;
      neg_q <= 1'b0;
    end else begin
      if (load) in_q <= din;
      if (start) begin
        cnt_q <= mag;
        neg_q <= in_q[W-1];
      end else if (cnt_q != '0) begin
        cnt_q <= cnt_q - 1'b1;
      end
    end
  end

  assign rwl.p = (cnt_q != '0) && !neg_q;
  assign rwl.n = (cnt_q != '0) &&  neg_q;

endmodule
