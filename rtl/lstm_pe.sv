// lstm_pe: off-macro processing element for the element-wise part of an LSTM cell.
//
// The macro delivers the four gate activations of every hidden unit already
// passed through their nonlinearity (f, i, o through sigmoid, a through
// tanh) as ADC codes. The remaining per-unit work,
//     c_t = f * c_{t-1} + i * a        h_t = o * tanh(c_t),
// is done here in a 4-stage pipeline that accepts one hidden unit per cycle:
//   stage 1  f*c_{t-1} and i*a          stage 2  add -> c_t (state updated)
//   stage 3  tanh(c_t) by look-up table stage 4  o*tanh(c_t), requantised
// so each unit's result appears 4 cycles after it enters. A PE owns NDIM
// hidden units (2 in the described system) and keeps their cell states.
// The pipeline split and the tanh LUT follow the described design; all
// number formats are this design's own:
//   gate code c of an r-bit ADC is taken as sigmoid value (2c+1)/2^(r+1)
//     (the centre of its quantisation bin), i.e. unsigned Q0.6 at r <= 5;
//     the tanh gate is a = 2*that - 1, signed Q1.6;
//   c_t is signed fixed point with CF fraction bits, saturating at CW bits;
//   tanh LUT: 64 entries over |c| in [0,4) in steps of 1/16, value
//     round(256*tanh((2j+1)/32)) capped at 255 (computed at elaboration),
//     |c| >= 4 uses the last entry; odd symmetry gives the sign;
//   h_t is rounded to a signed HW-bit row input, h_q = round(h * (2^(HW-1)-1)).
//
// Interface: in_valid with in_dim (which own unit), 4 gate codes and res;
// clr_state zeroes the cell states (start of a sequence). out_valid,
// out_dim, h_q and c_out (the new c_t) follow 4 cycles later.
module lstm_pe
  import nlim_pkg::*;
#(
  parameter int unsigned NDIM = 2,
  parameter int unsigned GW   = MAX_RES,  // gate code width
  parameter int unsigned CW   = 16,
  parameter int unsigned CF   = 10,
  parameter int unsigned HW   = IN_BITS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr_state,
  input  logic [2:0]                 res,
  input  logic                       in_valid,
  input  logic [$clog2(NDIM)-1:0]    in_dim,
  input  logic [GW-1:0]              code_f,
  input  logic [GW-1:0]              code_i,
  input  logic [GW-1:0]              code_a,
  input  logic [GW-1:0]              code_o,
  output logic                       out_valid,
  output logic [$clog2(NDIM)-1:0]    out_dim,
  output logic signed [HW-1:0]       h_q,
  output logic signed [CW-1:0]       c_out
);

  localparam int unsigned DW = $clog2(NDIM);
  localparam int unsigned SF = 6;            // gate fraction bits
  localparam longint     CMAX = (64'sd1 <<< (CW - 1)) - 1;
  localparam longint     CMIN = -(64'sd1 <<< (CW - 1));

  // round(256*tanh((2j+1)/32)), e^y by a fixed-point Taylor series (2^24 scale)
  function automatic logic [63:0][7:0] make_tanh_lut();
    logic [63:0][7:0] lut;
    for (int j = 0; j < 64; j++) begin
      longint y, term, e, v;
      y    = longint'(2 * j + 1) <<< 20;     // 2x, with x = (2j+1)/32
      term = 64'sd1 <<< 24;
      e    = term;
      for (int n = 1; n < 40; n++) begin
        term = (term * y) >>> 24;
        term = term / longint'(n);
        e    = e + term;
      end
      v = ((e - (64'sd1 <<< 24)) * 512 / (e + (64'sd1 <<< 24)) + 1) >>> 1;
      lut[j] = (v > 255) ? 8'd255 : 8'(v);
    end
    return lut;
  endfunction

  localparam logic [63:0][7:0] TANH_LUT = make_tanh_lut();

  function automatic logic [SF:0] gate_sig(logic [GW-1:0] c, logic [2:0] r);
    logic [SF+GW:0] v;
    v = ({{(SF+1){1'b0}}, c} << 1) | (SF+GW+1)'(1);
    v = v << (3'(MAX_RES) - r);
    return v[SF:0];
  endfunction

  logic signed [CW-1:0] c_st [NDIM];

  // stage 1
  logic                 v1;
  logic [DW-1:0]        d1;
  logic signed [CW+SF+1:0] fc1;
  logic signed [2*SF+3:0]  ia1;
  logic [SF:0]          o1;
  // stage 2
  logic                 v2;
  logic [DW-1:0]        d2;
  logic [SF:0]          o2;
  logic signed [CW-1:0] c2;
  // stage 3
  logic                 v3;
  logic [DW-1:0]        d3;
  logic [SF:0]          o3;
  logic                 neg3;
  logic [7:0]           t3;
  logic signed [CW-1:0] c3;
  // stage 4 outputs registered into h_q

  logic signed [SF+2:0] a_gate;   // tanh gate, signed Q1.6
  logic signed [CW-1:0] sum2;
  logic [CW-1:0]        mag2;
  logic [5:0]           idx2;

  always_comb begin
    longint s;
    s = (longint'(fc1) >>> SF) + (longint'(ia1) <<< CF >>> (2 * SF));
    if (s > CMAX)      sum2 = CW'(CMAX);
    else if (s < CMIN) sum2 = CW'(CMIN);
    else               sum2 = CW'(s);
    a_gate = $signed({1'b0, gate_sig(code_a, res), 1'b0}) - $signed((SF+3)'(1 << SF));
    mag2 = c2[CW-1] ? CW'(-c2) : CW'(c2);
    idx2 = ((mag2 >> (CF - 4)) > 63) ? 6'd63 : 6'(mag2 >> (CF - 4));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; out_valid <= 1'b0;
      d1 <= '0; d2 <= '0; d3 <= '0; out_dim <= '0;
      fc1 <= '0; ia1 <= '0; o1 <= '0; o2 <= '0; o3 <= '0;
      c2 <= '0; c3 <= '0; t3 <= '0; neg3 <= 1'b0;
      h_q <= '0; c_out <= '0;
      for (int k = 0; k < NDIM; k++) c_st[k] <= '0;
    end else begin
      // stage 1: the two products
      v1  <= in_valid;
      d1  <= in_dim;
      o1  <= gate_sig(code_o, res);
      fc1 <= $signed({1'b0, gate_sig(code_f, res)}) * c_st[in_dim];
      ia1 <= (2*SF+4)'($signed({1'b0, gate_sig(code_i, res)}) * a_gate);
      // stage 2: cell state
      v2 <= v1;
      d2 <= d1;
      o2 <= o1;
      if (v1) begin
        c2         <= sum2;
        c_st[d1]   <= sum2;
      end
      // stage 3: tanh look-up
      v3   <= v2;
      d3   <= d2;
      o3   <= o2;
      c3   <= c2;
      neg3 <= c2[CW-1];
      t3   <= TANH_LUT[idx2];
      // stage 4: h = o * tanh(c), rounded to HW-bit signed
      out_valid <= v3;
      out_dim   <= d3;
      c_out     <= c3;
      begin
        logic [31:0] m;
        m = (32'(o3) * 32'(t3) * ((32'd1 << (HW - 1)) - 1) + (32'd1 << (SF + 7))) >> (SF + 8);
        h_q <= neg3 ? -$signed(m[HW-1:0]) : $signed(m[HW-1:0]);
      end
      if (clr_state) for (int k = 0; k < NDIM; k++) c_st[k] <= '0;
    end
  end

endmodule
