// lstm_pe_array: the parallel PEs that finish one LSTM time step off the macro.
//
// NPE processing elements (19 in the described system) each own NDIM hidden
// units (2), covering HID = NPE*NDIM = 38 hidden units. On start, every PE
// takes its first unit in that cycle and its second unit in the next, so the
// pipelines (4 cycles each) deliver the whole hidden vector h_t 5 cycles
// after start (NDIM + 3 in general). Unit u = NDIM*p + k is handled by PE p
// as its k-th unit. The gate codes must stay stable for NDIM cycles after
// start. done is high in the cycle the last results leave the pipelines;
// h_vec is valid from then on (it holds the previous step before that).
// clr_state clears all cell states (start of a new sequence).
module lstm_pe_array
  import nlim_pkg::*;
#(
  parameter int unsigned NPE  = 19,
  parameter int unsigned NDIM = 2,
  parameter int unsigned GW   = MAX_RES,
  parameter int unsigned HW   = IN_BITS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clr_state,
  input  logic [2:0]                         res,
  input  logic                               start,
  input  logic [NPE*NDIM-1:0][GW-1:0]        code_f,
  input  logic [NPE*NDIM-1:0][GW-1:0]        code_i,
  input  logic [NPE*NDIM-1:0][GW-1:0]        code_a,
  input  logic [NPE*NDIM-1:0][GW-1:0]        code_o,
  output logic                               busy,
  output logic                               done,
  output logic signed [NPE*NDIM-1:0][HW-1:0] h_vec
);

  localparam int unsigned HID = NPE * NDIM;
  localparam int unsigned DW  = (NDIM > 1) ? $clog2(NDIM) : 1;
  localparam int unsigned CW_OUT = 16;

  logic [DW-1:0]  feed_q;      // unit index being fed
  logic           feeding_q;
  logic           in_valid;
  logic [DW-1:0]  in_dim;
  logic [NPE-1:0]              out_valid;
  logic [NPE-1:0][DW-1:0]      out_dim;
  logic signed [NPE-1:0][HW-1:0] pe_h;
  logic signed [HID-1:0][HW-1:0] h_reg;
  logic [NPE-1:0][CW_OUT-1:0]    c_unused;
  logic [3:0]     inflight_q;

  always_comb begin
    in_valid = start || feeding_q;
    in_dim   = start ? '0 : feed_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      feed_q     <= '0;
      feeding_q  <= 1'b0;
      inflight_q <= '0;
    end else begin
      if (start && NDIM > 1) begin
        feeding_q <= 1'b1;
        feed_q    <= DW'(1);
      end else if (feeding_q) begin
        if (int'(feed_q) == NDIM - 1) feeding_q <= 1'b0;
        else                          feed_q    <= feed_q + 1'b1;
      end
      if (start)     inflight_q <= 4'd1;
      else if (done) inflight_q <= '0;
    end
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic [GW-1:0] f, i, a, o;
    always_comb begin
      f = code_f[p*NDIM + int'(in_dim)];
      i = code_i[p*NDIM + int'(in_dim)];
      a = code_a[p*NDIM + int'(in_dim)];
      o = code_o[p*NDIM + int'(in_dim)];
    end
    lstm_pe #(.NDIM(NDIM), .GW(GW), .CW(CW_OUT), .HW(HW)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .clr_state (clr_state),
      .res       (res),
      .in_valid  (in_valid),
      .in_dim    (in_dim),
      .code_f    (f),
      .code_i    (i),
      .code_a    (a),
      .code_o    (o),
      .out_valid (out_valid[p]),
      .out_dim   (out_dim[p]),
      .h_q       (pe_h[p]),
      .c_out     (c_unused[p])
    );
    logic signed [NDIM-1:0][HW-1:0] h_own;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)              h_own <= '0;
      else if (out_valid[p])   h_own[out_dim[p]] <= pe_h[p];
    end
    assign h_reg[p*NDIM +: NDIM] = h_own;
  end

  always_comb begin
    busy = (inflight_q != '0);
    done = out_valid[0] && (int'(out_dim[0]) == NDIM - 1);
    h_vec = h_reg;
    for (int p = 0; p < NPE; p++)
      if (out_valid[p]) h_vec[p*NDIM + int'(out_dim[p])] = pe_h[p];
  end

endmodule
