// lstm_accelerator: LSTM layer built around the nonlinear in-memory-ADC macro.
//
// One LSTM time step, for the 40-input / 38-unit layer of the keyword-
// spotting network, is
//   [f a i o] = [sigmoid tanh sigmoid sigmoid]( [x_t h_{t-1}] * [W;U] )   (macro)
//   c_t = f*c_{t-1} + i*a,   h_t = o*tanh(c_t)                           (PEs)
// The macro computes the 78-input matrix product and applies the gate
// nonlinearities inside its ADC, column by column; the 152 gate columns
// (4 x 38) are more than the macro's 100 columns, so one time step takes
// more than one macro operation. After each operation the host copies a
// range of column codes into the gate buffer (152 five-bit slots, slot =
// 38*g + unit with gate g = 0 f, 1 a, 2 i, 3 o). When all slots are filled
// it starts the PE array, which returns h_t 5 cycles later. After the last
// time step the 38 x 12 fully connected layer and argmax (fc_start) give the
// keyword class 13 cycles later. h_t is fed back
// as row inputs of the next step: with in_load and h_fb set, rows
// H_ROW0 .. H_ROW0+37 (and, with h_dup, the LSB copies DUP_OFF rows further
// down, for multi-bit weights) take h_t, the other rows take x_rows.
//
// The split between macro and PEs, the gate order of the weight matrix and
// the 19 two-unit PEs follow the described system; the gate buffer, the
// row placement of x and h and the host-driven sequencing are this design's
// own. With DUP_OFF = 80 the LSB copy of unit 37 lands on row 157, the first
// calibration row, so 3-bit-weight steps at 5-bit resolution must run with
// cal_en low (at 4 bits the macro calibrates with spare reference cells and
// row 157 is a MAC row).
module lstm_accelerator
  import nlim_pkg::*;
#(
  parameter int unsigned HID     = 38,
  parameter int unsigned NPE     = 19,
  parameter int unsigned H_ROW0  = 40,
  parameter int unsigned DUP_OFF = MSB_ROWS,
  parameter int unsigned NCLASS  = 12
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // macro configuration
  input  adc_mode_e                               mode,
  input  logic [2:0]                              res,
  input  logic                                    cal_en,
  input  logic [2:0]                              nbwr,
  input  logic [MAX_STEPS-1:0][QW-1:0]            q_tab,
  // row inputs
  input  logic                                    in_load,
  input  logic                                    h_fb,
  input  logic                                    h_dup,
  input  logic signed [MAC_ROWS-1:0][IN_BITS-1:0] x_rows,
  // weight write port
  input  logic                                    wr_en,
  input  logic [7:0]                              wr_row,
  input  tern_w_t [COLS-1:0]                      wr_data,
  // macro operation
  input  logic                                    start,
  output logic                                    busy,
  output logic                                    done,
  output logic                                    cfg_err,
  output logic [COLS-1:0][MAX_RES-1:0]            code,
  // gate buffer
  input  logic                                    gb_we,
  input  logic [7:0]                              gb_base,
  input  logic [7:0]                              gb_ncol,
  // PE array
  input  logic                                    pe_clr,
  input  logic                                    pe_start,
  output logic                                    pe_done,
  output logic signed [HID-1:0][IN_BITS-1:0]      h_vec,
  // FC + argmax classifier
  input  logic                                    fcw_we,
  input  logic [3:0]                              fcw_cls,
  input  logic signed [HID-1:0][7:0]              fcw_data,
  input  logic                                    fc_start,
  output logic                                    fc_done,
  output logic [3:0]                              fc_class
);

  localparam int unsigned NSLOT = 4 * HID;

  logic signed [MAC_ROWS-1:0][IN_BITS-1:0] in_vec;
  logic [NSLOT-1:0][MAX_RES-1:0]           gbuf;
  logic [HID-1:0][MAX_RES-1:0]             g_f, g_a, g_i, g_o;
  logic                                    pe_busy;
  logic                                    fc_busy;
  logic signed [31:0]                      fc_score;

  always_comb begin
    in_vec = x_rows;
    if (h_fb) begin
      for (int u = 0; u < int'(HID); u++) begin
        in_vec[H_ROW0 + u] = h_vec[u];
        if (h_dup && (H_ROW0 + u + DUP_OFF < MAC_ROWS))
          in_vec[H_ROW0 + u + DUP_OFF] = h_vec[u];
      end
    end
  end

  nlim_cim_macro u_macro (
    .clk     (clk),
    .rst_n   (rst_n),
    .mode    (mode),
    .res     (res),
    .cal_en  (cal_en),
    .nbwr    (nbwr),
    .q_tab   (q_tab),
    .in_load (in_load),
    .in_vec  (in_vec),
    .wr_en   (wr_en),
    .wr_row  (wr_row),
    .wr_data (wr_data),
    .start   (start),
    .busy    (busy),
    .done    (done),
    .cfg_err (cfg_err),
    .code    (code)
  );

  // gate buffer: copy columns 0 .. gb_ncol-1 to slots gb_base ..
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gbuf <= '0;
    end else if (gb_we) begin
      for (int c = 0; c < int'(COLS); c++)
        if ((c < int'(gb_ncol)) && (int'(gb_base) + c < int'(NSLOT)))
          gbuf[int'(gb_base) + c] <= code[c];
    end
  end

  always_comb begin
    for (int u = 0; u < int'(HID); u++) begin
      g_f[u] = gbuf[0 * HID + u];
      g_a[u] = gbuf[1 * HID + u];
      g_i[u] = gbuf[2 * HID + u];
      g_o[u] = gbuf[3 * HID + u];
    end
  end

  lstm_pe_array #(.NPE(NPE), .NDIM(HID / NPE)) u_pes (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr_state (pe_clr),
    .res       (res),
    .start     (pe_start),
    .code_f    (g_f),
    .code_i    (g_i),
    .code_a    (g_a),
    .code_o    (g_o),
    .busy      (pe_busy),
    .done      (pe_done),
    .h_vec     (h_vec)
  );

  fc_argmax #(.NIN(HID), .NCLS(NCLASS), .WW(8), .HW(IN_BITS)) u_fc (
    .clk        (clk),
    .rst_n      (rst_n),
    .w_we       (fcw_we),
    .w_cls      (fcw_cls),
    .w_data     (fcw_data),
    .start      (fc_start),
    .h_vec      (h_vec),
    .busy       (fc_busy),
    .done       (fc_done),
    .result     (fc_class),
    .best_score (fc_score)
  );

endmodule
