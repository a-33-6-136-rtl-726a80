// nlim_cim_macro: analog computing-in-memory macro with a nonlinear in-memory ADC.
//
// One operation computes, for all 100 columns in parallel,
//     code[c] = f( sum_i In_i * W[i][c] )
// where In_i are signed multi-bit row inputs, W are ternary (or, with the
// dual-supply MSB/LSB rows, multi-bit) weights, and f is a programmable
// monotone activation quantised to 1..5 bits. The MAC result is formed as a
// differential bitline voltage V_RBLR - V_RBLL; the activation is applied by
// a single-slope ADC whose ramp is built inside the same array from 30 rows
// of reference bitcells, with non-uniform steps Qnt(dV_k) that trace the
// inverse of the activation function. Every column has its own sense
// amplifier and counter, and the ramp pulses are shared by all columns.
//
// Structure (following the chip's block diagram): 160 row PWM generators,
// the NLIM ADC controller, the 190 x 100 bitcell array (behavioural model),
// 100 sense amplifiers (behavioural model) and 100 column counters. Rows
// 157..159 are calibration rows: while cal_en is set at 5-bit resolution they
// receive fixed +RWL pulses of 4, 2 and 1 cycles from the controller instead
// of their PWM inputs, so that their stored weights shift each column's ramp
// start by -7..+7 units. At 4 bits or fewer, calibration uses the spare
// reference cells 20..29 instead and rows 157..159 remain MAC rows. The
// word-line buffers are plain wires here.
//
// Interface (register-style, this design's own): in_load captures all 160
// row inputs; wr_en/wr_row/wr_data write one array row of ternary weights;
// mode/res/cal_en/q_tab/nbwr configure the conversion and must be stable
// while busy. start launches an operation; done pulses when code[] is valid.
// Latency: 1 (precharge) + MAC phase (>= 15 cycles) + ramp (sum of the
// table entries, one cycle for a zero entry in PWM mode, or one cycle per
// step in MCL mode) + 1 final comparison + 1 done cycle.
module nlim_cim_macro
  import nlim_pkg::*;
#(
  parameter int unsigned NCOL        = COLS,
  parameter int unsigned OFFSET_MAX  = 0,
  parameter int unsigned OFFSET_SEED = 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // configuration
  input  adc_mode_e                             mode,
  input  logic [2:0]                            res,
  input  logic                                  cal_en,
  input  logic [2:0]                            nbwr,
  input  logic [MAX_STEPS-1:0][QW-1:0]          q_tab,
  // row inputs
  input  logic                                  in_load,
  input  logic signed [MAC_ROWS-1:0][IN_BITS-1:0] in_vec,
  // weight write port
  input  logic                                  wr_en,
  input  logic [7:0]                            wr_row,
  input  tern_w_t [NCOL-1:0]                    wr_data,
  // operation
  input  logic                                  start,
  output logic                                  busy,
  output logic                                  done,
  output logic                                  cfg_err,
  output logic [NCOL-1:0][MAX_RES-1:0]          code
);

  logic                       pch, cnt_clr, mac_start, sa_en;
  rwl_t [MAC_ROWS-1:0]        pwm_rwl;
  rwl_t [ADC_ROWS-1:0]        adc_rwl;
  rwl_t [CAL_ROWS-1:0]        cal_rwl;
  logic                       cal_rows;
  rwl_t [TOTAL_ROWS-1:0]      rwl;
  logic [NCOL-1:0][BL_W-1:0]  v_rbll, v_rblr;
  logic [NCOL-1:0]            von;

  for (genvar r = 0; r < MAC_ROWS; r++) begin : g_pwm
    pwm_generator #(.W(IN_BITS)) u_pwm (
      .clk   (clk),
      .rst_n (rst_n),
      .load  (in_load),
      .din   (in_vec[r]),
      .start (mac_start),
      .rwl   (pwm_rwl[r])
    );
  end

  nlim_adc_controller u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .mode      (mode),
    .res       (res),
    .cal_en    (cal_en),
    .q_tab     (q_tab),
    .busy      (busy),
    .done      (done),
    .cfg_err   (cfg_err),
    .pch       (pch),
    .cnt_clr   (cnt_clr),
    .mac_start (mac_start),
    .sa_en     (sa_en),
    .adc_rwl   (adc_rwl),
    .cal_rwl   (cal_rwl),
    .cal_rows  (cal_rows)
  );

  // Word-line buffers: calibration rows are taken over by the controller.
  always_comb begin
    for (int r = 0; r < int'(MAC_ROWS); r++) begin
      if (cal_rows && (r >= int'(CAL_ROW0))) rwl[r] = cal_rwl[r - int'(CAL_ROW0)];
      else                                 rwl[r] = pwm_rwl[r];
    end
    for (int j = 0; j < int'(ADC_ROWS); j++) rwl[MAC_ROWS + j] = adc_rwl[j];
  end

  cim_array #(
    .ROWS        (TOTAL_ROWS),
    .NCOL        (NCOL),
    .NMSB        (MSB_ROWS),
    .DR          (DR_UNITS),
    .OFFSET_MAX  (OFFSET_MAX),
    .OFFSET_SEED (OFFSET_SEED)
  ) u_array (
    .clk     (clk),
    .pch     (pch),
    .rwl     (rwl),
    .nbwr    (nbwr),
    .wr_en   (wr_en),
    .wr_row  (wr_row),
    .wr_data (wr_data),
    .v_rbll  (v_rbll),
    .v_rblr  (v_rblr)
  );

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    sense_amp u_sa (
      .en     (sa_en),
      .v_rbll (v_rbll[c]),
      .v_rblr (v_rblr[c]),
      .von    (von[c])
    );
    ripple_counter #(.W(MAX_RES)) u_cnt (
      .clk   (clk),
      .rst_n (rst_n),
      .clr   (cnt_clr),
      .inc   (von[c]),
      .q     (code[c])
    );
  end

endmodule
