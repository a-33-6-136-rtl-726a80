// nlim_pkg: constants and types shared by the nonlinear in-memory ADC macro
// and the LSTM processing elements.
//
// Array geometry follows the described test chip: 160 rows of dual 9T bitcells
// for MAC and calibration, 30 rows of reference bitcells for the in-memory
// ADC ramp, 100 columns. Bitline quantities are counted in "units": one unit
// is the bitline voltage step I_u*T/C_BL produced by one LSB-supplied bitcell
// conducting for one clock cycle. The usable bitline swing of 700 mV divided
// by the 3.68 mV per-unit signal margin gives 190 units.
package nlim_pkg;

  localparam int unsigned MAC_ROWS    = 160;  // MAC + calibration rows
  localparam int unsigned ADC_ROWS    = 30;   // NLIM ADC reference rows
  localparam int unsigned TOTAL_ROWS  = MAC_ROWS + ADC_ROWS;  // 190
  localparam int unsigned COLS        = 100;
  localparam int unsigned MSB_ROWS    = 80;   // upper half on V_MSB
  localparam int unsigned CAL_ROWS    = 3;    // calibration rows 157..159
  localparam int unsigned CAL_ROW0    = MAC_ROWS - CAL_ROWS;  // 157
  localparam int unsigned MAX_RES     = 5;    // maximum ADC resolution (bits)
  localparam int unsigned MAX_STEPS   = (1 << MAX_RES) - 2;   // 30 ramp steps
  localparam int unsigned QW          = 7;    // width of one Qnt(dV_k) entry (0..127)
  localparam int unsigned IN_BITS     = 5;    // signed row input width
  localparam int unsigned DR_UNITS    = 190;  // bitline dynamic range (units)
  localparam int unsigned BL_W        = 16;   // width of a bitline quantity

  // Calibration row pulse widths in clock cycles, row 157, 158, 159.
  localparam int unsigned CAL_W0 = 4;
  localparam int unsigned CAL_W1 = 2;
  localparam int unsigned CAL_W2 = 1;
  // At 4 bits or fewer the ramp needs at most 20 reference cells; the last
  // 10 (reference rows 20..29) then serve as calibration cells instead of
  // rows 157..159, each with a one-cycle +RWL pulse.
  localparam int unsigned SPARE_CAL0 = 20;

  // Ramp generation mode of the NLIM ADC.
  typedef enum logic {
    MODE_PWM = 1'b0,   // one bitcell per step, pulse width = Qnt(dV_k) cycles
    MODE_MCL = 1'b1    // Qnt(dV_k) bitcells per step, one cycle each
  } adc_mode_e;

  // Ternary weight as stored in the two 6T halves (Q_L, Q_R) of a dual 9T cell:
  // -1 = (L,H), 0 = (L,L), +1 = (H,L).
  typedef struct packed {
    logic ql;
    logic qr;
  } tern_w_t;

  localparam tern_w_t W_NEG  = '{ql: 1'b0, qr: 1'b1};
  localparam tern_w_t W_ZERO = '{ql: 1'b0, qr: 1'b0};
  localparam tern_w_t W_POS  = '{ql: 1'b1, qr: 1'b0};

  // Value of a stored ternary weight; the unused (H,H) state reads as 0.
  function automatic int signed tern_value(tern_w_t w);
    if (w.ql && !w.qr) return 1;
    if (!w.ql && w.qr) return -1;
    return 0;
  endfunction

  // Pair of read word lines of one row.
  typedef struct packed {
    logic p;   // +RWL: positive input
    logic n;   // -RWL: negative input
  } rwl_t;

endpackage
