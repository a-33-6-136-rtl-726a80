// nlim_adc_controller: sequencer and ramp generator of the nonlinear in-memory ADC.
//
// One conversion runs through four phases:
//   PCH   one cycle: bitlines precharged, column counters cleared, and the
//         row PWM generators told to start (mac_start).
//   MAC   the PWM input pulses, the calibration pulses and the "initial ramp"
//         run at the same time. The initial ramp raises -RWL on the reference
//         cells of the first 2^(res-1)-1 ramp steps with the same pulse widths
//         those cells get as steps, so that V_RBLR - V_RBLL starts at
//         -sum_{k<=2^(res-1)-1} Qnt(dV_k) units (V_initcalib). The three
//         calibration rows get +RWL pulses of 4, 2 and 1 cycles. The phase
//         lasts as long as its longest pulse (at least the longest input
//         pulse, 2^(IN_BITS-1)-1 cycles).
//   RAMP  2^res - 2 steps. Step k adds Qnt(dV_k) units to V_RBLR - V_RBLL by
//         raising +RWL of reference cells: in PWM mode one cell (row k-1 of the
//         reference block) for Qnt(dV_k) cycles; in MCL (multi-cell) mode
//         Qnt(dV_k) consecutive cells for one cycle. The sense amplifiers are
//         strobed (sa_en) in the first cycle of every step, i.e. right after
//         the previous step, and once more after the last step, giving
//         2^res - 1 comparisons and an ADC code of 0 .. 2^res - 1.
//   DONE  one-cycle done pulse; codes stay in the counters until the next start.
// The step sizes Qnt(dV_k) form the programmed table q_tab, the discrete
// derivative of the inverse activation function, so the same hardware yields
// sigmoid, tanh or any monotone activation (identical entries give a linear
// ADC). The phase order, the shared ramp for all columns and both modes follow
// the described chip. The cycle-level choices (compare in the first cycle of
// the next step, one extra cycle for the last comparison, a zero entry taking
// one idle cycle in PWM mode) are this design's own. In MCL mode the cells of
// all steps must fit in the 30 reference rows; cfg_err flags a table that does
// not (the conversion still runs, but its codes are meaningless).
// Calibration (cal_en) depends on the resolution. At 5 bits the three
// calibration rows get +RWL pulses of 4, 2 and 1 cycles (cal_rows tells the
// macro to take those rows from their PWM generators). At 4 bits or fewer the
// ramp needs at most 20 reference cells, so reference cells 20..29 each get a
// one-cycle +RWL pulse at the start of the MAC phase instead, their stored
// weights shifting the ramp start by -10..+10 units, and all 160 MAC rows stay
// available; the MCL cell budget is then 20. Using the spare cells follows the
// described chip; their one-cycle pulses are this design's own choice.
module nlim_adc_controller
  import nlim_pkg::*;
#(
  parameter int unsigned NADC  = ADC_ROWS,
  parameter int unsigned NSTEP = MAX_STEPS,
  parameter int unsigned Q_W   = QW,
  parameter int unsigned IN_W  = IN_BITS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  adc_mode_e                  mode,
  input  logic [2:0]                 res,      // 1..5 bits
  input  logic                       cal_en,
  input  logic [NSTEP-1:0][Q_W-1:0]  q_tab,    // q_tab[k-1] = Qnt(dV_k)
  output logic                       busy,
  output logic                       done,
  output logic                       cfg_err,
  output logic                       pch,
  output logic                       cnt_clr,
  output logic                       mac_start,
  output logic                       sa_en,
  output rwl_t [NADC-1:0]            adc_rwl,
  output rwl_t [CAL_ROWS-1:0]        cal_rwl,
  output logic                       cal_rows   // rows 157..159 in calibration use
);

  localparam int unsigned IN_MAX = (1 << (IN_W - 1)) - 1;
  localparam int unsigned SW     = $clog2(NSTEP * ((1 << Q_W) - 1) + 1) + 1;
  localparam int unsigned TW     = (Q_W > 5) ? Q_W + 1 : 6;

  typedef enum logic [2:0] {S_IDLE, S_PCH, S_MAC, S_RAMP, S_LAST, S_DONE} state_e;

  state_e          state_q;
  logic [TW-1:0]   t_q;        // cycle within MAC phase or ramp step
  logic [5:0]      step_q;     // current ramp step, 1-based
  logic [TW-1:0]   mac_len;
  logic [5:0]      n_steps;
  logic [5:0]      n_half;
  logic [SW-1:0]   pre [NSTEP+1];   // pre[k] = sum of the first k table entries
  logic [Q_W-1:0]  q_cur;
  logic [TW-1:0]   step_len;
  logic            spare_cal;  // calibrate with reference cells SPARE_CAL0..NADC-1
  logic [SW-1:0]   cell_budget;

  localparam int unsigned CAL_W [CAL_ROWS] = '{CAL_W0, CAL_W1, CAL_W2};

  always_comb begin
    n_steps = 6'((1 << res) - 2);
    n_half  = 6'((1 << (res - 1)) - 1);
    pre[0]  = '0;
    for (int k = 0; k < NSTEP; k++) pre[k+1] = pre[k] + SW'(q_tab[k]);
    spare_cal   = cal_en && (res <= 3'd4);
    cal_rows    = cal_en && !spare_cal;
    cell_budget = spare_cal ? SW'(SPARE_CAL0) : SW'(NADC);
    // longest pulse of the MAC phase
    mac_len = TW'(IN_MAX);
    if (cal_rows && (mac_len < TW'(CAL_W0))) mac_len = TW'(CAL_W0);
    if (mode == MODE_PWM) begin
      for (int k = 0; k < NSTEP; k++)
        if ((k < int'(n_half)) && (TW'(q_tab[k]) > mac_len)) mac_len = TW'(q_tab[k]);
    end
    q_cur    = (step_q != 0) ? q_tab[step_q - 1] : '0;
    step_len = (mode == MODE_MCL || q_cur == '0) ? TW'(1) : TW'(q_cur);
    cfg_err  = (mode == MODE_MCL) && (pre[5'(n_steps)] > cell_budget);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      t_q     <= '0;
      step_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) state_q <= S_PCH;
        S_PCH: begin
          state_q <= S_MAC;
          t_q     <= '0;
        end
        S_MAC: begin
          if (t_q + 1'b1 >= mac_len) begin
            t_q    <= '0;
            step_q <= 6'd1;
            state_q <= (n_steps == 0) ? S_LAST : S_RAMP;
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_RAMP: begin
          if (t_q + 1'b1 >= step_len) begin
            t_q <= '0;
            if (step_q >= n_steps) state_q <= S_LAST;
            else                   step_q  <= step_q + 1'b1;
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_LAST: state_q <= S_DONE;
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state_q != S_IDLE);
    done      = (state_q == S_DONE);
    pch       = (state_q == S_PCH);
    cnt_clr   = (state_q == S_PCH);
    mac_start = (state_q == S_PCH);
    sa_en     = ((state_q == S_RAMP) && (t_q == '0)) || (state_q == S_LAST);
    for (int j = 0; j < NADC; j++) begin
      adc_rwl[j] = '0;
      if (state_q == S_MAC) begin
        if (mode == MODE_PWM)
          adc_rwl[j].n = (j < int'(n_half)) && (j < NSTEP) && (t_q < TW'(q_tab[j]));
        else
          adc_rwl[j].n = (t_q == '0) && (SW'(j) < pre[5'(n_half)]);
        if (spare_cal && (j >= int'(SPARE_CAL0))) adc_rwl[j].p = (t_q == '0);
      end else if (state_q == S_RAMP) begin
        if (mode == MODE_PWM)
          adc_rwl[j].p = (j == int'(step_q) - 1) && (t_q < TW'(q_cur));
        else
          adc_rwl[j].p = (SW'(j) >= pre[5'(step_q - 1'b1)]) && (SW'(j) < pre[5'(step_q)]);
      end
    end
    for (int i = 0; i < CAL_ROWS; i++) begin
      cal_rwl[i].p = cal_rows && (state_q == S_MAC) && (t_q < TW'(CAL_W[i]));
      cal_rwl[i].n = 1'b0;
    end
  end

endmodule
