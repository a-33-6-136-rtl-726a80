// tb_nlim_adc_controller: checks the ramp sequencer in PWM and MCL modes.
//
// The testbench integrates the reference-row word lines itself, as if every
// reference cell stored +1 (a +RWL cycle adds one unit, a -RWL cycle
// removes one), and records that level at every sense-amp strobe. The
// expected levels are worked out from the table alone:
//   level_p = -sum_{k<=2^(res-1)-1} q_k + sum_{k<=p} q_k,  p = 0 .. 2^res-2.
// With calibration at 4 bits or fewer the ten spare reference cells add
// one unit each during the MAC phase, so the levels are 10 higher.
// It also checks the calibration pulse widths (4, 2, 1, 5-bit only), the ramp duration
// (sum of entries + 1 strobe cycle in PWM mode, steps + 1 in MCL mode,
// which for the sigmoid tables gives the 56 / 20 cycles the chip reports
// plus one), the MAC phase length and the MCL row-budget flag.
module tb_nlim_adc_controller;
  import nlim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, cal_en = 1'b0;
  adc_mode_e mode = MODE_PWM;
  logic [2:0] res = 3'd5;
  logic [MAX_STEPS-1:0][QW-1:0] q_tab;
  logic busy, done, cfg_err, pch, cnt_clr, mac_start, sa_en;
  rwl_t [ADC_ROWS-1:0] adc_rwl;
  rwl_t [CAL_ROWS-1:0] cal_rwl;
  logic cal_rows;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nlim_adc_controller dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  localparam int SIG5 [30] = '{6,4,3,2,2,2,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,2,2,2,3,4,6};
  localparam int SIG4 [14] = '{3,2,1,1,1,1,1,1,1,1,1,1,2,3};

  task automatic run(adc_mode_e m, int r, int q[], bit cal, int exp_ramp_cycles);
    int level, nstrobe, ramp_cycles, mac_cycles, cal_w[3], exp_lvl, half, nst, s;
    int levels[$];
    bit in_ramp;
    mode = m; res = 3'(r); cal_en = cal;
    q_tab = '0;
    foreach (q[k]) q_tab[k] = QW'(q[k]);
    half = (1 << (r - 1)) - 1;
    nst  = (1 << r) - 2;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    level = 0; nstrobe = 0; ramp_cycles = 0; mac_cycles = 0; cal_w = '{0, 0, 0}; in_ramp = 0;
    // now in the PCH cycle
    check(pch && cnt_clr && mac_start, "precharge cycle");
    @(negedge clk);
    while (!done) begin
      if (sa_en) begin
        levels.push_back(level);
        in_ramp = 1;
      end
      if (in_ramp) ramp_cycles++;
      else mac_cycles++;
      for (int j = 0; j < ADC_ROWS; j++) begin
        if (adc_rwl[j].p) level++;
        if (adc_rwl[j].n) level--;
        if (adc_rwl[j].p && adc_rwl[j].n) check(0, "both word lines high");
      end
      for (int i = 0; i < 3; i++) if (cal_rwl[i].p) cal_w[i]++;
      @(negedge clk);
    end
    // expected strobe levels
    check(levels.size() == nst + 1, $sformatf("strobes %0d exp %0d", levels.size(), nst + 1));
    s = 0;
    for (int k = 0; k < half; k++) s += q[k];
    exp_lvl = -s + ((cal && r <= 4) ? ADC_ROWS - SPARE_CAL0 : 0);
    for (int p = 0; p <= nst && p < levels.size(); p++) begin
      if (p > 0) exp_lvl += q[p-1];
      check(levels[p] == exp_lvl, $sformatf("mode %0d res %0d strobe %0d level %0d exp %0d", m, r, p, levels[p], exp_lvl));
    end
    check(ramp_cycles == exp_ramp_cycles, $sformatf("ramp cycles %0d exp %0d", ramp_cycles, exp_ramp_cycles));
    check(mac_cycles >= 15, $sformatf("mac phase %0d", mac_cycles));
    check(cal_rows == (cal && r == 5), "calibration-row select");
    if (cal && r == 5) check(cal_w[0] == 4 && cal_w[1] == 2 && cal_w[2] == 1,
                   $sformatf("cal widths %0d %0d %0d", cal_w[0], cal_w[1], cal_w[2]));
    else     check(cal_w[0] == 0 && cal_w[1] == 0 && cal_w[2] == 0, "cal pulses while disabled");
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    int lin5[30], big[30], sig5[30], sig4[14], mcl_bad[14], s3[6];
    foreach (lin5[k]) lin5[k] = 1;
    foreach (SIG5[k]) sig5[k] = SIG5[k];
    foreach (SIG4[k]) sig4[k] = SIG4[k];
    foreach (big[k]) big[k] = (k == 0) ? 100 : 2;
    foreach (mcl_bad[k]) mcl_bad[k] = 3;
    s3 = '{3, 2, 1, 1, 2, 3};
    q_tab = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(MODE_PWM, 5, sig5, 1, 56 + 1);
    run(MODE_PWM, 5, lin5, 0, 30 + 1);
    run(MODE_PWM, 4, sig4, 1, 20 + 1);
    run(MODE_MCL, 4, sig4, 0, 14 + 1);
    run(MODE_MCL, 3, s3, 1, 6 + 1);
    run(MODE_PWM, 1, sig4, 0, 0 + 1);
    // long first entry stretches the MAC phase (initial ramp uses it)
    run(MODE_PWM, 5, big, 0, 100 + 29 * 2 + 1);
    // MCL table needing 42 cells > 30 rows must be flagged
    mode = MODE_MCL; res = 3'd4;
    foreach (mcl_bad[k]) q_tab[k] = QW'(mcl_bad[k]);
    #1 check(cfg_err, "MCL over-budget flag");
    foreach (sig4[k]) q_tab[k] = QW'(sig4[k]);
    #1 check(!cfg_err, "MCL in-budget flag");
    // with spare-cell calibration the MCL budget shrinks to 20 cells
    q_tab[0] = QW'(6);                         // sum 23
    cal_en = 1'b0;
    #1 check(!cfg_err, "MCL 23 cells without calibration");
    cal_en = 1'b1;
    #1 check(cfg_err, "MCL 23 cells with spare-cell calibration");
    res = 3'd5; foreach (sig5[k]) q_tab[k] = QW'(sig5[k]); mode = MODE_PWM;
    #1 check(!cfg_err && cal_rows, "5-bit calibration uses the calibration rows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
