// tb_nlim_cim_macro: end-to-end check of the macro's MAC + nonlinear ADC.
//
// Random ternary weights and signed 5-bit inputs are applied, and each
// column's code is compared with a reference computed here from the
// weights and inputs only: the bitline discharges of the MAC (n_BWR units on
// rows 0..79), calibration (rows 157..159 with 4/2/1-cycle pulses at 5 bits,
// random-weight spare reference cells 20..29 at 4 bits), initial ramp and ramp
// steps are totalled per bitline and clipped at 190 units, and the code is
// the number of comparison points p = 0 .. 2^res-2 at which
// RBLL has discharged more than RBLR. Runs cover the 5-bit sigmoid table in
// PWM mode, the 4-bit table in MCL mode, a linear table, calibration on and
// off, n_BWR = 2 and 4, and a heavy input set that clips the bitlines. The
// operation latency (start to done) is checked against
// 3 + MAC phase (15) + ramp length.
module tb_nlim_cim_macro;
  import nlim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, cal_en = 1'b0, in_load = 1'b0, wr_en = 1'b0;
  adc_mode_e mode = MODE_PWM;
  logic [2:0] res = 3'd5, nbwr = 3'd2;
  logic [MAX_STEPS-1:0][QW-1:0] q_tab = '0;
  logic signed [MAC_ROWS-1:0][IN_BITS-1:0] in_vec = '0;
  logic [7:0] wr_row = '0;
  tern_w_t [COLS-1:0] wr_data = '0;
  logic busy, done, cfg_err;
  logic [COLS-1:0][MAX_RES-1:0] code;
  int checks = 0, failures = 0, clip_runs = 0;
  int w [TOTAL_ROWS][COLS];
  int x [MAC_ROWS];

  always #5 clk = ~clk;

  nlim_cim_macro dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int SIG5 [30] = '{6,4,3,2,2,2,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,2,2,2,3,4,6};
  localparam int SIG4 [14] = '{3,2,1,1,1,1,1,1,1,1,1,1,2,3};

  function automatic tern_w_t enc(int v);
    return (v > 0) ? '{ql: 1'b1, qr: 1'b0} : (v < 0) ? '{ql: 1'b0, qr: 1'b1} : '{ql: 1'b0, qr: 1'b0};
  endfunction

  task automatic write_row(int r);
    @(negedge clk);
    wr_en = 1'b1; wr_row = 8'(r);
    for (int c = 0; c < COLS; c++) wr_data[c] = enc(w[r][c]);
    @(negedge clk); wr_en = 1'b0;
  endtask

  task automatic program_array(int wdens);
    for (int r = 0; r < TOTAL_ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        if (r >= MAC_ROWS) w[r][c] = 1;                       // reference cells
        else if ($urandom_range(0, 99) < wdens) w[r][c] = ($urandom_range(0, 1) != 0) ? 1 : -1;
        else w[r][c] = 0;
      end
      write_row(r);
    end
  endtask

  task automatic run(adc_mode_e m, int r, int q[], bit cal, int bwr, int xmax, int xdens);
    int half, nst, sh, lat, exp_lat, ramp_len, mac_len;
    bit clipped;
    mode = m; res = 3'(r); cal_en = cal; nbwr = 3'(bwr);
    // spare-cell calibration: random per-column weights in reference rows 20..29
    for (int j = SPARE_CAL0; j < ADC_ROWS; j++) begin
      for (int c = 0; c < COLS; c++)
        w[MAC_ROWS + j][c] = (cal && r <= 4) ? int'($urandom_range(0, 2)) - 1 : 1;
      write_row(MAC_ROWS + j);
    end
    q_tab = '0;
    foreach (q[k]) q_tab[k] = QW'(q[k]);
    for (int i = 0; i < MAC_ROWS; i++) begin
      x[i] = ($urandom_range(0, 99) < xdens) ? int'($urandom_range(0, 2 * xmax)) - xmax : 0;
      in_vec[i] = IN_BITS'(x[i]);
    end
    @(negedge clk); in_load = 1'b1;
    @(negedge clk); in_load = 1'b0; start = 1'b1;
    @(negedge clk); start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    half = (1 << (r - 1)) - 1;
    nst  = (1 << r) - 2;
    sh = 0;
    for (int k = 0; k < half; k++) sh += q[k];
    ramp_len = 0;
    for (int k = 0; k < nst; k++) ramp_len += (m == MODE_MCL) ? 1 : ((q[k] == 0) ? 1 : q[k]);
    mac_len = 15;
    if (m == MODE_PWM) for (int k = 0; k < half; k++) if (q[k] > mac_len) mac_len = q[k];
    exp_lat = 3 + mac_len + ramp_len;
    checks++;
    if (lat != exp_lat) begin
      failures++;
      $display("FAIL latency %0d exp %0d", lat, exp_lat);
    end
    clipped = 0;
    for (int c = 0; c < COLS; c++) begin
      int dl, dr, cnt, pre;
      dl = 0; dr = 0;
      for (int i = 0; i < MAC_ROWS; i++) begin
        int prod, u, in_v;
        in_v = x[i];
        if (cal && r == 5 && i >= 157) in_v = (i == 157) ? 4 : (i == 158) ? 2 : 1;
        u = (i < 80) ? bwr : 1;
        prod = in_v * w[i][c] * u;
        if (prod > 0) dl += prod; else dr -= prod;
      end
      dr += sh;                      // initial ramp: -RWL on +1 reference cells
      if (cal && r <= 4)             // spare calibration cells, one +RWL cycle each
        for (int j = SPARE_CAL0; j < ADC_ROWS; j++) begin
          if (w[MAC_ROWS + j][c] > 0) dl++;
          if (w[MAC_ROWS + j][c] < 0) dr++;
        end
      cnt = 0; pre = 0;
      for (int p = 0; p <= nst; p++) begin
        int cl, cr;
        if (p > 0) pre += q[p-1];
        cl = (dl + pre > 190) ? 190 : dl + pre;
        cr = (dr > 190) ? 190 : dr;
        if (dl + pre > 190 || dr > 190) clipped = 1;
        if (cl > cr) cnt++;
      end
      checks++;
      if (int'(code[c]) != cnt) begin
        failures++;
        if (failures < 12) $display("FAIL mode %0d res %0d col %0d code %0d exp %0d", m, r, c, code[c], cnt);
      end
    end
    if (clipped) clip_runs++;
    // the inputs must spread the codes over several levels
    begin
      bit seen [32];
      int nd;
      nd = 0;
      for (int c = 0; c < COLS; c++) seen[code[c]] = 1;
      foreach (seen[v]) if (seen[v]) nd++;
      checks++;
      if (xmax < 15 && nd < 4) begin failures++; $display("FAIL only %0d distinct codes", nd); end
    end
  endtask

  initial begin
    int sig5[30], sig4[14], lin5[30];
    foreach (SIG5[k]) sig5[k] = SIG5[k];
    foreach (SIG4[k]) sig4[k] = SIG4[k];
    foreach (lin5[k]) lin5[k] = 1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    program_array(30);
    run(MODE_PWM, 5, sig5, 1, 2, 3, 20);
    run(MODE_PWM, 5, sig5, 0, 4, 2, 15);
    run(MODE_PWM, 5, lin5, 1, 2, 3, 20);
    run(MODE_MCL, 4, sig4, 0, 2, 3, 20);
    run(MODE_MCL, 4, sig4, 1, 4, 2, 15);
    run(MODE_PWM, 4, sig4, 1, 2, 4, 30);
    run(MODE_PWM, 5, sig5, 0, 4, 15, 100);    // heavy: bitlines clip
    checks++;
    if (clip_runs == 0) begin failures++; $display("FAIL: no run reached the clip"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
