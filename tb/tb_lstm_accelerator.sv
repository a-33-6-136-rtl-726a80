// tb_lstm_accelerator: runs LSTM time steps of the 40-input / 38-unit layer
// through the whole accelerator at its default size.
//
// A random network (ternary weights, or 3-bit sign-magnitude weights split
// into an MSB row and an LSB row) is mapped as two macro passes per time
// step: pass A computes the f and a gate columns (76 columns), pass B the i
// and o gate columns; after each pass the codes are copied to the gate
// buffer. The PE array then produces h_t, which is fed back as row inputs
// (with its LSB copies for 3-bit weights) in the next step.
// Every macro code is checked against a reference computed here from the
// weights and row inputs (discharge totals, clip at 190 units, one count
// per comparison point at which RBLL is lower), every h_t against a real-
// valued LSTM update of the reference codes (within one step), and the
// latencies of macro operation and PE array (5 cycles).
// The mechanisms are counted and each must occur: PWM and MCL ramp modes,
// 5-bit and 4-bit resolution, calibration rows active (5 bits) and spare
// reference cells used for calibration (4 bits, with 3-bit weights), 3-bit weights with
// n_BWR = 2, h feedback, bitline clipping, gate-buffer passes, PE runs and
// the MCL row-budget flag; finally the FC layer and argmax classify h_t.
module tb_lstm_accelerator;
  import nlim_pkg::*;

  localparam int HID = 38, NX = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  adc_mode_e mode = MODE_PWM;
  logic [2:0] res = 3'd5, nbwr = 3'd1;
  logic cal_en = 1'b0, in_load = 1'b0, h_fb = 1'b0, h_dup = 1'b0;
  logic [MAX_STEPS-1:0][QW-1:0] q_tab = '0;
  logic signed [MAC_ROWS-1:0][IN_BITS-1:0] x_rows = '0;
  logic wr_en = 1'b0;
  logic [7:0] wr_row = '0;
  tern_w_t [COLS-1:0] wr_data = '0;
  logic start = 1'b0, busy, done, cfg_err;
  logic [COLS-1:0][MAX_RES-1:0] code;
  logic gb_we = 1'b0;
  logic [7:0] gb_base = '0, gb_ncol = '0;
  logic pe_clr = 1'b0, pe_start = 1'b0, pe_done;
  logic signed [HID-1:0][IN_BITS-1:0] h_vec;
  logic fcw_we = 1'b0, fc_start = 1'b0, fc_done;
  logic [3:0] fcw_cls = '0, fc_class;
  logic signed [HID-1:0][7:0] fcw_data = '0;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_pwm = 0, n_mcl = 0, n_res5 = 0, n_res4 = 0, n_cal = 0, n_mbit = 0, n_fb = 0;
  int n_clip = 0, n_gb = 0, n_pe = 0, n_cfgerr = 0, n_hnz = 0, n_fc = 0, n_spare = 0;

  int wnet [NX+HID][4*HID];     // network weights, gate order f a i o
  int arr  [MAC_ROWS][COLS];    // MAC-row contents of the current pass
  int rin  [MAC_ROWS];          // row inputs of the current pass
  int gcode [4*HID];            // reference gate codes
  real c_ref [HID];
  int q [MAX_STEPS];
  int nst_cur;

  always #5 clk = ~clk;

  lstm_accelerator dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int SIG5 [30] = '{6,4,3,2,2,2,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,2,2,2,3,4,6};
  localparam int SIG4 [14] = '{3,2,1,1,1,1,1,1,1,1,1,1,2,3};

  function automatic tern_w_t enc(int v);
    return (v > 0) ? '{ql: 1'b1, qr: 1'b0} : (v < 0) ? '{ql: 1'b0, qr: 1'b1} : '{ql: 1'b0, qr: 1'b0};
  endfunction

  function automatic real sig(int c, int r);
    return real'(2 * c + 1) / real'(1 << (r + 1));
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  task automatic write_row(int r, tern_w_t [COLS-1:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_row = 8'(r); wr_data = d;
    @(negedge clk); wr_en = 1'b0;
  endtask

  task automatic set_table(int r, bit use4);
    q = '{default: 0};
    q_tab = '0;
    nst_cur = (1 << r) - 2;
    for (int k = 0; k < nst_cur; k++) begin
      q[k] = use4 ? SIG4[k] : SIG5[k];
      q_tab[k] = QW'(q[k]);
    end
  endtask

  // map gate columns [col0 .. col0+75] of the network onto the array
  task automatic map_pass(int col0, bit mbit);
    for (int r = 0; r < MAC_ROWS; r++) begin
      tern_w_t [COLS-1:0] d;
      for (int c = 0; c < COLS; c++) begin
        int wv, v;
        wv = (c < 2 * HID && r < NX + HID) ? wnet[r][col0 + c] : 0;
        v = 0;
        if (r < NX + HID) begin
          if (!mbit) v = wv;
          else v = (wv > 0 ? 1 : wv < 0 ? -1 : 0) * (((wv < 0 ? -wv : wv) >> 1) & 1);
        end else if (mbit && r >= 80 && r < 80 + NX + HID) begin
          int w2;
          w2 = (c < 2 * HID) ? wnet[r - 80][col0 + c] : 0;
          v = (w2 > 0 ? 1 : w2 < 0 ? -1 : 0) * ((w2 < 0 ? -w2 : w2) & 1);
        end else if (r >= CAL_ROW0) begin
          // calibration rows: per-column weights (0,-1,-1) etc.
          v = ((c + r) % 3) - 1;
        end
        arr[r][c] = v;
        d[c] = enc(v);
      end
      write_row(r, d);
    end
  endtask

  // one macro operation and its check
  task automatic macro_op(int r, bit cal, int bwr);
    int lat, mac_len, ramp_len, half, sh;
    int spw [ADC_ROWS];
    bit any_clip;
    // at 4 bits calibration uses the spare reference cells 20..29: give them
    // per-column weights for this operation (restored to +1 afterwards)
    if (cal && r <= 4) begin
      for (int j = SPARE_CAL0; j < ADC_ROWS; j++) begin
        tern_w_t [COLS-1:0] d;
        for (int c = 0; c < COLS; c++) d[c] = enc(((c + 2 * j) % 3) - 1);
        write_row(MAC_ROWS + j, d);
      end
      n_spare++;
    end
    // row inputs as the DUT will see them
    for (int i = 0; i < MAC_ROWS; i++) begin
      rin[i] = $signed(x_rows[i]);
      if (h_fb) begin
        if (i >= NX && i < NX + HID) rin[i] = $signed(h_vec[i - NX]);
        if (h_dup && i >= NX + 80 && i < NX + 80 + HID) rin[i] = $signed(h_vec[i - NX - 80]);
      end
      if (rin[i] == -16) rin[i] = -15;
    end
    cal_en = cal; nbwr = 3'(bwr);
    @(negedge clk); in_load = 1'b1;
    @(negedge clk); in_load = 1'b0; start = 1'b1;
    @(negedge clk); start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    half = (1 << (r - 1)) - 1;
    sh = 0;
    for (int k = 0; k < half; k++) sh += q[k];
    mac_len = 15;
    ramp_len = 0;
    for (int k = 0; k < nst_cur; k++) ramp_len += (mode == MODE_MCL) ? 1 : q[k];
    check(lat == 3 + mac_len + ramp_len, $sformatf("macro latency %0d exp %0d", lat, 3 + mac_len + ramp_len));
    any_clip = 0;
    for (int c = 0; c < COLS; c++) begin
      int dl, dr, cnt, pre;
      dl = 0; dr = sh;
      for (int i = 0; i < MAC_ROWS; i++) begin
        int xin, prod;
        xin = (cal && r == 5 && i >= CAL_ROW0) ? ((i == CAL_ROW0) ? 4 : (i == CAL_ROW0 + 1) ? 2 : 1) : rin[i];
        prod = xin * arr[i][c] * ((i < 80) ? bwr : 1);
        if (prod > 0) dl += prod; else dr -= prod;
      end
      if (cal && r <= 4)
        for (int j = SPARE_CAL0; j < ADC_ROWS; j++) begin
          spw[j] = ((c + 2 * j) % 3) - 1;
          if (spw[j] > 0) dl++;
          if (spw[j] < 0) dr++;
        end
      cnt = 0; pre = 0;
      for (int p = 0; p <= nst_cur; p++) begin
        if (p > 0) pre += q[p-1];
        if (dl + pre > 190 || dr > 190) any_clip = 1;
        if (((dl + pre > 190) ? 190 : dl + pre) > ((dr > 190) ? 190 : dr)) cnt++;
      end
      check(int'(code[c]) == cnt, $sformatf("col %0d code %0d exp %0d", c, code[c], cnt));
      if (c < 2 * HID) gcode[c] = cnt;
    end
    if (any_clip) n_clip++;
    if (mode == MODE_PWM) n_pwm++; else n_mcl++;
    if (r == 5) n_res5++;
    if (r == 4) n_res4++;
    if (cal) n_cal++;
    if (bwr == 2) n_mbit++;
    if (h_fb) n_fb++;
    if (cal && r <= 4) begin
      tern_w_t [COLS-1:0] d;
      for (int c = 0; c < COLS; c++) d[c] = enc(1);
      for (int j = SPARE_CAL0; j < ADC_ROWS; j++) write_row(MAC_ROWS + j, d);
    end
  endtask

  task automatic gate_copy(int base);
    @(negedge clk); gb_we = 1'b1; gb_base = 8'(base); gb_ncol = 8'(2 * HID);
    @(negedge clk); gb_we = 1'b0;
    n_gb++;
  endtask

  // one LSTM time step
  task automatic lstm_step(int r, bit use4, adc_mode_e m, bit mbit, bit cal, bit fb);
    int ref_codes [4*HID];
    int lat;
    mode = m; res = 3'(r);
    set_table(r, use4);
    for (int i = 0; i < MAC_ROWS; i++) x_rows[i] = '0;
    for (int i = 0; i < NX; i++) begin
      int v;
      v = ($urandom_range(0, 1) != 0) ? int'($urandom_range(0, 6)) - 3 : 0;
      x_rows[i] = IN_BITS'(v);
      if (mbit) x_rows[i + 80] = IN_BITS'(v);
    end
    h_fb = fb; h_dup = mbit;
    // pass A: f and a
    map_pass(0, mbit);
    macro_op(r, cal, mbit ? 2 : 1);
    for (int c = 0; c < 2 * HID; c++) ref_codes[c] = gcode[c];
    gate_copy(0);
    // pass B: i and o
    map_pass(2 * HID, mbit);
    macro_op(r, cal, mbit ? 2 : 1);
    for (int c = 0; c < 2 * HID; c++) ref_codes[2 * HID + c] = gcode[c];
    gate_copy(2 * HID);
    // PE array
    @(negedge clk); pe_start = 1'b1;
    @(negedge clk); pe_start = 1'b0;
    lat = 1;
    while (!pe_done && lat < 50) begin @(negedge clk); lat++; end
    check(lat == 5, $sformatf("PE latency %0d", lat));
    n_pe++;
    for (int u = 0; u < HID; u++) begin
      real f, a, ig, o, hr;
      int eq;
      f  = sig(ref_codes[u], r);
      a  = 2.0 * sig(ref_codes[HID + u], r) - 1.0;
      ig = sig(ref_codes[2 * HID + u], r);
      o  = sig(ref_codes[3 * HID + u], r);
      c_ref[u] = f * c_ref[u] + ig * a;
      hr = o * $tanh(c_ref[u]);
      eq = (hr >= 0) ? int'($floor(hr * 15.0 + 0.5)) : -int'($floor(-hr * 15.0 + 0.5));
      if (h_vec[u] != '0) n_hnz++;
      check(($signed(h_vec[u]) - eq <= 1) && (eq - $signed(h_vec[u]) <= 1),
            $sformatf("unit %0d h %0d exp %0d", u, $signed(h_vec[u]), eq));
    end
    @(negedge clk);
  endtask

  initial begin
    foreach (c_ref[u]) c_ref[u] = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // reference cells of the ADC: all +1
    begin
      tern_w_t [COLS-1:0] d;
      for (int c = 0; c < COLS; c++) d[c] = enc(1);
      for (int j = 0; j < ADC_ROWS; j++) write_row(MAC_ROWS + j, d);
    end
    // ternary network
    for (int r = 0; r < NX + HID; r++)
      for (int c = 0; c < 4 * HID; c++)
        wnet[r][c] = ($urandom_range(0, 99) < 30) ? (($urandom_range(0, 1) != 0) ? 1 : -1) : 0;
    @(negedge clk); pe_clr = 1'b1; @(negedge clk); pe_clr = 1'b0;
    lstm_step(5, 0, MODE_PWM, 0, 1, 0);
    lstm_step(5, 0, MODE_PWM, 0, 1, 1);
    lstm_step(4, 1, MODE_MCL, 0, 0, 1);
    // 3-bit network (sign + 2 magnitude bits), n_BWR = 2
    for (int r = 0; r < NX + HID; r++)
      for (int c = 0; c < 4 * HID; c++)
        wnet[r][c] = ($urandom_range(0, 99) < 25) ? int'($urandom_range(0, 6)) - 3 : 0;
    lstm_step(4, 1, MODE_MCL, 1, 1, 1);       // calibration on the spare reference cells
    lstm_step(5, 0, MODE_PWM, 1, 0, 1);
    // classify the final hidden state
    begin
      int fw [12][HID];
      int best, bi, lat;
      for (int c = 0; c < 12; c++) begin
        @(negedge clk); fcw_we = 1'b1; fcw_cls = 4'(c);
        for (int k = 0; k < HID; k++) begin
          fw[c][k] = int'($urandom_range(0, 255)) - 128;
          fcw_data[k] = 8'(fw[c][k]);
        end
      end
      @(negedge clk); fcw_we = 1'b0;
      best = 0; bi = 0;
      for (int c = 0; c < 12; c++) begin
        int sc;
        sc = 0;
        for (int k = 0; k < HID; k++) sc += fw[c][k] * $signed(h_vec[k]);
        if (c == 0 || sc > best) begin best = sc; bi = c; end
      end
      @(negedge clk); fc_start = 1'b1;
      @(negedge clk); fc_start = 1'b0;
      lat = 1;
      while (!fc_done && lat < 100) begin @(negedge clk); lat++; end
      check(lat == 13, $sformatf("FC latency %0d", lat));
      check(int'(fc_class) == bi, $sformatf("class %0d exp %0d", fc_class, bi));
      n_fc++;
    end
    // heavy inputs: all rows at +15 on a dense pass drive the bitlines into the clip
    begin
      mode = MODE_PWM; res = 3'd5; set_table(5, 0);
      h_fb = 1'b0; h_dup = 1'b0;
      for (int r = 0; r < NX + HID; r++)
        for (int c = 0; c < 4 * HID; c++) wnet[r][c] = 1;
      map_pass(0, 0);
      for (int i = 0; i < MAC_ROWS; i++) x_rows[i] = IN_BITS'(15);
      macro_op(5, 0, 1);
    end
    // MCL table exceeding the 30 reference rows is flagged
    mode = MODE_MCL; res = 3'd5; set_table(5, 0);
    #1 if (cfg_err) n_cfgerr++;
    check(n_pwm > 0, "PWM mode never ran");
    check(n_mcl > 0, "MCL mode never ran");
    check(n_res5 > 0 && n_res4 > 0, "resolution switch never happened");
    check(n_cal > 0, "calibration rows never active");
    check(n_spare > 0, "spare-cell calibration never active");
    check(n_mbit > 0, "3-bit weights never used");
    check(n_fb > 0, "h feedback never used");
    check(n_clip > 0, "bitline clip never reached");
    check(n_gb > 0, "gate buffer never written");
    check(n_pe > 0, "PE array never ran");
    check(n_cfgerr > 0, "MCL budget flag never raised");
    check(n_hnz > 20, "hidden state stayed at zero");
    check(n_fc > 0, "classifier never ran");
    $display("mechanisms: pwm=%0d mcl=%0d res5=%0d res4=%0d cal=%0d mbit=%0d fb=%0d clip=%0d gb=%0d pe=%0d cfgerr=%0d hnz=%0d fc=%0d spare=%0d",
             n_pwm, n_mcl, n_res5, n_res4, n_cal, n_mbit, n_fb, n_clip, n_gb, n_pe, n_cfgerr, n_hnz, n_fc, n_spare);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
