// tb_lstm_pe: checks one PE against a real-valued LSTM cell update.
//
// Random gate codes (5-bit and 4-bit ADC) are fed for two hidden units over
// many time steps. The reference decodes each code to the centre of its bin,
// computes c_t = f*c_{t-1} + i*a and h_t = o*tanh(c_t) in real arithmetic
// with $tanh, and rounds h_t*15. The PE's c_t must match within 1/32 and its
// h_q within one step (the LUT's resolution); every result must appear
// exactly 4 cycles after its input. clr_state must zero the states.
module tb_lstm_pe;
  import nlim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clr_state = 1'b0, in_valid = 1'b0;
  logic [2:0] res = 3'd5;
  logic [0:0] in_dim = '0, out_dim;
  logic [4:0] code_f = '0, code_i = '0, code_a = '0, code_o = '0;
  logic out_valid;
  logic signed [4:0] h_q;
  logic signed [15:0] c_out;
  int checks = 0, failures = 0, cyc = 0, big_c = 0;
  real c_ref [2];
  real exp_c [$], exp_h [$];
  int  exp_t [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  lstm_pe dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sig(int c, int r);
    return real'(2 * c + 1) / real'(1 << (r + 1));
  endfunction

  // scoreboard
  always @(negedge clk) begin
    if (out_valid) begin
      real ec, eh, gc;
      int et, eq;
      ec = exp_c.pop_front(); eh = exp_h.pop_front(); et = exp_t.pop_front();
      gc = real'(c_out) / 1024.0;
      eq = (eh >= 0) ? int'($floor(eh * 15.0 + 0.5)) : -int'($floor(-eh * 15.0 + 0.5));
      checks++;
      if (cyc - et != 4) begin failures++; $display("FAIL latency %0d", cyc - et); end
      checks++;
      if (gc - ec > 0.03125 || ec - gc > 0.03125) begin
        failures++; $display("FAIL c %f exp %f", gc, ec);
      end
      checks++;
      if (int'(h_q) - eq > 1 || eq - int'(h_q) > 1) begin
        failures++; $display("FAIL h %0d exp %0d (%f)", h_q, eq, eh);
      end
      if (ec > 2.0 || ec < -2.0) big_c++;
    end
  end

  task automatic feed(int d, int r);
    int f, i, a, o, m;
    real cn;
    m = (1 << r) - 1;
    f = $urandom_range(0, m); i = $urandom_range(0, m);
    a = $urandom_range(0, m); o = $urandom_range(0, m);
    if (d == 0) f = m;          // keep unit 0 integrating so |c| grows
    @(negedge clk);
    in_valid = 1'b1; in_dim = 1'(d); res = 3'(r);
    code_f = 5'(f); code_i = 5'(i); code_a = 5'(a); code_o = 5'(o);
    cn = sig(f, r) * c_ref[d] + sig(i, r) * (2.0 * sig(a, r) - 1.0);
    c_ref[d] = cn;
    exp_c.push_back(cn);
    exp_h.push_back(sig(o, r) * $tanh(cn));
    exp_t.push_back(cyc);
    @(negedge clk); in_valid = 1'b0;
  endtask

  initial begin
    c_ref[0] = 0.0; c_ref[1] = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      int r;
      r = (t < 40) ? 5 : 4;
      feed(0, r);
      feed(1, r);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (8) @(negedge clk);
    // clear and check both states are zero through the datapath
    clr_state = 1'b1; @(negedge clk); clr_state = 1'b0;
    c_ref[0] = 0.0; c_ref[1] = 0.0;
    feed(0, 5); feed(1, 5);
    repeat (8) @(negedge clk);
    checks++;
    if (big_c == 0) begin failures++; $display("FAIL: |c| never exceeded 2"); end
    checks++;
    if (exp_c.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_c.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
