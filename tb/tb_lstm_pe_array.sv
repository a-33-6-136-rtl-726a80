// tb_lstm_pe_array: 19 PEs x 2 units; checks h_t of all 38 units against a
// real-valued LSTM update over several time steps and that done (and the
// last results) arrive exactly 5 cycles after start.
module tb_lstm_pe_array;
  import nlim_pkg::*;

  localparam int HID = 38;
  logic clk = 1'b0, rst_n = 1'b0, clr_state = 1'b0, start = 1'b0;
  logic [2:0] res = 3'd5;
  logic [HID-1:0][4:0] code_f = '0, code_i = '0, code_a = '0, code_o = '0;
  logic busy, done;
  logic signed [HID-1:0][4:0] h_vec;
  int checks = 0, failures = 0;
  real c_ref [HID];

  always #5 clk = ~clk;

  lstm_pe_array dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sig(int c, int r);
    return real'(2 * c + 1) / real'(1 << (r + 1));
  endfunction

  initial begin
    foreach (c_ref[u]) c_ref[u] = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 12; t++) begin
      int r, m, lat;
      real hr [HID];
      r = (t < 8) ? 5 : 4;
      m = (1 << r) - 1;
      res = 3'(r);
      for (int u = 0; u < HID; u++) begin
        code_f[u] = 5'($urandom_range(0, m)); code_i[u] = 5'($urandom_range(0, m));
        code_a[u] = 5'($urandom_range(0, m)); code_o[u] = 5'($urandom_range(0, m));
        c_ref[u] = sig(code_f[u], r) * c_ref[u] + sig(code_i[u], r) * (2.0 * sig(code_a[u], r) - 1.0);
        hr[u] = sig(code_o[u], r) * $tanh(c_ref[u]);
      end
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      lat = 1;
      while (!done && lat < 50) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 5) begin failures++; $display("FAIL latency %0d", lat); end
      for (int u = 0; u < HID; u++) begin
        int eq;
        eq = (hr[u] >= 0) ? int'($floor(hr[u] * 15.0 + 0.5)) : -int'($floor(-hr[u] * 15.0 + 0.5));
        checks++;
        if (int'($signed(h_vec[u])) - eq > 1 || eq - int'($signed(h_vec[u])) > 1) begin
          failures++;
          $display("FAIL t %0d unit %0d h %0d exp %0d", t, u, h_vec[u], eq);
        end
      end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
