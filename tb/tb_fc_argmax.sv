// tb_fc_argmax: random weights and hidden vectors; the class and its score
// must equal a reference matrix-vector product and argmax (lowest index on
// ties), and done must come 13 cycles after start.
module tb_fc_argmax;
  localparam int NIN = 38, NCLS = 12;
  logic clk = 1'b0, rst_n = 1'b0, w_we = 1'b0, start = 1'b0;
  logic [3:0] w_cls = '0;
  logic signed [NIN-1:0][7:0] w_data = '0;
  logic signed [NIN-1:0][4:0] h_vec = '0;
  logic busy, done;
  logic [3:0] result;
  logic signed [31:0] best_score;
  int checks = 0, failures = 0, ties = 0;
  int w [NCLS][NIN];

  always #5 clk = ~clk;

  fc_argmax dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      int best, bi, lat, h [NIN];
      for (int c = 0; c < NCLS; c++) begin
        @(negedge clk);
        w_we = 1'b1; w_cls = 4'(c);
        for (int k = 0; k < NIN; k++) begin
          w[c][k] = (t % 4 == 3) ? ((c == 2 || c == 7) ? 3 : 1) : int'($urandom_range(0, 255)) - 128;
          w_data[k] = 8'(w[c][k]);
        end
      end
      @(negedge clk); w_we = 1'b0;
      for (int k = 0; k < NIN; k++) begin
        h[k] = int'($urandom_range(0, 30)) - 15;
        if (t % 4 == 3) h[k] = 1;
        h_vec[k] = 5'(h[k]);
      end
      best = 0; bi = 0;
      for (int c = 0; c < NCLS; c++) begin
        int s;
        s = 0;
        for (int k = 0; k < NIN; k++) s += w[c][k] * h[k];
        if (c == 0 || s > best) begin best = s; bi = c; end
        else if (s == best) ties++;
      end
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != NCLS + 1) begin failures++; $display("FAIL latency %0d", lat); end
      checks++;
      if (int'(result) != bi || best_score != best) begin
        failures++; $display("FAIL t %0d class %0d/%0d score %0d/%0d", t, result, bi, best_score, best);
      end
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL: no tie exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
