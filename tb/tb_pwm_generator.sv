// tb_pwm_generator: checks the row PWM generator over every 5-bit input.
// For each input it loads the value, strobes start, and checks that exactly
// one of +RWL/-RWL is high for |x| consecutive cycles right after start
// (with -16 clipped to 15 cycles), and that the other line stays low.
module tb_pwm_generator;
  import nlim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, start = 1'b0;
  logic signed [IN_BITS-1:0] din = '0;
  rwl_t rwl;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pwm_generator dut (.clk(clk), .rst_n(rst_n), .load(load), .din(din), .start(start), .rwl(rwl));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int v = -16; v < 16; v++) begin
      int exp_w, p_cnt, n_cnt, first;
      bit neg;
      exp_w = (v < 0) ? ((v == -16) ? 15 : -v) : v;
      neg   = (v < 0);
      @(negedge clk); load = 1'b1; din = IN_BITS'(v);
      @(negedge clk); load = 1'b0; start = 1'b1;
      @(negedge clk); start = 1'b0;
      p_cnt = 0; n_cnt = 0; first = -1;
      for (int t = 0; t < 20; t++) begin
        if (rwl.p) p_cnt++;
        if (rwl.n) n_cnt++;
        if ((rwl.p || rwl.n) != (t < exp_w)) first = t;
        @(negedge clk);
      end
      checks++;
      if ((neg ? n_cnt : p_cnt) != exp_w || (neg ? p_cnt : n_cnt) != 0 || first != -1) begin
        failures++;
        $display("FAIL v=%0d p=%0d n=%0d bad_t=%0d", v, p_cnt, n_cnt, first);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
