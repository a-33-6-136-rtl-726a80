// tb_ripple_counter: random increment/clear sequences against a reference count,
// including saturation at all-ones.
module tb_ripple_counter;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, inc = 1'b0;
  logic [4:0] q;
  int ref_q = 0, checks = 0, failures = 0, sat_seen = 0;

  always #5 clk = ~clk;

  ripple_counter #(.W(5)) dut (.clk(clk), .rst_n(rst_n), .clr(clr), .inc(inc), .q(q));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      clr = ($urandom_range(0, 99) == 0);
      inc = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (clr) ref_q = 0;
      else if (inc && ref_q < 31) ref_q++;
      if (ref_q == 31) sat_seen++;
      @(negedge clk);
      checks++;
      if (q != 5'(ref_q)) begin
        failures++;
        $display("FAIL n=%0d q=%0d ref=%0d", n, q, ref_q);
      end
    end
    if (sat_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
