// tb_cim_array: checks the bitcell array model against the ternary product table.
//
// Random ternary weights are written to all 190 rows, then random word-line
// patterns are applied for several cycles after a precharge. The reference
// keeps its own copy of the weights and uses the bitcell truth table
// (input +1/-1 times weight +1/0/-1: +1 discharges RBLL, -1 discharges RBLR)
// with n_BWR units for rows 0..79 and one unit elsewhere, clipped at the
// 190-unit dynamic range. Both n_BWR = 2 and 4 are exercised, and a long
// all-on burst drives the bitlines into the clip.
module tb_cim_array;
  import nlim_pkg::*;

  logic clk = 1'b0, pch = 1'b0, wr_en = 1'b0;
  rwl_t [TOTAL_ROWS-1:0] rwl = '0;
  logic [2:0] nbwr = 3'd2;
  logic [7:0] wr_row = '0;
  tern_w_t [COLS-1:0] wr_data = '0;
  logic [COLS-1:0][BL_W-1:0] v_rbll, v_rblr;
  int checks = 0, failures = 0, clipped = 0;
  int w [TOTAL_ROWS][COLS];
  int dl [COLS], dr [COLS];

  always #5 clk = ~clk;

  cim_array dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tern_w_t enc(int v);
    return (v > 0) ? '{ql: 1'b1, qr: 1'b0} : (v < 0) ? '{ql: 1'b0, qr: 1'b1} : '{ql: 1'b0, qr: 1'b0};
  endfunction

  task automatic compare(string tag);
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (int'(v_rbll[c]) != 190 - dl[c] || int'(v_rblr[c]) != 190 - dr[c]) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d: L %0d/%0d R %0d/%0d", tag, c,
                                    v_rbll[c], 190 - dl[c], v_rblr[c], 190 - dr[c]);
      end
    end
  endtask

  task automatic apply(int density);
    rwl_t [TOTAL_ROWS-1:0] pat;
    for (int r = 0; r < TOTAL_ROWS; r++) begin
      int s;
      s = ($urandom_range(0, 99) < density) ? (($urandom_range(0, 1) != 0) ? 1 : -1) : 0;
      pat[r].p = (s > 0);
      pat[r].n = (s < 0);
    end
    @(negedge clk); rwl = pat;
    @(posedge clk);
    for (int c = 0; c < COLS; c++) begin
      for (int r = 0; r < TOTAL_ROWS; r++) begin
        int s, u, prod;
        s = pat[r].p ? 1 : pat[r].n ? -1 : 0;
        u = (r < 80) ? int'(nbwr) : 1;
        prod = s * w[r][c];
        if (prod > 0) dl[c] += u;
        if (prod < 0) dr[c] += u;
      end
      if (dl[c] > 190) begin dl[c] = 190; clipped++; end
      if (dr[c] > 190) begin dr[c] = 190; clipped++; end
    end
    @(negedge clk); rwl = '0;
    #1 compare("apply");
  endtask

  task automatic precharge();
    @(negedge clk); pch = 1'b1;
    @(negedge clk); pch = 1'b0;
    foreach (dl[c]) begin dl[c] = 0; dr[c] = 0; end
    #1 compare("pch");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    for (int r = 0; r < TOTAL_ROWS; r++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_row = 8'(r);
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = int'($urandom_range(0, 2)) - 1;
        wr_data[c] = enc(w[r][c]);
      end
    end
    @(negedge clk); wr_en = 1'b0;
    // data on the write bus without wr_en must not be written
    for (int c = 0; c < COLS; c++) wr_data[c] = enc(1);
    wr_row = 8'd5;
    for (int rep = 0; rep < 2; rep++) begin
      nbwr = rep ? 3'd4 : 3'd2;
      precharge();
      for (int n = 0; n < 6; n++) apply(5);
    end
    // saturate
    precharge();
    for (int n = 0; n < 8; n++) apply(100);
    checks++;
    if (clipped == 0) begin failures++; $display("FAIL: clip never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
