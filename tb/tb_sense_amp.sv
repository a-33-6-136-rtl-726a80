// tb_sense_amp: random bitline voltages; output must be high exactly when
// strobed and V_RBLR > V_RBLL.
module tb_sense_amp;
  import nlim_pkg::*;
  logic en;
  logic [BL_W-1:0] l, r;
  logic von;
  int checks = 0, failures = 0;

  sense_amp dut (.en(en), .v_rbll(l), .v_rblr(r), .von(von));

  initial begin
    for (int n = 0; n < 2000; n++) begin
      bit exp_v;
      en = ($urandom_range(0, 3) != 0);
      l  = BL_W'($urandom_range(0, 190));
      r  = (n % 5 == 0) ? l : BL_W'($urandom_range(0, 190));
      #1;
      exp_v = en && (int'(r) > int'(l));
      checks++;
      if (von !== exp_v) begin
        failures++;
        $display("FAIL en=%0d l=%0d r=%0d von=%0d", en, l, r, von);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
