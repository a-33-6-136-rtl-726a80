// fc_argmax: fully connected output layer and argmax classifier.
//
// After the last time step, the 38-element hidden vector h_t is mapped to 12
// class scores by a 38 x 12 fully connected layer, and the class with the
// highest score is the keyword. This block holds the FC weights in a small
// register file (one class row of 38 signed WW-bit weights per write) and,
// on start, evaluates one class per cycle with NIN parallel multipliers and
// an adder tree, keeping a running maximum. result/done appear NCLS+1 cycles
// after start; ties go to the lower class index. The layer size and its
// place after the LSTM follow the described network; the weight width, the
// one-class-per-cycle schedule and the bias-free form are this design's own
// choices, since the FC hardware is only evaluated, not detailed.
module fc_argmax
  import nlim_pkg::*;
#(
  parameter int unsigned NIN  = 38,
  parameter int unsigned NCLS = 12,
  parameter int unsigned WW   = 8,
  parameter int unsigned HW   = IN_BITS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               w_we,
  input  logic [$clog2(NCLS)-1:0]            w_cls,
  input  logic signed [NIN-1:0][WW-1:0]      w_data,
  input  logic                               start,
  input  logic signed [NIN-1:0][HW-1:0]      h_vec,
  output logic                               busy,
  output logic                               done,
  output logic [$clog2(NCLS)-1:0]            result,
  output logic signed [31:0]                 best_score
);

  localparam int unsigned CW = $clog2(NCLS);

  logic signed [NIN-1:0][WW-1:0] wmem [NCLS];
  logic                          run_q;
  logic [CW-1:0]                 cls_q;
  logic signed [31:0]            score;

  always_comb begin
    score = '0;
    for (int k = 0; k < int'(NIN); k++)
      score += 32'($signed(wmem[cls_q][k])) * 32'($signed(h_vec[k]));
  end

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_cls] <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q      <= 1'b0;
      cls_q      <= '0;
      done       <= 1'b0;
      result     <= '0;
      best_score <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run_q) begin
        run_q <= 1'b1;
        cls_q <= '0;
      end else if (run_q) begin
        if ((cls_q == '0) || (score > best_score)) begin
          best_score <= score;
          result     <= cls_q;
        end
        if (int'(cls_q) == NCLS - 1) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end else begin
          cls_q <= cls_q + 1'b1;
        end
      end
    end
  end

  assign busy = run_q;

endmodule
