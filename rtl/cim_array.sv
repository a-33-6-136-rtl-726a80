// cim_array: behavioural model of the dual 9T SRAM computing array (analog part).
//
// Models the 190 x 100 array of dual 9T bitcells: rows 0..159 hold ternary MAC
// weights (the last three, 157..159, serve as calibration rows) and rows
// 160..189 are the in-memory ADC reference cells. Each cell stores a ternary
// weight in two 6T halves (Q_L, Q_R). A row is driven by a +RWL / -RWL pair
// carrying the sign of its input. A cell whose input-times-weight product is
// +1 discharges RBLL by one unit per clock cycle, a product of -1 discharges
// RBLR, and a zero product (zero weight or no pulse) leaves both bitlines
// alone, so that V_RBLR - V_RBLL accumulates sum(In_i * W_i) in units of
// I_u*T/C_BL. Rows 0..79 sit on the higher V_MSB supply and discharge n_BWR
// units per cycle (n_BWR = 2 for 3-bit, 4 for 5-bit weights); rows 80..189
// sit on V_LSB and discharge one unit. Precharge (PCH) returns both bitlines
// to the top of the range. A bitline cannot discharge below the usable
// dynamic range (700 mV = 190 units), which the model enforces by clipping.
//
// The model is cycle based: word lines are sampled at each rising clock
// edge, and the bitline outputs hold the state after that edge. The optional
// per-column offset (OFFSET_MAX > 0) stands for the ramp offset that mismatch
// produces on silicon and that the calibration rows cancel; it is applied at
// precharge. The write port (one row of 100 ternary weights per cycle) is this
// design's own choice; the memory write path is not described in detail.
//
// Ports: pch, rwl[row] {p,n}, nbwr (MSB/LSB current ratio set by the
// supplies), write port, and per column v_rbll / v_rblr (units above the
// bottom of the swing).
module cim_array
  import nlim_pkg::*;
#(
  parameter int unsigned ROWS        = TOTAL_ROWS,
  parameter int unsigned NCOL        = COLS,
  parameter int unsigned NMSB        = MSB_ROWS,
  parameter int unsigned DR          = DR_UNITS,
  parameter int unsigned OFFSET_MAX  = 0,
  parameter int unsigned OFFSET_SEED = 1
) (
  input  logic                     clk,
  input  logic                     pch,
  input  rwl_t    [ROWS-1:0]       rwl,
  input  logic    [2:0]            nbwr,
  input  logic                     wr_en,
  input  logic    [7:0]            wr_row,
  input  tern_w_t [NCOL-1:0]       wr_data,
  output logic    [NCOL-1:0][BL_W-1:0] v_rbll,
  output logic    [NCOL-1:0][BL_W-1:0] v_rblr
);

  tern_w_t mem [ROWS][NCOL];
  int unsigned dis_l [NCOL];
  int unsigned dis_r [NCOL];
  int signed   offs  [NCOL];

  initial begin
    int unsigned seed;
    seed = OFFSET_SEED;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NCOL; c++) mem[r][c] = W_ZERO;
    for (int c = 0; c < NCOL; c++) begin
      dis_l[c] = 0;
      dis_r[c] = 0;
      if (OFFSET_MAX > 0) begin
        seed = seed * 32'd1103515245 + 32'd12345;
        offs[c] = int'((seed >> 16) % (2 * OFFSET_MAX + 1)) - int'(OFFSET_MAX);
      end else begin
        offs[c] = 0;
      end
    end
  end

  always @(posedge clk) begin
    if (wr_en && (int'(wr_row) < int'(ROWS))) begin
      for (int c = 0; c < NCOL; c++) mem[wr_row][c] <= wr_data[c];
    end
  end

  always @(posedge clk) begin
    for (int c = 0; c < NCOL; c++) begin
      if (pch) begin
        dis_l[c] <= (offs[c] > 0) ? offs[c] : 0;
        dis_r[c] <= (offs[c] < 0) ? -offs[c] : 0;
      end else begin
        int unsigned add_l, add_r, u;
        int signed   prod;
        add_l = 0;
        add_r = 0;
        for (int r = 0; r < ROWS; r++) begin
          if (rwl[r].p || rwl[r].n) begin
            prod = tern_value(mem[r][c]) * (rwl[r].p ? 1 : -1);
            u    = (r < NMSB) ? int'(nbwr) : 1;
            if (prod > 0) add_l += u;
            if (prod < 0) add_r += u;
          end
        end
        dis_l[c] <= (dis_l[c] + add_l > DR) ? DR : dis_l[c] + add_l;
        dis_r[c] <= (dis_r[c] + add_r > DR) ? DR : dis_r[c] + add_r;
      end
    end
  end

  always_comb begin
    for (int c = 0; c < NCOL; c++) begin
      v_rbll[c] = BL_W'(DR - dis_l[c]);
      v_rblr[c] = BL_W'(DR - dis_r[c]);
    end
  end

endmodule
