// reram_crossbar: behavioural model of a 1T1R ReRAM crossbar array (analog part,
// not synthesizable logic in silicon; written here as plain RTL so that it
// simulates and lints).
//
// Each cell holds a CELL_BITS conductance level (0..3). In compute mode every
// wordline that is driven (wl[r] = 1, one activation bit) adds the conductance of
// its cells to the column current: col_sum[c] = sum_r wl[r] * G[r][c]. The model
// reports that current as an integer, available combinationally while read_en is
// high. In write mode one row is selected (wl one-hot) and every column that
// receives an SL pulse (sl_pulse[c] high for one clock) moves that cell one level
// up (bl_dec = 0, weight increase) or down (bl_dec = 1, weight decrease),
// saturating at the ends of the range. The pulse width itself is owned by the SL
// driver; the model applies the level change when the pulse strobe arrives.
// Cells reset to level 0. Interface: wl[ROWS], read_en, prog_en, bl_dec,
// sl_pulse[COLS] in; col_sum[COLS] out.
module reram_crossbar #(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int SUM_W     = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ROWS-1:0]      wl,
  input  logic                 read_en,
  input  logic                 prog_en,
  input  logic                 bl_dec,
  input  logic [COLS-1:0]      sl_pulse,
  output logic [SUM_W-1:0]     col_sum [COLS]
);
  localparam logic [CELL_BITS-1:0] GMAX = '1;

  logic [CELL_BITS-1:0] g [ROWS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) g[r][c] <= '0;
    end else if (prog_en && |sl_pulse) begin
      for (int r = 0; r < ROWS; r++) begin
        if (wl[r]) begin
          for (int c = 0; c < COLS; c++) begin
            if (sl_pulse[c]) begin
              if (!bl_dec && g[r][c] != GMAX)      g[r][c] <= g[r][c] + 1'b1;
              else if (bl_dec && g[r][c] != '0)   g[r][c] <= g[r][c] - 1'b1;
            end
          end
        end
      end
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic [SUM_W-1:0] acc;
      acc = '0;
      if (read_en)
        for (int r = 0; r < ROWS; r++)
          if (wl[r]) acc = acc + SUM_W'(g[r][c]);
      col_sum[c] = acc;
    end
  end
endmodule
