// shift_add: the APU's ADD/Sub units.
//
// Builds per-kernel dot products from ADC codes. Column c of the crossbar holds
// cell j = c mod CELLS of weight w = c / CELLS, cell j carrying weight bits
// [2j+1:2j] (the 4th cell holds the two most significant bits). A conversion
// step s delivers the codes of columns s*N_ADC .. s*N_ADC+N_ADC-1, i.e. of
// N_ADC/CELLS whole weights. For activation bit b each code is shifted left by
// CELL_BITS*j + b and added to the weight's accumulator, so after all bits
// psum[w] = sum_r act[r] * W[r][w] (exact while no ADC saturates). When `sub`
// is set for an iteration (the sign bit of two's-complement activations) the
// term is subtracted instead. `clear` zeroes all accumulators; `valid` marks a
// step whose codes are on code[]. One step is absorbed per cycle.
module shift_add #(
  parameter int N_ADC     = 16,
  parameter int ADC_BITS  = 6,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int CELLS     = 4,
  parameter int A_BITS    = 8,
  parameter int PSUM_W    = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        valid,
  input  logic [$clog2(COLS/N_ADC)-1:0] step,
  input  logic [$clog2(A_BITS)-1:0]   bit_idx,
  input  logic                        sub,
  input  logic [ADC_BITS-1:0]         code [N_ADC],
  output logic signed [PSUM_W-1:0]    psum [COLS/CELLS]
);
  localparam int NW      = COLS / CELLS;
  localparam int W_STEP  = N_ADC / CELLS;   // weights completed per step

  logic signed [PSUM_W-1:0] term [W_STEP];

  always_comb begin
    for (int k = 0; k < W_STEP; k++) begin
      term[k] = '0;
      for (int j = 0; j < CELLS; j++)
        term[k] = term[k] + (PSUM_W'(code[k*CELLS + j]) <<< (CELL_BITS*j + int'(bit_idx)));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < NW; w++) psum[w] <= '0;
    end else if (clear) begin
      for (int w = 0; w < NW; w++) psum[w] <= '0;
    end else if (valid) begin
      for (int k = 0; k < W_STEP; k++) begin
        if (sub) psum[int'(step)*W_STEP + k] <= psum[int'(step)*W_STEP + k] - term[k];
        else     psum[int'(step)*W_STEP + k] <= psum[int'(step)*W_STEP + k] + term[k];
      end
    end
  end
endmodule
