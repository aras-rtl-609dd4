// pe_add_array: the ADD array of a PE, n accumulation modules (one per APU
// column).
//
// A layer whose kernels are taller than one crossbar is spread over several
// APU rows; the APUs of one column then hold different input slices of the
// same kernels. The add array sums, for the rows selected in row_mask, the
// partial sums of the same kernel. It produces one result word per call:
// word sel (0 .. N*NW/LANES-1) covers APU column sel / (NW/LANES) and kernels
// LANES*(sel mod (NW/LANES)) .. +LANES-1, lane k in bits [32k+31:32k].
// Combinational; the PE controller walks sel. Word order is this design's
// choice.
module pe_add_array
  import aras_pkg::*;
#(
  parameter int M  = 6,
  parameter int N  = 4,
  parameter int NW = 32
) (
  input  psum_t               psum [M][N][NW],
  input  logic [M-1:0]        row_mask,
  input  logic [$clog2(N*NW/SUMS_PER_FLIT)-1:0] sel,
  output logic [BUS_W-1:0]    sum_word
);
  localparam int GROUPS = NW / SUMS_PER_FLIT;
  int col, grp;
  psum_t acc;

  always_comb begin
    col = int'(sel) / GROUPS;
    grp = int'(sel) % GROUPS;
    sum_word = '0;
    for (int k = 0; k < SUMS_PER_FLIT; k++) begin
      acc = '0;
      for (int r = 0; r < M; r++)
        if (row_mask[r]) acc = acc + psum[r][col][grp*SUMS_PER_FLIT + k];
      sum_word[PSUM_W*k +: PSUM_W] = acc;
    end
  end
endmodule
