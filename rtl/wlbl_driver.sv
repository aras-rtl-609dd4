// wlbl_driver: WL/BL switch matrix of an APU.
//
// Compute mode (read_en): every wordline whose activation bit is 1 in the
// current bit-plane is driven with the read voltage, so wl = plane.
// Write mode (prog_en): only the addressed row is selected (row-by-row writing)
// and the bitline is set to the polarity of the current phase (bl_dec = 0 for
// the increase step, 1 for the decrease step). Otherwise all lines are idle.
// Purely combinational. Modes are exclusive; compute wins if both are asserted,
// which the APU controller never does.
module wlbl_driver #(
  parameter int ROWS = 128
) (
  input  logic [ROWS-1:0]         plane,
  input  logic                    read_en,
  input  logic                    prog_en,
  input  logic [$clog2(ROWS)-1:0] prog_row,
  input  logic                    phase_dec,
  output logic [ROWS-1:0]         wl,
  output logic                    bl_dec
);
  always_comb begin
    wl     = '0;
    bl_dec = 1'b0;
    if (read_en) begin
      wl = plane;
    end else if (prog_en) begin
      wl[prog_row] = 1'b1;
      bl_dec       = phase_dec;
    end
  end
endmodule
