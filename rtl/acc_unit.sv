// acc_unit: chip-level accumulation unit (ACC).
//
// Adds the partial results of one layer that arrive from several PEs (a layer
// larger than one PE). Each incoming result flit carries a slot number and
// LANES signed partial sums; they are added lane-wise into the slot. The
// controller later reads slots out for the SFU; a read returns the slot
// (rd_data valid the next cycle) and clears it for the next use. Incoming
// flits are always accepted (in_ready = 1), one per cycle; rx pulses for each.
// The slot organisation is this design's choice.
module acc_unit
  import aras_pkg::res_flit_t;
#(
  parameter int SLOTS = 256,
  parameter int LANES = 4,
  parameter int IN_W  = 32,
  parameter int ACC_W = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  res_flit_t  in_flit,
  output logic       rx,
  input  logic       rd_en,
  input  logic [$clog2(SLOTS)-1:0] rd_slot,
  output logic [LANES*ACC_W-1:0]   rd_data
);
  logic signed [ACC_W-1:0] acc [SLOTS][LANES];
  assign in_ready = 1'b1;
  assign rx = in_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SLOTS; s++) for (int l = 0; l < LANES; l++) acc[s][l] <= '0;
      rd_data <= '0;
    end else begin
      if (in_valid)
        for (int l = 0; l < LANES; l++)
          acc[$clog2(SLOTS)'(in_flit.slot)][l] <= acc[$clog2(SLOTS)'(in_flit.slot)][l]
              + ACC_W'(signed'(in_flit.data[IN_W*l +: IN_W]));
      if (rd_en) begin
        for (int l = 0; l < LANES; l++) begin
          rd_data[ACC_W*l +: ACC_W] <= acc[rd_slot][l];
          acc[rd_slot][l] <= '0;
        end
      end
    end
  end
endmodule
