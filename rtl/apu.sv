// apu: Analog Processing Unit, the compute engine of a PE.
//
// Holds one 128x128 ReRAM crossbar (32 8-bit weights per row, four 2-bit cells
// per weight) with its peripherals: input registers (the A_BITS bit-planes of
// the 128 activations of one window), writing registers (the deltas of one
// crossbar row), WL/BL and SL drivers, sample-and-hold, analog mux, a pool of
// 16 ADCs, shift-and-add units and the controller.
//
// Loading: with ld_act, bus is bit-plane ld_idx of the activations (bit r =
// activation of crossbar row r). With ld_delta, bus is delta beat ld_idx: cells
// 32*ld_idx .. 32*ld_idx+31, cell i in bits [4i+3:4i] as {dec, mag[2:0]}.
// Parameters T_PULSE and T_COMP are the pulse period and crossbar compute
// latency. start_compute runs one window (done after T_COMP + 2 cycles, psum valid
// from then until the next compute); start_write programs crossbar row wr_row
// with the loaded deltas ((max_inc + max_dec) * T_PULSE cycles). Loads and
// commands are accepted only while not busy, except that activation loads are
// also allowed while writing (the input registers are not used by a write).
// The register organisation and load protocol are this design's choice.
module apu
  import aras_pkg::*;
#(
  parameter int ROWS         = 128,
  parameter int COLS         = 128,
  parameter int T_PULSE      = aras_pkg::PULSE_CYCLES,
  parameter int T_COMP       = aras_pkg::COMP_LAT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BUS_W-1:0]  bus,
  input  logic              ld_act,
  input  logic              ld_delta,
  input  logic [2:0]        ld_idx,
  input  logic              start_compute,
  input  logic              act_signed,
  input  logic              start_write,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  output logic              busy,
  output logic              writing,
  output logic              done,
  output psum_t             psum [COLS/CELLS_PER_W],
  output logic [31:0]       pulse_count
);
  localparam int SUM_W = $clog2(ROWS * MAX_PULSES + 1);
  localparam int CELLS_PER_BEAT = BUS_W / DELTA_W;    // 32
  localparam int BEATS = COLS / CELLS_PER_BEAT;

  // ---------- input registers and writing registers ----------
  logic [ROWS-1:0] in_reg [A_BITS];
  logic [3:0]      wr_reg [COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < A_BITS; b++) in_reg[b] <= '0;
      for (int c = 0; c < COLS; c++) wr_reg[c] <= '0;
    end else begin
      if (ld_act && (!busy || writing))
        in_reg[ld_idx] <= bus[ROWS-1:0];
      if (ld_delta && !busy && int'(ld_idx) < BEATS)
        for (int i = 0; i < CELLS_PER_BEAT; i++)
          wr_reg[int'(ld_idx) * CELLS_PER_BEAT + i] <= bus[4*i +: 4];
    end
  end

  // ---------- controller ----------
  logic read_en, prog_en, sl_start, sample, convert, sa_clear, sa_valid, sa_sub;
  logic [$clog2(A_BITS)-1:0] bit_idx, sa_bit;
  logic [$clog2(ROWS)-1:0] prog_row;
  logic [$clog2(ADC_STEPS)-1:0] step, sa_step;
  logic sl_busy, sl_done, phase_dec;
  logic [COLS-1:0] sl_pulse;

  apu_controller #(.COMP_LAT(T_COMP), .A_BITS(A_BITS), .ADC_STEPS(COLS / N_ADC), .ROWS(ROWS)) u_ctrl (
    .clk, .rst_n,
    .start_compute(start_compute && !busy), .act_signed,
    .start_write(start_write && !busy), .row_in(wr_row),
    .sl_busy, .sl_done,
    .read_en, .bit_idx, .prog_en, .prog_row, .sl_start,
    .sample, .convert, .step,
    .sa_clear, .sa_valid, .sa_step, .sa_bit, .sa_sub,
    .busy, .writing, .done);

  // ---------- drivers and array ----------
  logic [ROWS-1:0] wl;
  logic bl_dec;
  logic [SUM_W-1:0] col_sum [COLS];
  logic [ADC_BITS-1:0] code [N_ADC];

  wlbl_driver #(.ROWS(ROWS)) u_wlbl (
    .plane(in_reg[bit_idx]), .read_en, .prog_en, .prog_row, .phase_dec, .wl, .bl_dec);

  sl_driver #(.COLS(COLS), .PULSE_CYCLES(T_PULSE)) u_sl (
    .clk, .rst_n, .start(sl_start), .delta(wr_reg), .busy(sl_busy), .done(sl_done),
    .phase_dec, .sl_pulse, .pulse_count);

  reram_crossbar #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS)) u_xbar (
    .clk, .rst_n, .wl, .read_en, .prog_en, .bl_dec, .sl_pulse, .col_sum);

  adc_pool #(.COLS(COLS), .SUM_W(SUM_W), .N_ADC(N_ADC), .ADC_BITS(ADC_BITS)) u_adc (
    .clk, .rst_n, .col_sum, .sample, .convert, .step, .code);

  shift_add #(.N_ADC(N_ADC), .ADC_BITS(ADC_BITS), .COLS(COLS), .CELL_BITS(CELL_BITS),
              .CELLS(CELLS_PER_W), .A_BITS(A_BITS), .PSUM_W(PSUM_W)) u_sa (
    .clk, .rst_n, .clear(sa_clear), .valid(sa_valid), .step(sa_step), .bit_idx(sa_bit),
    .sub(sa_sub), .code, .psum);
endmodule
