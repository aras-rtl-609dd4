// sl_driver: SL switch matrix / per-column pulse drivers of an APU.
//
// Writes one crossbar row from the deltas held in the writing registers. Each
// cell delta is sign-magnitude, {dec, mag[2:0]}: mag programming pulses are
// needed, in the increase step when dec = 0 and in the decrease step when
// dec = 1. Every column has its own driver, so all cells of the row are pulsed
// together; a step lasts as many pulse periods as its slowest cell needs.
// The increase step comes first and the decrease step second, as in the
// row-by-row writing scheme. A cell whose delta is 0 is never pulsed (this is
// where partial weight reuse saves energy).
//
// Timing: start is accepted in IDLE; busy then stays high for exactly
// (max_inc + max_dec) * PULSE_CYCLES cycles, where max_inc / max_dec are the
// largest increase / decrease magnitudes in the row, and done pulses for one
// cycle after. sl_pulse[c] is a one-cycle strobe at the end of each pulse
// period for every column that still needs a pulse; phase_dec tells the WL/BL
// driver which polarity applies. pulse_count counts every cell pulse issued
// (a measure of write energy). The pulse period itself is this design's own
// figure, derived so that a worst-case crossbar write takes 768000 cycles.
module sl_driver #(
  parameter int COLS         = 128,
  parameter int PULSE_CYCLES = 1000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [3:0]      delta [COLS],
  output logic            busy,
  output logic            done,
  output logic            phase_dec,
  output logic [COLS-1:0] sl_pulse,
  output logic [31:0]     pulse_count
);
  localparam int TW = (PULSE_CYCLES > 1) ? $clog2(PULSE_CYCLES) : 1;

  logic [3:0] dreg [COLS];
  logic [2:0] max_inc_c, max_dec_c, max_inc, max_dec;
  logic [3:0] k;          // pulse period index across both steps
  logic [TW-1:0] timer;
  logic [3:0] total;

  always_comb begin
    max_inc_c = '0;
    max_dec_c = '0;
    for (int c = 0; c < COLS; c++) begin
      if (!delta[c][3] && delta[c][2:0] > max_inc_c) max_inc_c = delta[c][2:0];
      if ( delta[c][3] && delta[c][2:0] > max_dec_c) max_dec_c = delta[c][2:0];
    end
  end

  assign total     = {1'b0, max_inc} + {1'b0, max_dec};
  assign phase_dec = (k >= {1'b0, max_inc});

  logic last_cycle;
  assign last_cycle = busy && (timer == TW'(PULSE_CYCLES - 1));

  always_comb begin
    sl_pulse = '0;
    if (last_cycle) begin
      for (int c = 0; c < COLS; c++) begin
        if (!phase_dec)
          sl_pulse[c] = !dreg[c][3] && ({1'b0, dreg[c][2:0]} > k);
        else
          sl_pulse[c] =  dreg[c][3] && ({1'b0, dreg[c][2:0]} > (k - {1'b0, max_inc}));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; k <= '0; timer <= '0;
      max_inc <= '0; max_dec <= '0; pulse_count <= '0;
      for (int c = 0; c < COLS; c++) dreg[c] <= '0;
    end else begin
      done <= 1'b0;
      pulse_count <= pulse_count + 32'($countones(sl_pulse));
      if (!busy) begin
        if (start) begin
          for (int c = 0; c < COLS; c++) dreg[c] <= delta[c];
          max_inc <= max_inc_c;
          max_dec <= max_dec_c;
          k <= '0; timer <= '0;
          if (max_inc_c == 0 && max_dec_c == 0) done <= 1'b1;
          else busy <= 1'b1;
        end
      end else if (last_cycle) begin
        timer <= '0;
        if (k + 1'b1 == total) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        k <= k + 1'b1;
      end else begin
        timer <= timer + 1'b1;
      end
    end
  end
endmodule
