// apu_controller: sequencer of one APU, in compute (C) or write (W) mode.
//
// Compute: after start_compute the activations are applied bit-serially, LSB
// first. Each of the A_BITS iterations takes COMP_LAT/A_BITS cycles: the
// wordlines are driven with the bit-plane for SETTLE cycles, the column
// currents are sampled on the last of them, then the column select walks the
// ADC_STEPS groups of N_ADC columns, one conversion per cycle. Converted codes
// reach the shift-and-add units one cycle later (ADC output register). With the
// default sizes this is 8 x (4 + 8) = 96 cycles of crossbar activity, the
// crossbar computation latency of the evaluated configuration; done pulses
// COMP_LAT + 2 cycles after the start cycle (ADC register, accumulator
// register), in the cycle the partial sums become final.
// The split of an iteration into 4 settle/sample cycles and 8 conversion
// cycles is this design's choice. With act_signed the MSB iteration subtracts.
//
// Write: start_write latches the target row and starts the SL driver; prog_en
// stays high while the driver is busy and done pulses in the cycle the driver
// reports completion.
// Commands are ignored while busy.
module apu_controller #(
  parameter int COMP_LAT  = 96,
  parameter int A_BITS    = 8,
  parameter int ADC_STEPS = 8,
  parameter int ROWS      = 128
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start_compute,
  input  logic act_signed,
  input  logic start_write,
  input  logic [$clog2(ROWS)-1:0] row_in,
  input  logic sl_busy,
  input  logic sl_done,
  // crossbar / drivers
  output logic read_en,
  output logic [$clog2(A_BITS)-1:0] bit_idx,
  output logic prog_en,
  output logic [$clog2(ROWS)-1:0] prog_row,
  output logic sl_start,
  // S&H, mux and ADCs
  output logic sample,
  output logic convert,
  output logic [$clog2(ADC_STEPS)-1:0] step,
  // shift and add
  output logic sa_clear,
  output logic sa_valid,
  output logic [$clog2(ADC_STEPS)-1:0] sa_step,
  output logic [$clog2(A_BITS)-1:0] sa_bit,
  output logic sa_sub,
  // status
  output logic busy,
  output logic writing,
  output logic done
);
  localparam int CPB    = COMP_LAT / A_BITS;   // cycles per bit iteration
  localparam int SETTLE = CPB - ADC_STEPS;
  localparam int TW     = $clog2(CPB);

  typedef enum logic [2:0] {S_IDLE, S_COMP, S_DRAIN1, S_DRAIN2, S_WRITE} state_e;
  state_e state;
  logic [TW-1:0] t;
  logic signed_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; t <= '0; bit_idx <= '0; prog_row <= '0; signed_q <= 1'b0;
      sa_valid <= 1'b0; sa_step <= '0; sa_bit <= '0; sa_sub <= 1'b0;
    end else begin
      sa_valid <= convert;
      sa_step  <= step;
      sa_bit   <= bit_idx;
      sa_sub   <= signed_q && (bit_idx == $clog2(A_BITS)'(A_BITS - 1));
      case (state)
        S_IDLE: begin
          t <= '0; bit_idx <= '0;
          if (start_compute) begin
            state <= S_COMP; signed_q <= act_signed;
          end else if (start_write) begin
            state <= S_WRITE; prog_row <= row_in;
          end
        end
        S_COMP: begin
          if (t == TW'(CPB - 1)) begin
            t <= '0;
            if (bit_idx == $clog2(A_BITS)'(A_BITS - 1)) state <= S_DRAIN1;
            else bit_idx <= bit_idx + 1'b1;
          end else t <= t + 1'b1;
        end
        S_DRAIN1: state <= S_DRAIN2;
        S_DRAIN2: state <= S_IDLE;
        S_WRITE: if (sl_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    read_en  = (state == S_COMP) && (t < TW'(SETTLE));
    sample   = (state == S_COMP) && (t == TW'(SETTLE - 1));
    convert  = (state == S_COMP) && (t >= TW'(SETTLE));
    step     = convert ? $clog2(ADC_STEPS)'(t - TW'(SETTLE)) : '0;
    sa_clear = (state == S_IDLE) && start_compute;
    sl_start = (state == S_IDLE) && !start_compute && start_write;
    prog_en  = (state == S_WRITE) && sl_busy;
    busy     = (state != S_IDLE);
    writing  = (state == S_WRITE);
    done     = (state == S_DRAIN2) || ((state == S_WRITE) && sl_done);
  end
endmodule
