// adc_pool: behavioural model of the APU's sample-and-hold stage, analog column
// multiplexer and shared pool of ADCs (analog/mixed-signal parts).
//
// On `sample` the column currents of the crossbar are held. For each
// conversion step the controller's column select picks a group of N_ADC
// adjacent columns (step s -> columns s*N_ADC .. s*N_ADC+N_ADC-1), and each ADC
// converts one of them. The ADC is modelled as ideal and saturating: the code
// equals the column current in units of one cell level, clipped to
// 2**ADC_BITS - 1. Codes are registered, so code[] is valid the cycle after
// `convert` is asserted with a step number. Held values reset to 0.
module adc_pool #(
  parameter int COLS     = 128,
  parameter int SUM_W    = 9,
  parameter int N_ADC    = 16,
  parameter int ADC_BITS = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [SUM_W-1:0]     col_sum [COLS],
  input  logic                 sample,
  input  logic                 convert,
  input  logic [$clog2(COLS/N_ADC)-1:0] step,
  output logic [ADC_BITS-1:0]  code [N_ADC]
);
  localparam int FULL = (1 << ADC_BITS) - 1;
  logic [SUM_W-1:0] held [COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) held[c] <= '0;
      for (int a = 0; a < N_ADC; a++) code[a] <= '0;
    end else begin
      if (sample)
        for (int c = 0; c < COLS; c++) held[c] <= col_sum[c];
      if (convert)
        for (int a = 0; a < N_ADC; a++) begin
          if (held[int'(step) * N_ADC + a] > SUM_W'(FULL)) code[a] <= ADC_BITS'(FULL);
          else code[a] <= held[int'(step) * N_ADC + a][ADC_BITS-1:0];
        end
    end
  end
endmodule
