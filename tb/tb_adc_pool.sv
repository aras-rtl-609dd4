// tb_adc_pool: samples random column currents, changes the inputs after the
// sample (the held values must be converted), and checks every conversion
// step's codes, including saturation at 63 for currents above the 6-bit range.
module tb_adc_pool;
  localparam int C = 128, SW = 9, NA = 16;
  logic clk = 0, rst_n = 0;
  logic [SW-1:0] col_sum [C];
  logic sample, convert;
  logic [2:0] step;
  logic [5:0] code [NA];
  int checks = 0, failures = 0;
  int held [C];
  adc_pool #(.COLS(C), .SUM_W(SW), .N_ADC(NA), .ADC_BITS(6)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sat = 0;
    sample = 0; convert = 0; step = 0;
    for (int c = 0; c < C; c++) col_sum[c] = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 20; n++) begin
      for (int c = 0; c < C; c++) begin
        col_sum[c] = 9'(($urandom_range(1)) ? $urandom_range(63) : $urandom_range(384));
        held[c] = col_sum[c];
      end
      sample = 1; @(posedge clk); #1; sample = 0;
      for (int c = 0; c < C; c++) col_sum[c] = 9'($urandom_range(384));
      for (int s = 0; s < C/NA; s++) begin
        convert = 1; step = 3'(s); @(posedge clk); #1; convert = 0;
        for (int a = 0; a < NA; a++) begin
          int e;
          e = held[s*NA + a] > 63 ? 63 : held[s*NA + a];
          if (held[s*NA + a] > 63) sat++;
          checks++; if (int'(code[a]) != e) begin
            failures++; if (failures < 5) $display("step %0d adc %0d code %0d exp %0d", s, a, code[a], e); end
        end
      end
    end
    checks++; if (sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
