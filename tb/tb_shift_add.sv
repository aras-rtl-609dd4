// tb_shift_add: feeds random ADC codes for 8 bit iterations x 8 conversion
// steps (with the sign-bit iteration subtracted in some windows) and checks
// all 32 partial sums against sum_b sum_j code << (2j + b).
module tb_shift_add;
  logic clk = 0, rst_n = 0;
  logic clear, valid, sub;
  logic [2:0] step, bit_idx;
  logic [5:0] code [16];
  logic signed [31:0] psum [32];
  int checks = 0, failures = 0;
  longint ref_p [32];
  shift_add dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; valid = 0; sub = 0; step = 0; bit_idx = 0;
    for (int a = 0; a < 16; a++) code[a] = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 10; n++) begin
      bit sgn = (n % 2 == 1);
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int w = 0; w < 32; w++) ref_p[w] = 0;
      for (int b = 0; b < 8; b++)
        for (int s = 0; s < 8; s++) begin
          valid = 1; step = 3'(s); bit_idx = 3'(b); sub = sgn && (b == 7);
          for (int a = 0; a < 16; a++) begin
            code[a] = 6'($urandom_range(63));
            if (sub) ref_p[s*4 + a/4] -= longint'(code[a]) << (2*(a%4) + b);
            else     ref_p[s*4 + a/4] += longint'(code[a]) << (2*(a%4) + b);
          end
          @(posedge clk); #1;
          valid = 0;
          if ($urandom_range(3) == 0) begin @(posedge clk); #1; end   // idle cycle
        end
      for (int w = 0; w < 32; w++) begin
        checks++; if (longint'(psum[w]) != ref_p[w]) begin
          failures++; if (failures < 5) $display("w %0d psum %0d exp %0d", w, psum[w], ref_p[w]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
