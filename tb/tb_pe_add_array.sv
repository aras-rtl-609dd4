// tb_pe_add_array: random partial sums of 6 x 4 APUs, random row masks, and
// every result word index; each lane must be the sum over the masked rows of
// the addressed kernel.
module tb_pe_add_array;
  import aras_pkg::*;
  psum_t psum [6][4][32];
  logic [5:0] row_mask;
  logic [4:0] sel;
  logic [127:0] sum_word;
  int checks = 0, failures = 0;
  pe_add_array #(.M(6), .N(4), .NW(32)) dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int r = 0; r < 6; r++) for (int c = 0; c < 4; c++) for (int w = 0; w < 32; w++)
        psum[r][c][w] = psum_t'($urandom_range(2000000)) - 1000000;
      row_mask = 6'($urandom);
      if (n == 0) row_mask = '1;
      for (int s = 0; s < 32; s++) begin
        sel = 5'(s); #1;
        for (int k = 0; k < 4; k++) begin
          int e;
          e = 0;
          for (int r = 0; r < 6; r++) if (row_mask[r]) e += psum[r][s/8][(s%8)*4 + k];
          checks++; if (signed'(sum_word[32*k +: 32]) != e) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
