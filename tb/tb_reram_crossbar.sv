// tb_reram_crossbar: programs random cells of the crossbar model with
// increase/decrease pulses in single selected rows, checks saturation at both
// ends of the level range, and compares column sums for random wordline
// patterns with a reference model kept in the testbench.
module tb_reram_crossbar;
  localparam int R = 128, C = 128, SW = 9;
  logic clk = 0, rst_n = 0;
  logic [R-1:0] wl;
  logic read_en, prog_en, bl_dec;
  logic [C-1:0] sl_pulse;
  logic [SW-1:0] col_sum [C];
  int checks = 0, failures = 0;
  int ref_g [R][C];

  reram_crossbar #(.ROWS(R), .COLS(C), .CELL_BITS(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic pulse_row(int r, bit dec, logic [C-1:0] cols);
    wl = '0; wl[r] = 1'b1; prog_en = 1; bl_dec = dec; sl_pulse = cols;
    @(posedge clk); #1;
    for (int c = 0; c < C; c++) if (cols[c]) begin
      if (!dec && ref_g[r][c] < 3) ref_g[r][c]++;
      if ( dec && ref_g[r][c] > 0) ref_g[r][c]--;
    end
    prog_en = 0; sl_pulse = '0; wl = '0;
  endtask

  initial begin
    wl = '0; read_en = 0; prog_en = 0; bl_dec = 0; sl_pulse = '0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) ref_g[r][c] = 0;
    #12 rst_n = 1; @(posedge clk); #1;
    // random programming, including pulses beyond the range ends
    for (int n = 0; n < 600; n++)
      pulse_row($urandom_range(R-1), ($urandom_range(3) == 0), {$urandom, $urandom, $urandom, $urandom});
    // prog_en low: pulses must have no effect
    wl = '1; sl_pulse = '1; bl_dec = 0; @(posedge clk); #1; wl = '0; sl_pulse = '0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      checks++; if (dut.g[r][c] != ref_g[r][c]) begin
        failures++; if (failures < 5) $display("cell %0d,%0d = %0d exp %0d", r, c, dut.g[r][c], ref_g[r][c]); end
    end
    // column sums
    for (int n = 0; n < 40; n++) begin
      wl = {$urandom, $urandom, $urandom, $urandom};
      if (n == 0) wl = '1;
      read_en = 1; #1;
      for (int c = 0; c < C; c++) begin
        int s;
        s = 0;
        for (int r = 0; r < R; r++) if (wl[r]) s += ref_g[r][c];
        checks++; if (int'(col_sum[c]) != s) begin
          failures++; if (failures < 5) $display("col %0d sum %0d exp %0d", c, col_sum[c], s); end
      end
      read_en = 0; #1;
      checks++; if (col_sum[3] != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
