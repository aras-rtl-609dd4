// tb_wlbl_driver: checks that compute mode drives the bit-plane onto the
// wordlines, that write mode selects exactly the addressed row with the phase
// polarity on the bitline, and that nothing is driven when idle.
module tb_wlbl_driver;
  localparam int R = 128;
  logic [R-1:0] plane, wl;
  logic read_en, prog_en, phase_dec, bl_dec;
  logic [6:0] prog_row;
  int checks = 0, failures = 0;
  wlbl_driver #(.ROWS(R)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      logic [R-1:0] exp_wl; logic exp_bl;
      plane = {$urandom, $urandom, $urandom, $urandom};
      read_en = ($urandom_range(2) == 0); prog_en = $urandom_range(1);
      prog_row = 7'($urandom_range(R-1)); phase_dec = $urandom_range(1);
      #1;
      exp_wl = '0; exp_bl = 0;
      if (read_en) exp_wl = plane;
      else if (prog_en) begin exp_wl[prog_row] = 1; exp_bl = phase_dec; end
      checks++; if (wl !== exp_wl || bl_dec !== exp_bl) begin
        failures++; $display("mismatch n=%0d mode r%0d p%0d", n, read_en, prog_en); end
      if (!read_en && prog_en) begin checks++; if ($countones(wl) != 1) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
