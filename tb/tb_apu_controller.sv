// tb_apu_controller: checks the compute sequence (per bit iteration 4 drive
// cycles with the sample on the last, then 8 conversions with steps 0..7;
// 8 iterations; done exactly COMP_LAT + 2 = 98 cycles after the start cycle;
// shift-add strobes one cycle after each conversion; subtraction only in the
// sign-bit iteration of a signed window) and the write sequence (SL driver
// started once, prog_en while it is busy, done with its done).
module tb_apu_controller;
  logic clk = 0, rst_n = 0;
  logic start_compute, act_signed, start_write, sl_busy, sl_done;
  logic [6:0] row_in, prog_row;
  logic read_en, prog_en, sl_start, sample, convert, sa_clear, sa_valid, sa_sub, busy, writing, done;
  logic [2:0] bit_idx, step, sa_step, sa_bit;
  int checks = 0, failures = 0;
  apu_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  initial begin
    start_compute = 0; act_signed = 0; start_write = 0; sl_busy = 0; sl_done = 0; row_in = 0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 2; n++) begin
      int cyc, n_rd, n_smp, n_cv, n_sa, n_sub, exp_step;
      bit seq_ok;
      cyc = 0; n_rd = 0; n_smp = 0; n_cv = 0; n_sa = 0; n_sub = 0; exp_step = 0; seq_ok = 1;
      act_signed = (n == 1);
      start_compute = 1; #1;
      chk(sa_clear, "accumulators cleared at start");
      @(posedge clk); #1; start_compute = 0; act_signed = 0;
      cyc = 1;
      while (!done && cyc < 200) begin
        if (read_en) n_rd++;
        if (sample) begin n_smp++; if (!read_en) seq_ok = 0; end
        if (convert) begin
          n_cv++; if (int'(step) != exp_step) seq_ok = 0;
          exp_step = (exp_step + 1) % 8;
        end
        if (sa_valid) begin n_sa++; if (sa_sub) n_sub++; end
        @(posedge clk); #1; cyc++;
      end
      if (sa_valid) begin n_sa++; if (sa_sub) n_sub++; end
      chk(cyc == 98, $sformatf("compute done at %0d exp 98", cyc));
      chk(n_rd == 32 && n_smp == 8 && n_cv == 64, $sformatf("drive %0d sample %0d convert %0d", n_rd, n_smp, n_cv));
      chk(n_sa == 64, $sformatf("shift-add strobes %0d", n_sa));
      chk(n_sub == ((n == 1) ? 8 : 0), $sformatf("subtracting strobes %0d", n_sub));
      chk(seq_ok, "column select order / sample while driven");
      @(posedge clk); #1;
      chk(!busy, "idle after compute");
    end
    // write
    row_in = 7'd77; start_write = 1; #1;
    chk(sl_start, "SL driver started");
    @(posedge clk); #1; start_write = 0;
    chk(writing && busy && prog_row == 7'd77, "write mode, row latched");
    sl_busy = 1; #1; chk(prog_en, "prog_en while SL busy");
    start_compute = 1; #1; chk(!sl_start && !sa_clear, "commands ignored while writing");
    repeat (10) @(posedge clk); #1; start_compute = 0;
    sl_busy = 0; sl_done = 1; #1; chk(done, "done with SL done");
    @(posedge clk); #1; sl_done = 0;
    chk(!busy && !writing, "idle after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
