// tb_sl_driver: drives random row deltas and checks, per column, the number
// of pulses in the increase and decrease steps, the step order, the total
// write time (slowest cell of each step times the pulse period), the pulse
// counter, the immediate completion of an all-zero row, and, at the default
// pulse period, the worst-case row time of 6000 cycles (768000 cycles for 128
// rows).
module tb_sl_driver;
  localparam int C = 128;
  localparam int PC = 5;
  logic clk = 0, rst_n = 0;
  logic start;
  logic [3:0] delta [C];
  logic busy, done, phase_dec, busy2, done2, phase_dec2;
  logic [C-1:0] sl_pulse, sl_pulse2;
  logic [31:0] pulse_count, pulse_count2;
  int checks = 0, failures = 0;

  sl_driver #(.COLS(C), .PULSE_CYCLES(PC)) dut (.clk, .rst_n, .start, .delta, .busy, .done,
    .phase_dec, .sl_pulse, .pulse_count);
  logic start2;
  sl_driver #(.COLS(C)) dut_full (.clk, .rst_n, .start(start2), .delta, .busy(busy2), .done(done2),
    .phase_dec(phase_dec2), .sl_pulse(sl_pulse2), .pulse_count(pulse_count2));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  initial begin
    int total_pulses;
    total_pulses = 0;
    start = 0; start2 = 0;
    for (int c = 0; c < C; c++) delta[c] = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 30; n++) begin
      int inc_cnt [C], dec_cnt [C];
      int max_i, max_d, cyc, exp_p;
      bit seen_dec, order_ok;
      max_i = 0; max_d = 0; cyc = 0; exp_p = 0; seen_dec = 0; order_ok = 1;
      for (int c = 0; c < C; c++) begin
        int m;
        m = (n == 0) ? 0 : $urandom_range(3);
        delta[c] = {1'($urandom_range(1)), 3'(m)};
        if (n == 1 || $urandom_range(3) == 0) delta[c] = '0;   // reused cells
        if (!delta[c][3] && delta[c][2:0] > max_i) max_i = delta[c][2:0];
        if ( delta[c][3] && delta[c][2:0] > max_d) max_d = delta[c][2:0];
        exp_p += delta[c][2:0];
        inc_cnt[c] = 0; dec_cnt[c] = 0;
      end
      start = 1; @(posedge clk); #1; start = 0;
      while (!done) begin
        cyc++;
        for (int c = 0; c < C; c++) if (sl_pulse[c]) begin
          if (phase_dec) begin dec_cnt[c]++; seen_dec = 1; end
          else begin inc_cnt[c]++; if (seen_dec) order_ok = 0; end
        end
        @(posedge clk); #1;
        if (cyc > 100) break;
      end
      for (int c = 0; c < C; c++) begin
        chk(inc_cnt[c] == (delta[c][3] ? 0 : int'(delta[c][2:0])), $sformatf("inc pulses col %0d", c));
        chk(dec_cnt[c] == (delta[c][3] ? int'(delta[c][2:0]) : 0), $sformatf("dec pulses col %0d", c));
      end
      chk(order_ok, "increase step before decrease step");
      // busy cycles: start cycle excluded; done is seen one cycle after the last busy cycle
      chk(cyc == ((max_i + max_d == 0) ? 0 : (max_i + max_d) * PC),
          $sformatf("row time %0d exp %0d", cyc, (max_i + max_d) * PC));
      total_pulses += exp_p;
      @(posedge clk); #1;
      chk(int'(pulse_count) == total_pulses, "pulse counter");
    end
    // worst case at the default pulse period
    for (int c = 0; c < C; c++) delta[c] = (c % 2) ? 4'b1011 : 4'b0011;
    start2 = 1; @(posedge clk); #1; start2 = 0;
    begin
      int cyc;
      cyc = 0;
      while (!done2) begin cyc++; @(posedge clk); #1; end
      chk(cyc == 6000, $sformatf("worst-case row time %0d exp 6000", cyc));
      chk(cyc * 128 == 768000, "crossbar write latency");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
