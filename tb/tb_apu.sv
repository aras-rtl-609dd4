// tb_apu: end-to-end test of one APU. Programs random 8-bit weights into the
// crossbar row by row through the writing registers (deltas from the current
// cell values, so reused cells get zero deltas), re-programs part of it with a
// second weight set, then computes windows of random activations (unsigned and
// two's complement, some with ADC saturation) and compares the 32 partial
// sums with a reference that applies the same 6-bit ADC clipping. Checks the
// compute latency (T_COMP + 2 cycles) and the row write time.
module tb_apu;
  import aras_pkg::*;
  localparam int R = 128, C = 128, TP = 2;
  logic clk = 0, rst_n = 0;
  logic [BUS_W-1:0] bus;
  logic ld_act, ld_delta, start_compute, act_signed, start_write, busy, writing, done;
  logic [2:0] ld_idx;
  logic [6:0] wr_row;
  psum_t psum [32];
  logic [31:0] pulse_count;
  int checks = 0, failures = 0;
  int cellv [R][C];
  int act [R];

  apu #(.ROWS(R), .COLS(C), .T_PULSE(TP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endfunction

  // write crossbar row r with weights w[32]
  task automatic write_row(int r, int w [32]);
    int d [C];
    int mi, md, cyc;
    mi = 0; md = 0;
    for (int c = 0; c < C; c++) begin
      d[c] = ((w[c/4] >> (2*(c%4))) & 3) - cellv[r][c];
      if (d[c] > mi) mi = d[c];
      if (-d[c] > md) md = -d[c];
    end
    for (int q = 0; q < 4; q++) begin
      bus = '0;
      for (int i = 0; i < 32; i++) begin
        int dd;
        dd = d[q*32 + i];
        bus[4*i +: 4] = (dd < 0) ? {1'b1, 3'(-dd)} : {1'b0, 3'(dd)};
      end
      ld_delta = 1; ld_idx = 3'(q); @(posedge clk); #1; ld_delta = 0;
    end
    wr_row = 7'(r); start_write = 1; @(posedge clk); #1; start_write = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1; cyc++; end
    chk(cyc == ((mi + md) == 0 ? 0 : (mi + md) * TP), $sformatf("row write time %0d exp %0d", cyc, (mi+md)*TP));
    @(posedge clk); #1;
    for (int c = 0; c < C; c++) cellv[r][c] = (w[c/4] >> (2*(c%4))) & 3;
  endtask

  task automatic compute(bit sgn, int density);
    longint ref_p [32];
    int cyc;
    for (int r = 0; r < R; r++) act[r] = ($urandom_range(99) < density) ? $urandom_range(255) : 0;
    for (int b = 0; b < 8; b++) begin
      bus = '0;
      for (int r = 0; r < R; r++) bus[r] = act[r][b];
      ld_act = 1; ld_idx = 3'(b); @(posedge clk); #1; ld_act = 0;
    end
    for (int w = 0; w < 32; w++) ref_p[w] = 0;
    for (int b = 0; b < 8; b++)
      for (int c = 0; c < C; c++) begin
        int s;
        s = 0;
        for (int r = 0; r < R; r++) if (act[r][b]) s += cellv[r][c];
        if (s > 63) s = 63;
        if (sgn && b == 7) ref_p[c/4] -= longint'(s) << (2*(c%4) + b);
        else               ref_p[c/4] += longint'(s) << (2*(c%4) + b);
      end
    act_signed = sgn; start_compute = 1; @(posedge clk); #1; start_compute = 0; act_signed = 0;
    cyc = 1;
    while (!done && cyc < 300) begin @(posedge clk); #1; cyc++; end
    chk(cyc == COMP_LAT + 2, $sformatf("compute latency %0d", cyc));
    for (int w = 0; w < 32; w++)
      chk(longint'(psum[w]) == ref_p[w], $sformatf("psum[%0d] = %0d exp %0d", w, psum[w], ref_p[w]));
    @(posedge clk); #1;
  endtask

  initial begin
    int w [32];
    int p0;
    bus = '0; ld_act = 0; ld_delta = 0; ld_idx = 0; start_compute = 0; act_signed = 0;
    start_write = 0; wr_row = 0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) cellv[r][c] = 0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int r = 0; r < R; r++) begin
      for (int k = 0; k < 32; k++) w[k] = $urandom_range(255);
      write_row(r, w);
    end
    chk(dut.u_xbar.g[5][9] == 2'(cellv[5][9]) && dut.u_xbar.g[127][127] == 2'(cellv[127][127]), "cells programmed");
    compute(0, 5);
    compute(0, 3);
    compute(1, 4);
    compute(0, 60);          // dense: ADCs saturate
    // second layer overwrites half of the rows; identical weights give zero deltas
    p0 = pulse_count;
    for (int r = 0; r < R; r += 2) begin
      for (int k = 0; k < 32; k++) w[k] = $urandom_range(255);
      write_row(r, w);
    end
    for (int k = 0; k < 32; k++) w[k] = (cellv[1][4*k] | (cellv[1][4*k+1] << 2) | (cellv[1][4*k+2] << 4) | (cellv[1][4*k+3] << 6));
    p0 = pulse_count;
    write_row(1, w);
    chk(pulse_count == p0, "rewriting identical weights issues no pulses");
    compute(0, 5);
    compute(1, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
