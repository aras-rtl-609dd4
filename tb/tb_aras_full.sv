// tb_aras_full: one complete operation of the accelerator at its full size
// (96 PEs of 6 x 4 APUs, 128 x 128 crossbars of 2-bit cells, 1000-cycle write
// pulses, the 4 MB ten-bank Global Buffer), with no parameter overridden.
// The last APU of the last PE is used: one crossbar row is written, then
// rewritten with a pattern that needs three increase and three decrease
// pulses on some cell, the slowest row write there is. Activations are loaded
// into the largest Gbuffer bank, the row computes, the PE reduces, the SFU
// applies a scale and the result goes back to main memory, where it is
// compared with a reference. Checked timings: the worst-case row write takes
// 6 pulse periods of 1000 cycles (the 768000-cycle write of 128 rows divided
// by 128), and a compute takes 96 cycles from start to results.
module tb_aras_full;
  import aras_pkg::*;
  localparam int PE = N_PE - 1, ROW = APU_M - 1, COL = APU_N - 1, XROW = XBAR_ROWS - 1;
  localparam int MM_IN = 0, MM_D = 64, MM_OUT = 512;
  localparam int GB_WORDS = 258560;                           // 4,136,960 bytes
  localparam int GB_IN = GB_WORDS - 64, GB_OUT = GB_WORDS - 32; // inside the 2 MB bank

  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, done, gb_gated_err;
  instr_t instr;
  logic mm_req_valid, mm_req_ready, mm_req_we, mm_rsp_valid;
  logic [31:0] mm_req_addr, pulse_total, n_instr, wait_w_cycles;
  logic [127:0] mm_req_wdata, mm_rsp_data;
  logic [GB_ADDR_W:0] gb_active_words;

  aras_top dut (.*);
  mm_model #(.DEPTH(1024)) u_mm (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endfunction

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int W1 [32], W2 [32];
  int a [128];
  instr_t prog [$];
  int exp_pulses;

  function automatic instr_t mk(op_e op);
    instr_t i;
    i = '0; i.op = op;
    return i;
  endfunction

  function automatic logic [127:0] delta_word(int q, int from [32], int to [32]);
    logic [127:0] d;
    d = '0;
    for (int k = 0; k < 32; k++) begin
      int cc, dv;
      cc = q*32 + k;
      dv = ((to[cc/4] >> (2*(cc%4))) & 3) - ((from[cc/4] >> (2*(cc%4))) & 3);
      d[4*k +: 4] = {dv < 0, 3'(dv < 0 ? -dv : dv)};
    end
    return d;
  endfunction

  // row-write and compute timing, observed in the APU that is used
  int wr_start [$], wr_len [$], cp_start, cp_len;
  logic wr_q = 0, cp_q = 0;
  int cyc = 0;
  always @(posedge clk) begin
    logic wr, cp;
    cyc++;
    wr = dut.g_pe[PE].u_pe.apu_writing[ROW*APU_N + COL];
    cp = dut.g_pe[PE].u_pe.apu_busy[ROW*APU_N + COL] && !wr;
    if (wr && !wr_q) wr_start.push_back(cyc);
    if (!wr && wr_q) wr_len.push_back(cyc - wr_start[wr_start.size() - 1]);
    if (cp && !cp_q) cp_start = cyc;
    if (!cp && cp_q) cp_len = cyc - cp_start;
    wr_q <= wr; cp_q <= cp;
  end

  initial begin
    instr_t i;
    int zero [32];
    longint e [32];
    for (int k = 0; k < 32; k++) begin
      zero[k] = 0; W1[k] = $urandom_range(255); W2[k] = $urandom_range(255);
    end
    W1[0] = 8'h03; W2[0] = 8'h0C;          // cell 0: 0 -> 3 -> 0, cell 1: 0 -> 0 -> 3
    exp_pulses = 0;
    for (int c = 0; c < 128; c++) begin
      int v0, v1;
      v0 = (W1[c/4] >> (2*(c%4))) & 3; v1 = (W2[c/4] >> (2*(c%4))) & 3;
      exp_pulses += v0 + ((v1 > v0) ? v1 - v0 : v0 - v1);
    end
    for (int q = 0; q < 4; q++) begin
      u_mm.mem[MM_D + q]     = delta_word(q, zero, W1);
      u_mm.mem[MM_D + 4 + q] = delta_word(q, W1, W2);
    end
    for (int x = 0; x < 128; x++) a[x] = (x == XROW) ? int'($urandom_range(1, 255)) : int'($urandom_range(255));
    for (int j = 0; j < 8; j++) for (int k = 0; k < 16; k++) u_mm.mem[MM_IN + j][8*k +: 8] = 8'(a[j*16 + k]);
    // reference: only crossbar row XROW holds weights, so column sums stay below 63
    for (int w = 0; w < 32; w++) e[w] = longint'(a[XROW]) * W2[w];

    i = mk(I_BANKS); i.aux = 16'h3FF; prog.push_back(i);
    i = mk(I_LOAD_GB); i.mm_addr = MM_IN; i.gb_addr = GB_IN; i.len = 8; prog.push_back(i);
    i = mk(I_WROW); i.pe = PE; i.row = ROW; i.col = COL; i.aux = XROW; i.mm_addr = MM_D; prog.push_back(i);
    i = mk(I_WROW); i.pe = PE; i.row = ROW; i.col = COL; i.aux = XROW; i.mm_addr = MM_D + 4; prog.push_back(i);
    i = mk(I_WAIT_W); i.pe = PE; i.row = ROW; prog.push_back(i);
    i = mk(I_COMP); i.pe = PE; i.row = ROW; i.addr = 16; i.gb_addr = GB_IN; prog.push_back(i);
    i = mk(I_REDUCE); i.pe = PE; i.addr = 0; i.aux = 16'(1 << ROW); prog.push_back(i);
    i = mk(I_SFU_CFG); i.aux = {13'b0, 1'b1, 2'd0}; i.mm_addr = {3'b0, 16'd0, 8'd1, 5'd8}; prog.push_back(i);
    i = mk(I_FLUSH); i.addr = 24; i.len = 8; i.gb_addr = GB_OUT; prog.push_back(i);   // column COL
    i = mk(I_STORE); i.gb_addr = GB_OUT; i.mm_addr = MM_OUT; i.len = 2; prog.push_back(i);
    i = mk(I_END); prog.push_back(i);

    instr_valid = 0; instr = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    foreach (prog[n]) begin
      instr = prog[n]; instr_valid = 1;
      @(negedge clk); while (!instr_ready) @(negedge clk);
      @(posedge clk); #1 instr_valid = 0;
    end
    while (!done) @(posedge clk);
    repeat (5) @(posedge clk);
    #1;
    for (int s = 0; s < 8; s++)
      for (int k = 0; k < 4; k++) begin
        int y, got;
        y = int'(e[s*4 + k] >>> 8);
        if (y > 255) y = 255;
        got = int'(u_mm.mem[MM_OUT + s/4][32*(s%4) + 8*k +: 8]);
        chk(got == y, $sformatf("output %0d: %0d exp %0d", s*4 + k, got, y));
      end
    chk(int'(pulse_total) == exp_pulses, $sformatf("pulses %0d exp %0d", pulse_total, exp_pulses));
    chk(wr_len.size() == 2, "two row writes observed");
    if (wr_len.size() == 2) begin
      chk(wr_len[1] >= 6 * PULSE_CYCLES && wr_len[1] <= 6 * PULSE_CYCLES + 4,
          $sformatf("worst-case row write %0d cycles, expected 6 x %0d", wr_len[1], PULSE_CYCLES));
      chk(wr_len[1] * XBAR_ROWS <= WRITE_LAT + 4 * XBAR_ROWS, "128 such rows fit the crossbar write latency");
    end
    chk(cp_len >= COMP_LAT && cp_len <= COMP_LAT + 4, $sformatf("compute %0d cycles, expected %0d", cp_len, COMP_LAT));
    chk(int'(gb_active_words) == GB_WORDS, "all 4 MB of Gbuffer powered");
    $display("row writes %0p cycles, compute %0d cycles, pulses %0d", wr_len, cp_len, pulse_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
