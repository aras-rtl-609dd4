// tb_aras_top: end-to-end test of the whole accelerator at reduced size
// (2 PEs of 2 x 2 APUs, 128 x 128 crossbars, a 10-bank Global Buffer of 8 to
// 64 words per bank, 4-cycle write pulses). A behavioural main memory holds
// the network input, the weight deltas of every crossbar row and receives the
// outputs. The testbench builds an instruction program for two layers and, at
// the same time, a reference model of the chip's arithmetic (cell levels,
// bit-serial activations, 6-bit ADC clipping, shift-and-add, row reduction,
// cross-PE accumulation, bias/ReLU/scale, max pooling, packing). At the end the
// stored outputs in main memory are compared word by word with the reference,
// and the total number of programming pulses with the sum of |delta| over all
// cells written.
//
// Layer 1 splits 384 inputs over PE0 (both APU rows, reduced together) and
// PE1 (one row); their results meet in the same accumulator slots. Layer 2
// rewrites PE0's first APU row with new weights of which half the crossbar
// rows are unchanged (all-zero deltas, no pulses), while PE1 computes with
// signed activations on the weights it already holds, and writes a fresh APU
// row. Each mechanism is counted and a mechanism that never happened is a
// failure: row writes, zero-delta rows, delta bypass into the PE buffer,
// activations through the shift registers, compute overlapping writes, waits
// for written weights, NoC backpressure, ADC saturation, multi-row reduction,
// accumulation of two PEs into one slot, ReLU clipping, pooling, signed
// activations and Gbuffer bank selection (power-gated words).
module tb_aras_top;
  import aras_pkg::*;
  localparam int NP = 2, M = 2, N = 2, TP = 4, NB = 10;
  localparam int BW [NB] = '{8, 8, 16, 32, 64, 64, 64, 64, 64, 64};
  localparam int NFL = N * 32 / 4;             // result flits per reduction
  localparam int R1 = 24;                      // crossbar rows used in layer 1
  localparam int MM_DELTA = 256, MM_OUT = 3000, MM_ZERO = 200;

  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, done, gb_gated_err;
  instr_t instr;
  logic mm_req_valid, mm_req_ready, mm_req_we, mm_rsp_valid;
  logic [31:0] mm_req_addr, pulse_total, n_instr, wait_w_cycles;
  logic [127:0] mm_req_wdata, mm_rsp_data;
  logic [GB_ADDR_W:0] gb_active_words;

  aras_top #(.NP(NP), .M(M), .N(N), .T_PULSE(TP), .NB(NB), .BANK_WORDS(BW)) dut (.*);
  mm_model #(.DEPTH(4096)) u_mm (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- reference state ----------------
  int G [NP][M][N][128][128];       // cell levels
  logic [127:0] gbm [512];          // Global Buffer image
  longint accs [256][4];
  int exp_pulses = 0;
  int mm_next = MM_DELTA;
  instr_t prog [$];
  bit sfu_relu = 1; int sfu_pool = 0, sfu_bias = 0, sfu_mult = 1, sfu_shift = 0;
  // mechanism counters (reference side)
  int n_zero_rows = 0, n_adc_sat = 0, n_relu_zero = 0, n_pooled = 0, n_signed = 0, n_multirow = 0;
  // mechanism counters (observed)
  int n_wrow_pulsed = 0, n_bypass = 0, n_act = 0, n_overlap = 0, n_noc_stall = 0, n_gated = 0;
  int n_two_pe_slots = 0;
  int slot_src [256];

  function automatic instr_t mk(op_e op);
    instr_t i;
    i = '0; i.op = op;
    return i;
  endfunction

  // write one crossbar row: deltas to main memory, WROW instruction, reference update
  function automatic void wrow(int p, int r, int c, int x, int neww [32]);
    instr_t i;
    int tot;
    tot = 0;
    for (int q = 0; q < 4; q++) begin
      logic [127:0] d;
      d = '0;
      for (int k = 0; k < 32; k++) begin
        int cc, nv, dv;
        cc = q*32 + k;
        nv = (neww[cc/4] >> (2*(cc%4))) & 3;
        dv = nv - G[p][r][c][x][cc];
        d[4*k +: 4] = {dv < 0, 3'(dv < 0 ? -dv : dv)};
        tot += (dv < 0) ? -dv : dv;
        G[p][r][c][x][cc] = nv;
      end
      u_mm.mem[mm_next + q] = d;
    end
    exp_pulses += tot;
    if (tot == 0) n_zero_rows++;
    i = mk(I_WROW); i.pe = 7'(p); i.row = 3'(r); i.col = 2'(c); i.addr = 8'd0; i.aux = 16'(x);
    i.mm_addr = 32'(mm_next);
    prog.push_back(i);
    mm_next += 4;
  endfunction

  // compute one APU row: activations from Gbuffer words gb..gb+7, reference psums
  longint ps [M][N][32];
  function automatic void comp(int p, int r, int gb, bit sgn);
    instr_t i;
    int a [128];
    for (int j = 0; j < 8; j++) for (int k = 0; k < 16; k++) a[j*16 + k] = int'(gbm[gb + j][8*k +: 8]);
    for (int c = 0; c < N; c++) begin
      for (int w = 0; w < 32; w++) ps[r][c][w] = 0;
      for (int b = 0; b < 8; b++)
        for (int col = 0; col < 128; col++) begin
          int s;
          longint t;
          s = 0;
          for (int x = 0; x < 128; x++) if ((a[x] >> b) & 1) s += G[p][r][c][x][col];
          if (s > 63) begin s = 63; n_adc_sat++; end
          t = longint'(s) << (2*(col%4) + b);
          if (sgn && b == 7) ps[r][c][col/4] -= t; else ps[r][c][col/4] += t;
        end
    end
    if (sgn) n_signed++;
    i = mk(I_COMP); i.pe = 7'(p); i.row = 3'(r); i.addr = 8'd16; i.gb_addr = 20'(gb); i.act_signed = sgn;
    prog.push_back(i);
  endfunction

  function automatic void reduce(int p, int mask, int slot);
    instr_t i;
    for (int j = 0; j < NFL; j++)
      for (int k = 0; k < 4; k++)
        for (int r = 0; r < M; r++) if ((mask >> r) & 1)
          accs[slot + j][k] += ps[r][j/8][(j%8)*4 + k];
    if ($countones(mask) > 1) n_multirow++;
    i = mk(I_REDUCE); i.pe = 7'(p); i.addr = 8'(slot); i.aux = 16'(mask);
    prog.push_back(i);
  endfunction

  function automatic void sfu_cfg(bit relu, int pool, int bias, int mult, int shift);
    instr_t i;
    sfu_relu = relu; sfu_pool = pool; sfu_bias = bias; sfu_mult = mult; sfu_shift = shift;
    i = mk(I_SFU_CFG); i.aux = 16'({relu, 2'(pool)});
    i.mm_addr = {3'b0, 16'(bias), 8'(mult), 5'(shift)};
    prog.push_back(i);
  endfunction

  function automatic int sfu_f(longint v);
    longint x;
    x = longint'(int'(v)) + sfu_bias;
    if (sfu_relu && x < 0) begin x = 0; n_relu_zero++; end
    x = (x * sfu_mult) >>> sfu_shift;
    if (!sfu_relu) x += 128;
    return (x < 0) ? 0 : (x > 255) ? 255 : int'(x);
  endfunction

  function automatic void flush(int slot, int len, int gb);
    instr_t i;
    int g, pk, wp, m [4];
    logic [127:0] pack;
    g = 1 << sfu_pool; pk = 0; wp = gb; pack = '0;
    for (int s = 0; s < len; s++) begin
      for (int k = 0; k < 4; k++) begin
        int y;
        y = sfu_f(accs[slot + s][k]);
        if (s % g == 0 || y > m[k]) m[k] = y;
        accs[slot + s][k] = 0;
      end
      if (s % g == g - 1) begin
        for (int k = 0; k < 4; k++) pack[32*pk + 8*k +: 8] = 8'(m[k]);
        pk++;
        if (pk == 4) begin gbm[wp] = pack; wp++; pk = 0; pack = '0; end
      end
    end
    if (pk != 0) begin gbm[wp] = pack; wp++; end
    if (g > 1) n_pooled++;
    i = mk(I_FLUSH); i.addr = 8'(slot); i.len = 20'(len); i.gb_addr = 20'(gb);
    prog.push_back(i);
  endfunction

  function automatic void load(int mm, int gb, int len);
    instr_t i;
    for (int k = 0; k < len; k++) gbm[gb + k] = u_mm.mem[mm + k];
    i = mk(I_LOAD_GB); i.mm_addr = 32'(mm); i.gb_addr = 20'(gb); i.len = 20'(len);
    prog.push_back(i);
  endfunction

  function automatic void store(int gb, int mm, int len);
    instr_t i;
    i = mk(I_STORE); i.mm_addr = 32'(mm); i.gb_addr = 20'(gb); i.len = 20'(len);
    prog.push_back(i);
  endfunction

  function automatic void simple(op_e op, int pe, int row, int aux);
    instr_t i;
    i = mk(op); i.pe = 7'(pe); i.row = 3'(row); i.aux = 16'(aux);
    prog.push_back(i);
  endfunction

  function automatic void rand_row(output int w [32], input int hi);
    for (int k = 0; k < 32; k++) w[k] = $urandom_range(hi);
  endfunction

  // ---------------- program ----------------
  task automatic build();
    int w [32];
    int keep [R1][32];
    for (int p = 0; p < NP; p++) for (int r = 0; r < M; r++) for (int c = 0; c < N; c++)
      for (int x = 0; x < 128; x++) for (int cc = 0; cc < 128; cc++) G[p][r][c][x][cc] = 0;
    for (int s = 0; s < 256; s++) for (int k = 0; k < 4; k++) accs[s][k] = 0;
    for (int a = 0; a < 512; a++) gbm[a] = '0;
    // network input: 384 activations in 24 words; 8 zero words
    for (int a = 0; a < 24; a++) u_mm.mem[a] = {$urandom, $urandom, $urandom, $urandom};
    for (int a = 0; a < 8; a++) u_mm.mem[MM_ZERO + a] = '0;
    // activations of PE1 row 0 saturate the ADCs: all ones over the weight rows
    u_mm.mem[16] = '1; u_mm.mem[17][63:0] = '1;

    simple(I_BANKS, 0, 0, 10'b00_0001_1111);          // 128 words powered
    load(0, 0, 24);
    load(MM_ZERO, 64, 8);
    // layer 1 weights: PE0 rows 0 and 1, PE1 row 0
    for (int x = 0; x < R1; x++) for (int c = 0; c < N; c++) begin
      rand_row(w, 255); wrow(0, 0, c, x, w);
      if (c == 0) for (int k = 0; k < 32; k++) keep[x][k] = w[k];
    end
    for (int x = 0; x < R1; x++) for (int c = 0; c < N; c++) begin rand_row(w, 255); wrow(0, 1, c, x, w); end
    simple(I_WAIT_W, 0, 0, 0);
    comp(0, 0, 0, 0);                                  // overlaps the writes of PE0 row 1 / PE1
    for (int x = 0; x < R1; x++) for (int c = 0; c < N; c++) begin
      if (c == 1) for (int k = 0; k < 32; k++) w[k] = 255;   // all cells at level 3
      else rand_row(w, 255);
      wrow(1, 0, c, x, w);
    end
    simple(I_WAIT_W, 0, 1, 0);
    comp(0, 1, 8, 0);
    reduce(0, 3, 0);
    simple(I_WAIT_W, 1, 0, 0);
    comp(1, 0, 16, 0);
    reduce(1, 1, 0);                                   // same slots as PE0
    sfu_cfg(1, 1, -40000, 3, 12);
    flush(0, NFL, 64);                                 // 16 slots, pooled by 2 -> 2 words
    // layer 2: rewrite PE0 row 0 (even rows unchanged) while PE1 computes
    for (int x = 0; x < R1; x++) begin
      if (x == 4) begin
        comp(1, 0, 64, 1);                             // signed activations (negative sums meet the ReLU), reused weights
        reduce(1, 1, 32);
      end
      for (int k = 0; k < 32; k++) w[k] = (x % 2 == 0) ? keep[x][k] : int'($urandom_range(255));
      wrow(0, 0, 0, x, w);
    end
    for (int x = 0; x < 8; x++) for (int c = 0; c < N; c++) begin rand_row(w, 255); wrow(1, 1, c, x, w); end
    sfu_cfg(1, 0, 0, 1, 10);
    flush(32, NFL, 80);                                // 16 slots -> 4 words
    simple(I_WAIT_W, 0, 0, 0);
    comp(0, 0, 64, 0);
    reduce(0, 1, 64);
    simple(I_WAIT_W, 1, 1, 0);
    comp(1, 1, 0, 0);
    reduce(1, 2, 64);
    sfu_cfg(0, 2, 0, 1, 11);
    flush(64, NFL, 84);                                // 16 slots, pooled by 4 -> 1 word
    store(64, MM_OUT, 2);
    store(80, MM_OUT + 2, 5);
    simple(I_BANKS, 0, 0, 10'b00_0000_0011);          // gate everything but 16 words
    simple(I_END, 0, 0, 0);
  endtask

  // ---------------- monitors ----------------
  logic [M*N-1:0] comp_any, wr_any;
  always_comb begin
    comp_any = '0; wr_any = '0;
    comp_any |= dut.g_pe[0].u_pe.apu_busy & ~dut.g_pe[0].u_pe.apu_writing;
    comp_any |= dut.g_pe[1].u_pe.apu_busy & ~dut.g_pe[1].u_pe.apu_writing;
    wr_any |= dut.g_pe[0].u_pe.apu_writing;
    wr_any |= dut.g_pe[1].u_pe.apu_writing;
  end
  always @(negedge clk) if (rst_n) begin
    if (comp_any != 0 && wr_any != 0) n_overlap++;
    if (dut.u_ctrl.f_valid && !dut.u_ctrl.f_ready) n_noc_stall++;
    if (dut.u_noc.in_valid && dut.u_noc.in_ready && dut.u_noc.in_flit.kind == K_DELTA) n_bypass++;
    if (dut.u_noc.in_valid && dut.u_noc.in_ready && dut.u_noc.in_flit.kind == K_ACT) n_act++;
    if (int'(gb_active_words) < 448) n_gated++;
    if (gb_gated_err) begin failures++; $display("FAIL access to a gated bank"); end
    for (int p = 0; p < NP; p++)
      if (dut.u_noc.res_valid[p] && dut.u_noc.res_ready[p])
        slot_src[dut.u_noc.res_flit[p].slot] |= (1 << p);
  end

  // ---------------- run ----------------
  initial begin
    int t0;
    instr_valid = 0; instr = '0;
    for (int s = 0; s < 256; s++) slot_src[s] = 0;
    build();
    #12 rst_n = 1; @(posedge clk); #1;
    t0 = 0;
    foreach (prog[n]) begin
      instr = prog[n]; instr_valid = 1;
      @(negedge clk); while (!instr_ready) @(negedge clk);
      @(posedge clk); #1 instr_valid = 0;
    end
    while (!done) @(posedge clk);
    repeat (5) @(posedge clk);
    #1;
    // outputs in main memory
    for (int k = 0; k < 2; k++)
      chk(u_mm.mem[MM_OUT + k] == gbm[64 + k], $sformatf("layer 1 output word %0d: %h exp %h", k, u_mm.mem[MM_OUT + k], gbm[64 + k]));
    for (int k = 0; k < 5; k++)
      chk(u_mm.mem[MM_OUT + 2 + k] == gbm[80 + k], $sformatf("layer 2 output word %0d: %h exp %h", k, u_mm.mem[MM_OUT + 2 + k], gbm[80 + k]));
    chk(int'(pulse_total) == exp_pulses, $sformatf("programming pulses %0d exp %0d", pulse_total, exp_pulses));
    chk(int'(n_instr) == prog.size(), "instructions executed");
    for (int s = 0; s < 256; s++) if (slot_src[s] == 3) n_two_pe_slots++;
    n_wrow_pulsed = mm_next / 4 - MM_DELTA / 4 - n_zero_rows;
    $display("row writes with pulses %0d, zero-delta rows %0d, delta bypass words %0d, activation words %0d",
             n_wrow_pulsed, n_zero_rows, n_bypass, n_act);
    $display("compute/write overlap cycles %0d, weight-wait cycles %0d, NoC stall cycles %0d",
             n_overlap, wait_w_cycles, n_noc_stall);
    $display("ADC saturations %0d, multi-row reductions %0d, two-PE slots %0d, ReLU zeros %0d, pooled flushes %0d, signed computes %0d, gated cycles %0d",
             n_adc_sat, n_multirow, n_two_pe_slots, n_relu_zero, n_pooled, n_signed, n_gated);
    chk(n_wrow_pulsed > 0, "mechanism: row write");
    chk(n_zero_rows > 0, "mechanism: zero-delta row");
    chk(n_bypass == 4 * (mm_next - MM_DELTA) / 4, "mechanism: delta bypass words");
    chk(n_act > 0, "mechanism: activations through shift registers");
    chk(n_overlap > 0, "mechanism: compute overlapping weight writes");
    chk(wait_w_cycles > 0, "mechanism: wait for written weights");
    chk(n_noc_stall > 0, "mechanism: NoC backpressure");
    chk(n_adc_sat > 0, "mechanism: ADC saturation");
    chk(n_multirow > 0, "mechanism: multi-row reduction");
    chk(n_two_pe_slots > 0, "mechanism: accumulation of two PEs");
    chk(n_relu_zero > 0, "mechanism: ReLU");
    chk(n_pooled > 0, "mechanism: max pooling");
    chk(n_signed > 0, "mechanism: signed activations");
    chk(n_gated > 0, "mechanism: power-gated banks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
