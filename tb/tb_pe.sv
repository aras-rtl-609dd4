// tb_pe: a PE with 2 x 2 APUs driven by command flits. Weight deltas are
// stored through the bypass path and written into crossbar rows of every APU;
// while one APU row is still writing, the other computes (overlap of writing
// and computing inside one PE); activations go through the shift register
// set; reductions over one and over both APU rows are checked word by word
// against a reference dot product, with random backpressure on the result
// port.
module tb_pe;
  import aras_pkg::*;
  localparam int M = 2, N = 2, TP = 40, XR = 8;
  localparam int NFL = N * 32 / 4;   // crossbar rows used
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, res_valid, res_ready, writing, cmd_busy, busy;
  logic [M-1:0] row_writing;
  pe_flit_t cmd;
  res_flit_t res;
  logic [31:0] pulse_count;
  int checks = 0, failures = 0;
  int W [M][N][XR][32];
  int A [M][128];
  int overlap = 0;
  res_flit_t got [$];

  pe #(.M(M), .N(N), .T_PULSE(TP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endfunction

  always @(posedge clk) begin
    if (res_valid && res_ready) got.push_back(res);
    if (row_writing[1] && dut.apu_busy[0] && !dut.apu_writing[0]) overlap++;
  end

  task automatic send(pe_kind_e k, int row, int col, int addr, int aux, logic [127:0] data);
    cmd = '0; cmd.kind = k; cmd.row = 3'(row); cmd.col = 2'(col); cmd.addr = 8'(addr);
    cmd.aux = 8'(aux); cmd.data = data;
    cmd_valid = 1;
    @(negedge clk); while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  task automatic write_apu(int r, int c);
    for (int x = 0; x < XR; x++) begin
      for (int q = 0; q < 4; q++) begin
        logic [127:0] d;
        d = '0;
        for (int i = 0; i < 32; i++) begin
          int cc;
          cc = q*32 + i;
          d[4*i +: 4] = {1'b0, 3'((W[r][c][x][cc/4] >> (2*(cc%4))) & 3)};
        end
        send(K_DELTA, r, c, q, 0, d);
      end
      send(K_WRITE, r, c, 0, x, '0);
    end
  endtask

  task automatic load_compute(int r);
    for (int i = 0; i < 128; i++) A[r][i] = (i < XR) ? $urandom_range(255) : $urandom_range(255);
    for (int j = 0; j < 8; j++) begin
      logic [127:0] d;
      for (int i = 0; i < 16; i++) d[8*i +: 8] = 8'(A[r][j*16 + i]);
      send(K_ACT, r, 0, 16, 0, d);
    end
    send(K_COMPUTE, r, 0, 16, 0, '0);
  endtask

  task automatic reduce_check(int mask, int slot);
    int t;
    got.delete();
    send(K_REDUCE, 0, 0, slot, mask, '0);
    t = 0;
    while (got.size() < NFL && t < 5000) begin @(posedge clk); t++; end
    repeat (20) @(posedge clk);
    chk(got.size() == NFL, $sformatf("%0d result flits (got %0d)", NFL, got.size()));
    for (int j = 0; j < got.size(); j++) begin
      chk(int'(got[j].slot) == slot + j, "slot tag");
      for (int k = 0; k < 4; k++) begin
        longint e;
        int c, w;
        c = j / 8; w = (j % 8) * 4 + k; e = 0;
        for (int r = 0; r < M; r++) if (mask[r])
          for (int x = 0; x < XR; x++) e += longint'(A[r][x]) * W[r][c][x][w];
        chk(longint'(signed'(got[j].data[32*k +: 32])) == e,
            $sformatf("mask %0d word %0d lane %0d: %0d exp %0d", mask, j, k, signed'(got[j].data[32*k +: 32]), e));
      end
    end
  endtask

  initial begin
    res_ready = 0; cmd_valid = 0; cmd = '0;
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) for (int x = 0; x < XR; x++)
      for (int w = 0; w < 32; w++) W[r][c][x][w] = $urandom_range(255);
    #12 rst_n = 1; @(posedge clk); #1;
    fork
      forever begin res_ready = ($urandom_range(2) != 0); @(posedge clk); #1; end
    join_none
    write_apu(0, 0); write_apu(0, 1);
    while (dut.row_writing[0]) @(posedge clk);
    #1;
    write_apu(1, 0); write_apu(1, 1);
    load_compute(0);            // computes while row 1 is still writing
    reduce_check(1, 0);
    while (busy) @(posedge clk);
    #1;
    load_compute(1);
    load_compute(0);
    reduce_check(3, 64);
    begin
      int ep;
      ep = 0;
      for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) for (int x = 0; x < XR; x++)
        for (int w = 0; w < 32; w++) for (int j = 0; j < 4; j++) ep += (W[r][c][x][w] >> (2*j)) & 3;
      chk(int'(pulse_count) == ep, $sformatf("programming pulses %0d exp %0d", pulse_count, ep));
    end
    chk(overlap > 0, $sformatf("compute overlapped with writing for %0d cycles", overlap));
    $display("overlap cycles %0d pulses %0d", overlap, pulse_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
