// tb_noc: the on-chip network with 4 PEs. Downstream, random command flits
// addressed to random PEs are pushed in while every PE withholds its ready at
// random; each PE must receive exactly its own flits, in order. Upstream, all
// PEs offer result flits at random (holding them until accepted) while the
// accumulation side stalls at random; every flit must reach the output once,
// in per-source order. Both directions run at the same time. The network's
// latency is one register stage in each direction, checked with a lone flit.
module tb_noc;
  import aras_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, acc_valid, acc_ready, idle;
  pe_flit_t in_flit, pe_flit;
  logic [NP-1:0] pe_valid, pe_ready, res_valid, res_ready;
  res_flit_t res_flit [NP];
  res_flit_t acc_flit;
  int checks = 0, failures = 0;
  pe_flit_t exp_d [NP][$];
  int exp_u [NP][$];
  int n_up [NP];
  int sent_up = 0, recv_up = 0, recv_d = 0;
  localparam int ND = 400, NU = 100;

  noc #(.N_PE(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endfunction

  // monitors, sampled mid-cycle
  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) if (pe_valid[p] && pe_ready[p]) begin
      chk(exp_d[p].size() > 0 && pe_flit == exp_d[p][0], $sformatf("downstream flit to PE %0d", p));
      if (exp_d[p].size() > 0) void'(exp_d[p].pop_front());
      recv_d++;
    end
    chk($countones(pe_valid) <= 1, "one PE addressed at a time");
    if (acc_valid && acc_ready) begin
      int src, seq;
      src = int'(acc_flit.data[127:96]); seq = int'(acc_flit.data[31:0]);
      chk(src < NP && exp_u[src].size() > 0 && exp_u[src][0] == seq, $sformatf("upstream flit from PE %0d", src));
      if (src < NP && exp_u[src].size() > 0) void'(exp_u[src].pop_front());
      recv_up++;
    end
  end

  // PE-side upstream sources
  for (genvar p = 0; p < NP; p++) begin : g_src
    initial begin
      res_valid[p] = 0; res_flit[p] = '0; n_up[p] = 0;
      wait (rst_n);
      while (n_up[p] < NU) begin
        @(posedge clk); #1;
        if (res_valid[p] && res_ready_q[p]) begin res_valid[p] = 0; n_up[p]++; end
        if (!res_valid[p] && n_up[p] < NU && $urandom_range(1)) begin
          res_valid[p] = 1;
          res_flit[p].slot = 8'($urandom);
          res_flit[p].data = {32'(p), 64'($urandom), 32'(n_up[p])};
          exp_u[p].push_back(n_up[p]);
        end
      end
    end
  end
  logic [NP-1:0] res_ready_q;
  always @(negedge clk) res_ready_q <= res_valid & res_ready;

  initial begin
    int t;
    in_valid = 0; in_flit = '0; pe_ready = '0; acc_ready = 0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    // latency of a lone flit in each direction
    in_flit = '0; in_flit.pe = 7'd2; in_flit.data = 128'hABCD; in_valid = 1; pe_ready = '1;
    exp_d[2].push_back(in_flit);
    @(posedge clk); #1 in_valid = 0;
    chk(pe_valid == 4'b0100, "downstream latency one cycle");
    @(posedge clk); #1;
    fork
      forever begin pe_ready = NP'($urandom); acc_ready = $urandom_range(3) != 0; @(posedge clk); #1; end
    join_none
    for (int i = 0; i < ND; i++) begin
      in_flit = '0;
      in_flit.pe = 7'($urandom_range(NP-1)); in_flit.kind = pe_kind_e'($urandom_range(4));
      in_flit.addr = 8'($urandom); in_flit.data = {$urandom, $urandom, $urandom, $urandom};
      exp_d[in_flit.pe].push_back(in_flit);
      in_valid = 1;
      @(negedge clk); while (!in_ready) @(negedge clk);
      @(posedge clk); #1;
    end
    in_valid = 0;
    t = 0;
    while ((recv_d < ND + 1 || recv_up < NP*NU) && t < 20000) begin @(posedge clk); t++; end
    chk(recv_d == ND + 1, $sformatf("all downstream flits delivered (%0d)", recv_d));
    chk(recv_up == NP*NU, $sformatf("all upstream flits delivered (%0d)", recv_up));
    for (int p = 0; p < NP; p++) chk(exp_d[p].size() == 0 && exp_u[p].size() == 0, "nothing left over");
    repeat (3) @(posedge clk);
    #1 chk(idle, "idle when drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
