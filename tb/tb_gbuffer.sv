// tb_gbuffer: the heterogeneous Global Buffer with a small bank set
// (8, 8, 16, 32 and 64 words). Random writes and reads over the whole linear
// address space are checked against a reference array with all banks powered,
// with the one-cycle read latency. Then random bank subsets are selected:
// the powered word count must equal the sum of the enabled banks, accesses to
// enabled banks must still work, and an access to a gated bank or beyond the
// last bank must raise the error flag and read as zero.
module tb_gbuffer;
  localparam int NB = 5;
  localparam int BW [NB] = '{8, 8, 16, 32, 64};
  localparam int TOT = 128;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] bank_en;
  logic en, we, gated_err;
  logic [7:0] addr;
  logic [127:0] wdata, rdata;
  logic [8:0] active_words;
  logic [127:0] ref_m [TOT];
  int checks = 0, failures = 0;

  gbuffer #(.NB(NB), .BANK_WORDS(BW), .AW(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endfunction
  function automatic int bank_of(int a);
    int s;
    s = 0;
    for (int b = 0; b < NB; b++) begin
      if (a < s + BW[b]) return b;
      s += BW[b];
    end
    return -1;
  endfunction

  task automatic access(bit w, int a, logic [127:0] d);
    en = 1; we = w; addr = 8'(a); wdata = d;
    @(posedge clk); #1 en = 0; we = 0;
  endtask

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0; bank_en = '1;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int a = 0; a < TOT; a++) begin
      ref_m[a] = {$urandom, $urandom, $urandom, $urandom};
      access(1, a, ref_m[a]);
    end
    chk(active_words == TOT, "all banks powered");
    for (int i = 0; i < 2000; i++) begin
      int a;
      a = $urandom_range(TOT-1);
      if ($urandom_range(1)) begin
        ref_m[a] = {$urandom, $urandom, $urandom, $urandom};
        access(1, a, ref_m[a]);
      end else begin
        access(0, a, '0);
        chk(rdata == ref_m[a] && !gated_err, $sformatf("read %0d", a));
      end
    end
    for (int i = 0; i < 40; i++) begin
      int sum;
      bank_en = NB'($urandom); sum = 0;
      for (int b = 0; b < NB; b++) if (bank_en[b]) sum += BW[b];
      #1 chk(int'(active_words) == sum, "powered words follow bank selection");
      for (int j = 0; j < 20; j++) begin
        int a, b;
        a = $urandom_range(TOT + 20);
        b = (a < TOT) ? bank_of(a) : -1;
        if (b >= 0 && bank_en[b]) begin
          if ($urandom_range(1)) begin
            ref_m[a] = {$urandom, $urandom, $urandom, $urandom};
            access(1, a, ref_m[a]);
            chk(!gated_err, "write to powered bank");
          end else begin
            access(0, a, '0);
            chk(rdata == ref_m[a] && !gated_err, "read from powered bank");
          end
        end else begin
          access(0, a, '0);
          chk(gated_err && rdata == '0, $sformatf("access %0d to gated bank %0d flagged", a, b));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
