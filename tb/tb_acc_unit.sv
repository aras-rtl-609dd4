// tb_acc_unit: the accumulation unit with 16 slots. Random result flits, one
// per cycle at random, are added into random slots; slots are read out at
// random times (one-cycle read latency) and compared with a reference sum,
// after which the slot must read as cleared. The rx strobe is counted against
// the flits sent.
module tb_acc_unit;
  import aras_pkg::*;
  localparam int S = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, rx, rd_en;
  res_flit_t in_flit;
  logic [3:0] rd_slot;
  logic [127:0] rd_data;
  longint r [S][4];
  int checks = 0, failures = 0, nrx = 0, nsent = 0;

  acc_unit #(.SLOTS(S)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rx) nrx++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endfunction

  initial begin
    in_valid = 0; in_flit = '0; rd_en = 0; rd_slot = 0;
    for (int s = 0; s < S; s++) for (int l = 0; l < 4; l++) r[s][l] = 0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 3000; i++) begin
      int s;
      in_valid = 0; rd_en = 0;
      if ($urandom_range(3) != 0) begin
        s = $urandom_range(S-1);
        in_valid = 1; in_flit.slot = 8'(s);
        for (int l = 0; l < 4; l++) begin
          int v;
          v = int'($urandom_range(200000)) - 100000;
          in_flit.data[32*l +: 32] = 32'(v);
          r[s][l] += v;
        end
        chk(in_ready, "always ready");
        nsent++;
        @(posedge clk); #1;
      end else begin
        s = $urandom_range(S-1);
        in_valid = 0; rd_en = 1; rd_slot = 4'(s);
        @(posedge clk); #1 rd_en = 0;
        for (int l = 0; l < 4; l++) begin
          chk(int'(signed'(rd_data[32*l +: 32])) == int'(r[s][l]), $sformatf("slot %0d lane %0d", s, l));
          r[s][l] = 0;
        end
      end
    end
    in_valid = 0;
    for (int s = 0; s < S; s++) begin
      rd_en = 1; rd_slot = 4'(s);
      @(posedge clk); #1 rd_en = 0;
      for (int l = 0; l < 4; l++) chk(int'(signed'(rd_data[32*l +: 32])) == int'(r[s][l]), "final drain");
    end
    chk(nrx == nsent, "rx count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
