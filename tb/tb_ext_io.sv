// tb_ext_io: the external-memory DMA engine against the behavioural main
// memory. Random-length read bursts are compared word by word with the memory
// contents while the read stream is randomly stalled (so responses pile up
// against the credit limit); random write bursts are then read back from the
// memory array. A zero-length command must complete at once. The number of
// outstanding reads is checked never to exceed the response buffer depth.
module tb_ext_io;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, cmd_we, done;
  logic [31:0] cmd_addr;
  logic [19:0] cmd_len;
  logic rd_valid, rd_ready, wr_valid, wr_ready;
  logic [127:0] rd_data, wr_data;
  logic mm_req_valid, mm_req_ready, mm_req_we, mm_rsp_valid;
  logic [31:0] mm_req_addr;
  logic [127:0] mm_req_wdata, mm_rsp_data;
  int checks = 0, failures = 0;

  ext_io dut (.*);
  mm_model #(.DEPTH(1024)) u_mm (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endfunction

  task automatic issue(bit we, int addr, int len);
    cmd_we = we; cmd_addr = addr; cmd_len = 20'(len); cmd_valid = 1;
    @(negedge clk); while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  initial begin
    cmd_valid = 0; rd_ready = 0; wr_valid = 0; wr_data = '0; cmd_we = 0; cmd_addr = 0; cmd_len = 0;
    for (int i = 0; i < 1024; i++) u_mm.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    #12 rst_n = 1; @(posedge clk); #1;
    for (int t = 0; t < 12; t++) begin
      int a, n, got;
      a = $urandom_range(900); n = 1 + $urandom_range(60); got = 0;
      issue(0, a, n);
      while (got < n) begin
        rd_ready = ($urandom_range(3) != 0);
        @(negedge clk);
        if (rd_valid && rd_ready) begin
          chk(rd_data == u_mm.mem[a + got], $sformatf("read %0d word %0d", t, got));
          got++;
        end
        @(posedge clk); #1;
      end
      rd_ready = 0;
      repeat (2) @(posedge clk);
      #1 chk(cmd_ready, "idle after read burst");
    end
    for (int t = 0; t < 8; t++) begin
      int a, n, sent;
      logic [127:0] w [$];
      a = $urandom_range(900); n = 1 + $urandom_range(40); sent = 0; w.delete();
      for (int i = 0; i < n; i++) w.push_back({$urandom, $urandom, $urandom, $urandom});
      issue(1, a, n);
      while (sent < n) begin
        wr_valid = ($urandom_range(3) != 0); wr_data = w[sent];
        @(negedge clk);
        if (wr_valid && wr_ready) sent++;
        @(posedge clk); #1;
      end
      wr_valid = 0;
      repeat (4) @(posedge clk);
      #1;
      for (int i = 0; i < n; i++) chk(u_mm.mem[a + i] == w[i], $sformatf("write %0d word %0d", t, i));
    end
    issue(0, 5, 0);
    chk(done === 1'b1, "zero length completes in one cycle");
    repeat (3) @(posedge clk);
    #1 chk(cmd_ready, "ready after zero-length command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
