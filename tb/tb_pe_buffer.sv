// tb_pe_buffer: random writes and reads of the 96-word PE buffer, checking the
// one-cycle read latency and simultaneous read/write of different words.
module tb_pe_buffer;
  logic clk = 0;
  logic we, re;
  logic [6:0] waddr, raddr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [96];
  bit valid [96];
  int checks = 0, failures = 0;
  pe_buffer #(.WORDS(96), .WIDTH(128)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 96; i++) valid[i] = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 96; i++) begin
      we = 1; waddr = 7'(i); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata; valid[i] = 1; @(posedge clk); #1;
    end
    we = 0;
    for (int n = 0; n < 2000; n++) begin
      int ra, wa;
      logic [127:0] exp_d;
      ra = $urandom_range(95); wa = $urandom_range(95);
      while (wa == ra) wa = $urandom_range(95);
      re = 1; raddr = 7'(ra); exp_d = model[ra];
      we = $urandom_range(1); waddr = 7'(wa); wdata = {$urandom, $urandom, $urandom, $urandom};
      if (we) model[wa] = wdata;
      @(posedge clk); #1;
      checks++; if (rdata !== exp_d) failures++;
      re = 0; we = 0;
      wdata = '1; @(posedge clk); #1;
      checks++; if (rdata !== exp_d) failures++;   // output holds without re
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
