// tb_shift_register_set: sends windows of 128 random activations (8 words of
// 16) and checks the 8 bit-planes, their order, that in_ready is low while
// shifting, and the cycle counts (8 in, 8 out).
module tb_shift_register_set;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid;
  logic [127:0] in_data, out_plane;
  logic [2:0] out_idx;
  int checks = 0, failures = 0;
  logic [7:0] acts [128];
  shift_register_set dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; in_data = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < 30; n++) begin
      int b, cyc;
      for (int i = 0; i < 128; i++) acts[i] = 8'($urandom_range(255));
      for (int j = 0; j < 8; j++) begin
        for (int i = 0; i < 16; i++) in_data[8*i +: 8] = acts[j*16 + i];
        in_valid = 1;
        checks++; if (!in_ready) failures++;
        @(posedge clk); #1;
        in_valid = 0;
        if (j < 7 && $urandom_range(1)) begin @(posedge clk); #1; end
      end
      b = 0; cyc = 0;
      while (out_valid) begin
        logic [127:0] e;
        for (int r = 0; r < 128; r++) e[r] = acts[r][b];
        checks++; if (out_plane !== e || int'(out_idx) != b) failures++;
        checks++; if (in_ready) failures++;
        b++; cyc++;
        @(posedge clk); #1;
      end
      checks++; if (cyc != 8) begin failures++; $display("planes %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
