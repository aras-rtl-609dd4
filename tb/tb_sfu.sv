// tb_sfu: the special function unit. Random 4-lane partial sums with random
// bias, scale and shift are passed through with and without ReLU and with
// max-pooling groups of 1, 2, 4 and 8 inputs; every output word is compared
// with a reference computed here, and its timing (one output the cycle after
// the last input of a group) is checked.
module tb_sfu;
  logic clk = 0, rst_n = 0;
  logic relu, in_valid, flush, out_valid;
  logic [1:0] pool_log2;
  logic signed [15:0] bias;
  logic [7:0] mult;
  logic [4:0] shift;
  logic [127:0] in_data;
  logic [31:0] out_data;
  int checks = 0, failures = 0;

  sfu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic void chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endfunction
  function automatic int f(int v);
    longint x;
    x = longint'(v) + longint'(bias);
    if (relu && x < 0) x = 0;
    x = (x * longint'(mult)) >>> shift;
    if (!relu) x += 128;
    return (x < 0) ? 0 : (x > 255) ? 255 : int'(x);
  endfunction

  initial begin
    relu = 1; in_valid = 0; flush = 0; pool_log2 = 0; bias = 0; mult = 1; shift = 0; in_data = 0;
    #12 rst_n = 1; @(posedge clk); #1;
    for (int cfg = 0; cfg < 40; cfg++) begin
      int g;
      relu = $urandom_range(1); pool_log2 = 2'($urandom_range(3));
      bias = 16'($urandom); mult = 8'($urandom); shift = 5'($urandom_range(6, 14));
      flush = 1; @(posedge clk); #1 flush = 0;
      g = 1 << pool_log2;
      for (int grp = 0; grp < 6; grp++) begin
        int m [4];
        for (int l = 0; l < 4; l++) m[l] = 0;
        for (int i = 0; i < g; i++) begin
          in_valid = 1;
          for (int l = 0; l < 4; l++) begin
            int v, y;
            v = int'($urandom_range(40000)) - 20000;
            in_data[32*l +: 32] = 32'(v);
            y = f(v);
            if (y > m[l]) m[l] = y;
          end
          @(posedge clk); #1 in_valid = 0;
          if (i < g - 1) chk(!out_valid, "no output inside a pooling group");
          else begin
            chk(out_valid, "output after last input of the group");
            for (int l = 0; l < 4; l++)
              chk(int'(out_data[8*l +: 8]) == m[l], $sformatf("cfg %0d lane %0d: %0d exp %0d", cfg, l, out_data[8*l +: 8], m[l]));
          end
          if ($urandom_range(1)) begin @(posedge clk); #1 chk(!out_valid, "single output pulse"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
