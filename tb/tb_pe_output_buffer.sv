// tb_pe_output_buffer: pushes and pops result flits with random valid/ready,
// checks order, full/empty flags at depth 32 and no loss.
module tb_pe_output_buffer;
  import aras_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  res_flit_t in_flit, out_flit;
  res_flit_t q [$];
  int checks = 0, failures = 0;
  pe_output_buffer #(.DEPTH(32)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int full_seen;
    full_seen = 0;
    in_valid = 0; out_ready = 0; in_flit = '0;
    #12 rst_n = 1; @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    for (int n = 0; n < 3000; n++) begin
      in_valid = (n < 1500) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      out_ready = (n < 1500) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      in_flit = '{slot: 8'($urandom), data: {$urandom, $urandom, $urandom, $urandom}};
      #1;
      if (!in_ready) begin full_seen++; checks++; if (q.size() != 32) failures++; end
      if (out_valid && out_ready) begin
        res_flit_t e;
        e = q.pop_front();
        checks++; if (out_flit !== e) failures++;
      end
      if (in_valid && in_ready) q.push_back(in_flit);
      @(posedge clk); #1;
    end
    checks++; if (full_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
