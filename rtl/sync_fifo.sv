// sync_fifo: single-clock first-in first-out queue with valid/ready ports.
//
// DEPTH entries of WIDTH bits, write when in_valid && in_ready, read when
// out_valid && out_ready; both may happen in one cycle. in_ready is low when
// full, out_valid is high when not empty, and the head entry is visible
// combinationally on out_data. Used as the PE output buffer and as the
// response buffer of the external IO port.
module sync_fifo #(
  parameter int WIDTH = 136,
  parameter int DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; count <= '0;
    end else begin
      if (push) wr <= (wr == AW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      if (pop)  rd <= (rd == AW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  // the queue never over- or underflows
  assert property (@(posedge clk) disable iff (!rst_n) !(push && count == ($clog2(DEPTH+1))'(DEPTH)));
endmodule
