// pe_buffer: one of the m buffers of a PE (1.5 KB = 96 words of 128 bits).
//
// Holds either activation bit-planes waiting to be sent to a row of APUs or
// weight deltas waiting to be sent to an APU's writing registers. One write
// port and one read port; the read is synchronous (rdata valid the cycle after
// re is asserted). Contents are not reset. Plain RTL array; the single-read /
// single-write organisation is this design's choice.
module pe_buffer #(
  parameter int WORDS = 96,
  parameter int WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
