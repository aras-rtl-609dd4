// gbuffer_bank: one bank of the Global Buffer, DEPTH words of WIDTH bits,
// single port, synchronous read (rdata valid the cycle after en && !we).
// Contents are not reset.
module gbuffer_bank #(
  parameter int DEPTH = 64,
  parameter int WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en && we)  mem[addr] <= wdata;
    if (en && !we) rdata <= mem[addr];
  end
endmodule
