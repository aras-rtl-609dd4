// pe_output_buffer: output buffer of a PE.
//
// Queues the result words produced by the ADD array (each tagged with the ACC
// slot it belongs to) until the NoC carries them to the accumulation unit.
// A FIFO of DEPTH result flits with valid/ready on both sides; the default
// depth holds one complete reduction (32 words). The depth is this design's
// choice.
module pe_output_buffer
  import aras_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  res_flit_t in_flit,
  output logic      out_valid,
  input  logic      out_ready,
  output res_flit_t out_flit
);
  logic [$clog2(DEPTH+1)-1:0] count;
  sync_fifo #(.WIDTH($bits(res_flit_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_flit),
    .out_valid, .out_ready, .out_data(out_flit), .count);
endmodule
