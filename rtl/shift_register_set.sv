// shift_register_set: activation serialiser of a PE, shared by all APU rows.
//
// Collects LANES 8-bit activations, ACTS_PER_WORD per input word (activation i
// of word j is lane j*ACTS_PER_WORD + i, in bits [8i+7:8i]). When the last
// word of a window has arrived it shifts the activations out bit-serially,
// one bit-plane word per cycle, LSB plane first: plane b has bit r = bit b of
// activation r. in_ready is low while the planes of a window are being shifted
// out, which is the throughput limit of the shared register set: a window
// takes LANES/ACTS_PER_WORD cycles in and A_BITS cycles out.
module shift_register_set #(
  parameter int LANES  = 128,
  parameter int A_BITS = 8,
  parameter int WIDTH  = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [WIDTH-1:0]          in_data,
  output logic                      out_valid,
  output logic [$clog2(A_BITS)-1:0] out_idx,
  output logic [LANES-1:0]          out_plane
);
  localparam int PER_WORD = WIDTH / A_BITS;
  localparam int WORDS    = LANES / PER_WORD;

  logic [A_BITS-1:0] act [LANES];
  logic [$clog2(WORDS+1)-1:0] cnt;
  logic shifting;

  assign in_ready  = !shifting;
  assign out_valid = shifting;

  always_comb
    for (int r = 0; r < LANES; r++) out_plane[r] = act[r][0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; shifting <= 1'b0; out_idx <= '0;
      for (int r = 0; r < LANES; r++) act[r] <= '0;
    end else if (shifting) begin
      for (int r = 0; r < LANES; r++) act[r] <= act[r] >> 1;
      if (out_idx == $clog2(A_BITS)'(A_BITS - 1)) begin
        shifting <= 1'b0; out_idx <= '0;
      end else out_idx <= out_idx + 1'b1;
    end else if (in_valid) begin
      for (int i = 0; i < PER_WORD; i++)
        act[int'(cnt) * PER_WORD + i] <= in_data[A_BITS*i +: A_BITS];
      if (cnt == ($clog2(WORDS+1))'(WORDS - 1)) begin
        cnt <= '0; shifting <= 1'b1;
      end else cnt <= cnt + 1'b1;
    end
  end
endmodule
