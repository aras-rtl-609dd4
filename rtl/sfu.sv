// sfu: Special Function Unit, the transition between a layer's accumulated
// dot products and the next layer's 8-bit activations.
//
// For each of LANES accumulated values v (signed): v = v + bias; with relu,
// negative values become 0 and y = clip((v * mult) >>> shift, 0, 255); without
// relu the result is re-centred on zero point 128:
// y = clip(((v * mult) >>> shift) + 128, 0, 255). bias and the scale
// (mult, shift) are per-layer constants chosen offline (bias can also absorb
// the zero-point adjustment of shifted weights). Max pooling: with pool_log2 =
// p, 2**p consecutive inputs are reduced lane-wise to their maximum and one
// output is produced per group. One input per cycle, output registered
// (out_valid the cycle after the last input of a group).
module sfu #(
  parameter int LANES = 4,
  parameter int ACC_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   relu,
  input  logic [1:0]             pool_log2,
  input  logic signed [15:0]     bias,
  input  logic [7:0]             mult,
  input  logic [4:0]             shift,
  input  logic                   in_valid,
  input  logic [LANES*ACC_W-1:0] in_data,
  input  logic                   flush,      // restart pooling groups
  output logic                   out_valid,
  output logic [LANES*8-1:0]     out_data
);
  logic [7:0] y [LANES];
  logic [7:0] mx [LANES];
  logic [2:0] cnt;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W+15:0] v, p;
      v = (ACC_W+16)'(signed'(in_data[ACC_W*l +: ACC_W])) + (ACC_W+16)'(bias);
      if (relu && v < 0) v = '0;
      p = (v * signed'({1'b0, mult})) >>> shift;
      if (!relu) p = p + 128;
      if (p < 0) y[l] = 8'd0;
      else if (p > 255) y[l] = 8'd255;
      else y[l] = p[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; out_valid <= 1'b0; out_data <= '0;
      for (int l = 0; l < LANES; l++) mx[l] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (flush) cnt <= '0;
      else if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          logic [7:0] m;
          m = (cnt == 0 || y[l] > mx[l]) ? y[l] : mx[l];
          mx[l] <= m;
          out_data[8*l +: 8] <= m;
        end
        if (cnt == 3'((1 << pool_log2) - 1)) begin
          cnt <= '0; out_valid <= 1'b1;
        end else cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
