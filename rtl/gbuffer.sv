// gbuffer: Global Buffer built from banks of different sizes.
//
// Stores the network inputs and the input and output activations of the layer
// being computed. The default bank set is 1 KB, 1 KB, 2 KB, 4 KB, 64 KB,
// 128 KB, 256 KB, 512 KB, 1 MB and 2 MB (words of 16 bytes). For every layer
// the offline scheduler picks the smallest set of banks that holds its input
// and output activations (adaptive bank selection); the controller writes that
// choice into bank_en and the other banks are power-gated. A gated bank's
// contents are lost: this model zeroes what it returns and raises gated_err on
// any access to it, and reports how many words are powered (active_words, the
// quantity the static power scales with).
//
// Addressing is linear: banks occupy consecutive address ranges in the order
// listed. One port, synchronous read: rdata is valid the cycle after an
// access with we = 0. The linear address map is this design's choice.
module gbuffer #(
  parameter int NB = 10,
  parameter int BANK_WORDS [NB] = '{64, 64, 128, 256, 4096, 8192, 16384, 32768, 65536, 131072},
  parameter int WIDTH = 128,
  parameter int AW = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NB-1:0]    bank_en,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata,
  output logic             gated_err,
  output logic [AW:0]      active_words
);
  function automatic int base_of(int b);
    int s = 0;
    for (int k = 0; k < b; k++) s += BANK_WORDS[k];
    return s;
  endfunction

  logic [NB-1:0] hit;
  logic [WIDTH-1:0] bank_rdata [NB];
  logic [NB-1:0] rd_sel;

  always_comb begin
    for (int b = 0; b < NB; b++)
      hit[b] = (int'(addr) >= base_of(b)) && (int'(addr) < base_of(b) + BANK_WORDS[b]);
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    localparam int D = BANK_WORDS[b];
    localparam int BASE = base_of(b);
    logic [$clog2(D)-1:0] off;
    assign off = $clog2(D)'(int'(addr) - BASE);
    gbuffer_bank #(.DEPTH(D), .WIDTH(WIDTH)) u_bank (
      .clk, .en(en && hit[b] && bank_en[b]), .we, .addr(off), .wdata, .rdata(bank_rdata[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_sel <= '0; gated_err <= 1'b0;
    end else begin
      rd_sel    <= (en && !we) ? (hit & bank_en) : '0;
      gated_err <= en && ((hit & ~bank_en) != '0 || hit == '0);
    end
  end

  always_comb begin
    rdata = '0;
    for (int b = 0; b < NB; b++) if (rd_sel[b]) rdata = bank_rdata[b];
    active_words = '0;
    for (int b = 0; b < NB; b++) if (bank_en[b]) active_words = active_words + (AW+1)'(BANK_WORDS[b]);
  end
endmodule
