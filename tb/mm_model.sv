// mm_model: behavioural stand-in for the off-chip main memory (LPDDR4 in the
// reference system), used only by testbenches. Word-addressed, WIDTH bits per
// word, DEPTH words; addresses wrap modulo DEPTH. It accepts a request when
// mm_req_ready is high (randomly withheld to create backpressure). A write is
// stored at once; a read returns its word on mm_rsp_valid LAT..LAT+3 cycles
// later, in request order, with no backpressure on responses. The memory
// contents are public (mem) so that a testbench can preload and inspect them.
module mm_model #(
  parameter int WIDTH = 128,
  parameter int MAW   = 32,
  parameter int DEPTH = 4096,
  parameter int LAT   = 6
) (
  input  logic             clk,
  input  logic             mm_req_valid,
  output logic             mm_req_ready,
  input  logic             mm_req_we,
  input  logic [MAW-1:0]   mm_req_addr,
  input  logic [WIDTH-1:0] mm_req_wdata,
  output logic             mm_rsp_valid,
  output logic [WIDTH-1:0] mm_rsp_data
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [WIDTH-1:0] q_data [$];
  longint unsigned  q_time [$];
  longint unsigned  now = 0;
  int unsigned stall_pct = 25;

  initial begin
    mm_req_ready = 1'b0; mm_rsp_valid = 1'b0; mm_rsp_data = '0;
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always @(posedge clk) begin
    now++;
    if (mm_req_valid && mm_req_ready) begin
      if (mm_req_we) mem[mm_req_addr % DEPTH] <= mm_req_wdata;
      else begin
        q_data.push_back(mem[mm_req_addr % DEPTH]);
        q_time.push_back(now + LAT + $urandom_range(3));
      end
    end
    mm_rsp_valid <= 1'b0;
    if (q_time.size() > 0 && q_time[0] <= now) begin
      mm_rsp_valid <= 1'b1;
      mm_rsp_data  <= q_data.pop_front();
      void'(q_time.pop_front());
    end
    mm_req_ready <= ($urandom_range(99) >= stall_pct);
  end
endmodule
