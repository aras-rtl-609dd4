// ext_io: External IO interface, the accelerator's port to main memory.
//
// A small DMA engine. A read command (we = 0) issues len word reads starting
// at addr and delivers the returned words, in order, on the rd stream
// (valid/ready). A write command (we = 1) takes len words from the wr stream
// and issues them as writes to addr, addr+1, ... Main memory is reached
// through a request channel (valid/ready) and a read-response channel without
// backpressure; ext_io never has more reads outstanding than its response
// buffer can hold (RSP_DEPTH), so responses are never dropped. done pulses
// when the last word of a command has been delivered (read) or issued
// (write). cmd_ready is high only when no command is in progress. Word width
// and the protocol are this design's choice; the memory bandwidth limit is the
// memory's (it throttles through mm_req_ready and response latency).
module ext_io #(
  parameter int WIDTH     = 128,
  parameter int MAW       = 32,
  parameter int RSP_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  logic             cmd_we,
  input  logic [MAW-1:0]   cmd_addr,
  input  logic [19:0]      cmd_len,
  output logic             done,
  // data streams
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  // main memory
  output logic             mm_req_valid,
  input  logic             mm_req_ready,
  output logic             mm_req_we,
  output logic [MAW-1:0]   mm_req_addr,
  output logic [WIDTH-1:0] mm_req_wdata,
  input  logic             mm_rsp_valid,
  input  logic [WIDTH-1:0] mm_rsp_data
);
  localparam int CW = $clog2(RSP_DEPTH + 1);
  logic active, we_q;
  logic [MAW-1:0] addr_q;
  logic [19:0] issued, delivered, len_q;
  logic [CW-1:0] inflight;     // reads issued but not yet returned
  logic [CW-1:0] fcount;
  logic f_in_ready;

  assign cmd_ready = !active;

  // response buffer
  sync_fifo #(.WIDTH(WIDTH), .DEPTH(RSP_DEPTH)) u_rsp (
    .clk, .rst_n, .in_valid(mm_rsp_valid), .in_ready(f_in_ready), .in_data(mm_rsp_data),
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data), .count(fcount));

  logic credit;
  assign credit = (32'(inflight) + 32'(fcount)) < RSP_DEPTH;

  always_comb begin
    mm_req_valid = 1'b0;
    mm_req_we    = we_q;
    mm_req_addr  = addr_q;
    mm_req_wdata = wr_data;
    wr_ready     = 1'b0;
    if (active && issued != len_q) begin
      if (we_q) begin
        mm_req_valid = wr_valid;
        wr_ready     = mm_req_ready;
      end else begin
        mm_req_valid = credit;
      end
    end
  end

  wire req_fire = mm_req_valid && mm_req_ready;
  wire rd_fire  = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; we_q <= 1'b0; addr_q <= '0; issued <= '0; delivered <= '0;
      len_q <= '0; inflight <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      inflight <= inflight + CW'(req_fire && !we_q) - CW'(mm_rsp_valid);
      if (!active) begin
        if (cmd_valid) begin
          active <= (cmd_len != 0); done <= (cmd_len == 0);
          we_q <= cmd_we; addr_q <= cmd_addr; len_q <= cmd_len;
          issued <= '0; delivered <= '0;
        end
      end else begin
        if (req_fire) begin
          issued <= issued + 1'b1;
          addr_q <= addr_q + 1'b1;
        end
        if (rd_fire) delivered <= delivered + 1'b1;
        if ( we_q && req_fire && issued + 1'b1 == len_q) begin active <= 1'b0; done <= 1'b1; end
        if (!we_q && rd_fire && delivered + 1'b1 == len_q) begin active <= 1'b0; done <= 1'b1; end
      end
    end
  end

  // responses only ever arrive for outstanding reads, and always fit
  assert property (@(posedge clk) disable iff (!rst_n) mm_rsp_valid |-> f_in_ready);
endmodule
