// aras_top: the ARAS chip.
//
// ARAS runs DNN inference on ReRAM crossbars that are too few to hold a whole
// network: weights are rewritten at run time, layer by layer, and the writes
// of upcoming layers overlap the computation of the current one. The chip is
// a Global Buffer of heterogeneous, individually power-gated banks, N_PE
// processing elements of M x N APUs each (96 PEs of 6 x 4 APUs with 128 x 128
// crossbars of 2-bit cells by default), an interconnect, an accumulation unit
// (ACC) for layers spread over several PEs, a special function unit (SFU), an
// external IO port to main memory and a controller that executes the
// instruction list produced by the offline scheduler.
//
// Interface: instruction stream in (instr_t, valid/ready); main-memory request
// and response channels (128-bit words); done when I_END has executed;
// statistics: total cell programming pulses, executed instructions, cycles
// waiting for weight writes, Gbuffer powered words and gated-bank accesses.
// Parameters other than the paper's sizes (T_PULSE, T_COMP, ROWS, BANK_WORDS)
// exist so that the design can be simulated at reduced size.
// Timing: the top adds no pipeline stage of its own; see the blocks.
// The PE status outputs writing/busy and the DMA done pulse are left unused
// here (lint reports them): the controller tracks per-row writing and the
// DMA streams' own handshakes instead, and they remain available for debug.
// What follows the paper is the block structure and the default sizes; the
// instruction interface and the status counters are this design's own.
module aras_top
  import aras_pkg::*;
#(
  parameter int NP        = aras_pkg::N_PE,
  parameter int M         = aras_pkg::APU_M,
  parameter int N         = aras_pkg::APU_N,
  parameter int ROWS      = aras_pkg::XBAR_ROWS,
  parameter int T_PULSE   = aras_pkg::PULSE_CYCLES,
  parameter int T_COMP    = aras_pkg::COMP_LAT,
  parameter int NB        = aras_pkg::GB_BANKS,
  parameter int BANK_WORDS [NB] = '{64, 64, 128, 256, 4096, 8192, 16384, 32768, 65536, 131072}
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             instr_valid,
  output logic             instr_ready,
  input  instr_t           instr,
  output logic             mm_req_valid,
  input  logic             mm_req_ready,
  output logic             mm_req_we,
  output logic [31:0]      mm_req_addr,
  output logic [BUS_W-1:0] mm_req_wdata,
  input  logic             mm_rsp_valid,
  input  logic [BUS_W-1:0] mm_rsp_data,
  output logic             done,
  output logic [31:0]      pulse_total,
  output logic [31:0]      n_instr,
  output logic [31:0]      wait_w_cycles,
  output logic [GB_ADDR_W:0] gb_active_words,
  output logic             gb_gated_err
);
  // ---------------- Ext-IO ----------------
  logic x_cmd_valid, x_cmd_ready, x_cmd_we, x_done;
  logic [31:0] x_cmd_addr;
  logic [19:0] x_cmd_len;
  logic x_rd_valid, x_rd_ready, x_wr_valid, x_wr_ready;
  logic [BUS_W-1:0] x_rd_data, x_wr_data;

  ext_io #(.WIDTH(BUS_W), .MAW(32)) u_extio (
    .clk, .rst_n, .cmd_valid(x_cmd_valid), .cmd_ready(x_cmd_ready), .cmd_we(x_cmd_we),
    .cmd_addr(x_cmd_addr), .cmd_len(x_cmd_len), .done(x_done),
    .rd_valid(x_rd_valid), .rd_ready(x_rd_ready), .rd_data(x_rd_data),
    .wr_valid(x_wr_valid), .wr_ready(x_wr_ready), .wr_data(x_wr_data),
    .mm_req_valid, .mm_req_ready, .mm_req_we, .mm_req_addr, .mm_req_wdata,
    .mm_rsp_valid, .mm_rsp_data);

  // ---------------- Gbuffer ----------------
  logic [NB-1:0] bank_en;
  logic gb_en, gb_we;
  logic [GB_ADDR_W-1:0] gb_addr;
  logic [BUS_W-1:0] gb_wdata, gb_rdata;

  gbuffer #(.NB(NB), .BANK_WORDS(BANK_WORDS), .WIDTH(BUS_W), .AW(GB_ADDR_W)) u_gbuf (
    .clk, .rst_n, .bank_en, .en(gb_en), .we(gb_we), .addr(gb_addr), .wdata(gb_wdata),
    .rdata(gb_rdata), .gated_err(gb_gated_err), .active_words(gb_active_words));

  // ---------------- NoC and PEs ----------------
  logic f_valid, f_ready, noc_idle;
  pe_flit_t flit, pe_flit;
  logic [NP-1:0] pe_valid, pe_ready, pe_res_valid, pe_res_ready;
  logic [NP-1:0] pe_cmd_busy, pe_writing, pe_busy;
  logic [NP*M-1:0] pe_row_writing;
  res_flit_t pe_res [NP];
  logic [31:0] pe_pulses [NP];
  logic acc_in_valid, acc_in_ready;
  res_flit_t acc_in;

  noc #(.N_PE(NP)) u_noc (
    .clk, .rst_n, .in_valid(f_valid), .in_ready(f_ready), .in_flit(flit),
    .pe_valid, .pe_ready, .pe_flit,
    .res_valid(pe_res_valid), .res_ready(pe_res_ready), .res_flit(pe_res),
    .acc_valid(acc_in_valid), .acc_ready(acc_in_ready), .acc_flit(acc_in), .idle(noc_idle));

  for (genvar p = 0; p < NP; p++) begin : g_pe
    pe #(.M(M), .N(N), .ROWS(ROWS), .T_PULSE(T_PULSE), .T_COMP(T_COMP)) u_pe (
      .clk, .rst_n, .cmd_valid(pe_valid[p]), .cmd_ready(pe_ready[p]), .cmd(pe_flit),
      .res_valid(pe_res_valid[p]), .res_ready(pe_res_ready[p]), .res(pe_res[p]),
      .writing(pe_writing[p]), .row_writing(pe_row_writing[p*M +: M]),
      .cmd_busy(pe_cmd_busy[p]), .busy(pe_busy[p]), .pulse_count(pe_pulses[p]));
  end

  always_comb begin
    pulse_total = '0;
    for (int p = 0; p < NP; p++) pulse_total = pulse_total + pe_pulses[p];
  end

  // ---------------- ACC and SFU ----------------
  logic acc_rx, acc_rd_en;
  logic [7:0] acc_rd_slot;
  logic [SUMS_PER_FLIT*ACC_W-1:0] acc_rd_data;
  logic sfu_relu, sfu_in_valid, sfu_flush, sfu_out_valid;
  logic [1:0] sfu_pool;
  logic signed [15:0] sfu_bias;
  logic [7:0] sfu_mult;
  logic [4:0] sfu_shift;
  logic [31:0] sfu_out_data;

  acc_unit #(.SLOTS(256), .LANES(SUMS_PER_FLIT), .IN_W(PSUM_W), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .in_valid(acc_in_valid), .in_ready(acc_in_ready), .in_flit(acc_in),
    .rx(acc_rx), .rd_en(acc_rd_en), .rd_slot(acc_rd_slot), .rd_data(acc_rd_data));

  sfu #(.LANES(SUMS_PER_FLIT), .ACC_W(ACC_W)) u_sfu (
    .clk, .rst_n, .relu(sfu_relu), .pool_log2(sfu_pool), .bias(sfu_bias), .mult(sfu_mult),
    .shift(sfu_shift), .in_valid(sfu_in_valid), .in_data(acc_rd_data), .flush(sfu_flush),
    .out_valid(sfu_out_valid), .out_data(sfu_out_data));

  // ---------------- controller ----------------
  aras_controller #(.NP(NP), .M(M), .N(N), .NB(NB)) u_ctrl (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr,
    .x_cmd_valid, .x_cmd_ready, .x_cmd_we, .x_cmd_addr, .x_cmd_len,
    .x_rd_valid, .x_rd_ready, .x_rd_data, .x_wr_valid, .x_wr_ready, .x_wr_data,
    .bank_en, .gb_en, .gb_we, .gb_addr, .gb_wdata, .gb_rdata,
    .f_valid, .f_ready, .flit, .noc_idle,
    .acc_rx, .acc_rd_en, .acc_rd_slot,
    .sfu_relu, .sfu_pool, .sfu_bias, .sfu_mult, .sfu_shift, .sfu_in_valid, .sfu_flush,
    .sfu_out_valid, .sfu_out_data,
    .pe_cmd_busy, .pe_row_writing,
    .done, .n_instr, .wait_w_cycles);
endmodule
