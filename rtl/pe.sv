// pe: Processing Element of the ARAS accelerator.
//
// M x N APUs (6 x 4 by default), M buffers (one per APU row), the shift
// register set that serialises activations for all rows, the multiplexer that
// lets weight deltas bypass it, the ADD array (N accumulation modules), the
// output buffer and the PE controller. All APUs of one row receive the same
// activations (a row belongs to one layer); the APUs of a row hold different
// kernels. A PE can hold rows of different layers and write some of them while
// others compute.
//
// Interface: command flits in (pe_flit_t, valid/ready); result flits out
// (res_flit_t, valid/ready) from the output buffer; status: writing (any APU
// writing), row_writing (per APU row), cmd_busy (a command in progress), busy (any APU busy or a command in progress), pulse_count (sum of
// the cell programming pulses of all APUs). Parameters: M, N, crossbar size,
// pulse period and compute latency (for shortened simulations).
module pe
  import aras_pkg::*;
#(
  parameter int M        = 6,
  parameter int N        = 4,
  parameter int ROWS     = 128,
  parameter int T_PULSE  = aras_pkg::PULSE_CYCLES,
  parameter int T_COMP   = aras_pkg::COMP_LAT,
  parameter int BUF_WORDS = aras_pkg::PE_BUF_WORDS,
  parameter int OUT_DEPTH = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  pe_flit_t   cmd,
  output logic       res_valid,
  input  logic       res_ready,
  output res_flit_t  res,
  output logic       writing,
  output logic [M-1:0] row_writing,
  output logic       cmd_busy,
  output logic       busy,
  output logic [31:0] pulse_count
);
  localparam int NW = W_PER_XBAR;
  localparam int BW = $clog2(BUF_WORDS);

  // ---------- shift register set ----------
  logic srs_valid, srs_ready, srs_out_valid;
  logic [2:0] srs_out_idx;
  logic [BUS_W-1:0] srs_out_plane;

  shift_register_set #(.LANES(BUS_W), .A_BITS(A_BITS), .WIDTH(BUS_W)) u_srs (
    .clk, .rst_n, .in_valid(srs_valid), .in_ready(srs_ready), .in_data(cmd.data),
    .out_valid(srs_out_valid), .out_idx(srs_out_idx), .out_plane(srs_out_plane));

  // ---------- buffers ----------
  logic [M-1:0] buf_we, buf_re;
  logic [BW-1:0] buf_waddr, buf_raddr;
  logic [BUS_W-1:0] buf_wdata;
  logic [BUS_W-1:0] buf_rdata [M];

  for (genvar r = 0; r < M; r++) begin : g_buf
    pe_buffer #(.WORDS(BUF_WORDS), .WIDTH(BUS_W)) u_buf (
      .clk, .we(buf_we[r]), .waddr(buf_waddr), .wdata(buf_wdata),
      .re(buf_re[r]), .raddr(buf_raddr), .rdata(buf_rdata[r]));
  end

  // ---------- APUs ----------
  logic [BUS_W-1:0] apu_bus;
  logic [M*N-1:0] apu_ld_act, apu_ld_delta, apu_start_compute, apu_start_write;
  logic [M*N-1:0] apu_busy, apu_writing, apu_done;
  logic [2:0] apu_ld_idx;
  logic apu_act_signed;
  logic [6:0] apu_wr_row;
  psum_t psum [M][N][NW];
  logic [31:0] apu_pulses [M*N];

  for (genvar r = 0; r < M; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      apu #(.ROWS(ROWS), .COLS(XBAR_COLS), .T_PULSE(T_PULSE), .T_COMP(T_COMP)) u_apu (
        .clk, .rst_n, .bus(apu_bus),
        .ld_act(apu_ld_act[r*N+c]), .ld_delta(apu_ld_delta[r*N+c]), .ld_idx(apu_ld_idx),
        .start_compute(apu_start_compute[r*N+c]), .act_signed(apu_act_signed),
        .start_write(apu_start_write[r*N+c]), .wr_row(apu_wr_row[$clog2(ROWS)-1:0]),
        .busy(apu_busy[r*N+c]), .writing(apu_writing[r*N+c]), .done(apu_done[r*N+c]),
        .psum(psum[r][c]), .pulse_count(apu_pulses[r*N+c]));
    end
  end

  always_comb begin
    pulse_count = '0;
    for (int k = 0; k < M*N; k++) pulse_count = pulse_count + apu_pulses[k];
  end

  // ---------- add array and output buffer ----------
  logic [M-1:0] red_mask;
  logic [$clog2(N * W_PER_XBAR / SUMS_PER_FLIT)-1:0] red_sel;
  logic [7:0] red_slot;
  logic res_push, res_in_ready;
  logic [BUS_W-1:0] sum_word;
  res_flit_t res_in;

  pe_add_array #(.M(M), .N(N), .NW(NW)) u_add (
    .psum, .row_mask(red_mask), .sel(red_sel), .sum_word);

  assign res_in = '{slot: red_slot, data: sum_word};

  pe_output_buffer #(.DEPTH(OUT_DEPTH)) u_obuf (
    .clk, .rst_n, .in_valid(res_push), .in_ready(res_in_ready), .in_flit(res_in),
    .out_valid(res_valid), .out_ready(res_ready), .out_flit(res));

  // ---------- controller ----------
  logic ctrl_idle;
  pe_controller #(.M(M), .N(N), .BUF_WORDS(BUF_WORDS)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .srs_valid, .srs_ready, .srs_out_valid, .srs_out_idx, .srs_out_plane,
    .buf_we, .buf_waddr, .buf_wdata, .buf_re, .buf_raddr, .buf_rdata,
    .apu_bus, .apu_ld_act, .apu_ld_delta, .apu_ld_idx, .apu_start_compute, .apu_act_signed,
    .apu_start_write, .apu_wr_row, .apu_busy,
    .red_mask, .red_sel, .red_slot, .res_push, .res_ready(res_in_ready), .idle(ctrl_idle));

  assign writing = |apu_writing;
  assign cmd_busy = !ctrl_idle;
  always_comb
    for (int r = 0; r < M; r++) row_writing[r] = |apu_writing[r*N +: N];
  assign busy    = (|apu_busy) || !ctrl_idle || srs_out_valid || res_valid;
endmodule
