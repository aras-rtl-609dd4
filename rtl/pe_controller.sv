// pe_controller: command decoder and sequencer of a PE.
//
// Consumes one command flit at a time from the NoC (valid/ready):
//  K_DELTA   the data word is stored directly in buffer[row][addr]; the
//            activation shift registers are bypassed (write/compute mux in
//            the "write" position).
//  K_ACT     the word (16 activations) goes to the shared shift register set;
//            after the 8th word of a window the 8 bit-planes are stored in
//            buffer[row][addr..addr+7], addr and row taken from the first word.
//  K_WRITE   waits until APU(row,col) is idle, moves the 4 delta words at
//            buffer[row][addr..] into its writing registers and starts the
//            write of crossbar row aux[6:0]. The write then runs on its own, so
//            several APUs of the PE can be writing while others compute.
//  K_COMPUTE waits until every APU of the row is idle, broadcasts the 8 planes
//            at buffer[row][addr..] to their input registers and starts them.
//  K_REDUCE  waits until the APU rows in aux[M-1:0] are idle, then pushes
//            NFL = N*32/4 result words (add array over those rows) into the output
//            buffer, tagged with ACC slots addr, addr+1, ...
// The command set and the flit format are this design's own; the paper gives
// the dataflow (bypass and store deltas, send to APU, serialise and store
// activations, send to APUs, aggregate) but not the encoding.
module pe_controller
  import aras_pkg::*;
#(
  parameter int M = 6,
  parameter int N = 4,
  parameter int BUF_WORDS = 96,
  parameter int NFL = N * W_PER_XBAR / SUMS_PER_FLIT   // result flits per reduction
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command flits
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  pe_flit_t             cmd,
  // shift register set
  output logic                 srs_valid,
  input  logic                 srs_ready,
  input  logic                 srs_out_valid,
  input  logic [2:0]           srs_out_idx,
  input  logic [BUS_W-1:0]     srs_out_plane,
  // buffers
  output logic [M-1:0]         buf_we,
  output logic [$clog2(BUF_WORDS)-1:0] buf_waddr,
  output logic [BUS_W-1:0]     buf_wdata,
  output logic [M-1:0]         buf_re,
  output logic [$clog2(BUF_WORDS)-1:0] buf_raddr,
  input  logic [BUS_W-1:0]     buf_rdata [M],
  // APUs, index r*N + c
  output logic [BUS_W-1:0]     apu_bus,
  output logic [M*N-1:0]       apu_ld_act,
  output logic [M*N-1:0]       apu_ld_delta,
  output logic [2:0]           apu_ld_idx,
  output logic [M*N-1:0]       apu_start_compute,
  output logic                 apu_act_signed,
  output logic [M*N-1:0]       apu_start_write,
  output logic [6:0]           apu_wr_row,
  input  logic [M*N-1:0]       apu_busy,
  // add array and output buffer
  output logic [M-1:0]         red_mask,
  output logic [$clog2(NFL)-1:0] red_sel,
  output logic [7:0]           red_slot,
  output logic                 res_push,
  input  logic                 res_ready,
  output logic                 idle
);
  localparam int BW = $clog2(BUF_WORDS);
  typedef enum logic [2:0] {P_IDLE, P_XFER, P_START, P_REDUCE} pstate_e;
  pstate_e st;
  pe_flit_t cur;
  logic [3:0] i;          // transfer beat counter
  logic [3:0] n_beats;
  logic [2:0] act_row;
  logic [BW-1:0] act_addr;
  logic act_first;
  logic [$clog2(NFL):0] ridx;
  logic xfer_valid;       // read data of beat i-1 is on buf_rdata
  logic [2:0] xfer_idx;

  // APU row / single APU status
  logic [M-1:0] row_busy;
  always_comb
    for (int r = 0; r < M; r++) row_busy[r] = |apu_busy[r*N +: N];

  logic srs_emit;
  assign srs_emit = srs_out_valid;

  // accept a command in IDLE when its resources are free
  logic can_accept;
  always_comb begin
    can_accept = 1'b0;
    case (cmd.kind)
      K_DELTA:   can_accept = !srs_emit;
      K_ACT:     can_accept = srs_ready;
      K_WRITE:   can_accept = !apu_busy[int'(cmd.row)*N + int'(cmd.col)];
      K_COMPUTE: can_accept = !row_busy[cmd.row];
      K_REDUCE:  can_accept = !(|(row_busy & cmd.aux[M-1:0]));
      default:   can_accept = 1'b1;
    endcase
  end
  assign cmd_ready = (st == P_IDLE) && can_accept;
  assign idle      = (st == P_IDLE);
  wire accept = cmd_valid && cmd_ready;

  assign srs_valid = accept && (cmd.kind == K_ACT);

  // buffer write port: shift register planes or bypassed delta words
  always_comb begin
    buf_we    = '0;
    buf_waddr = '0;
    buf_wdata = '0;
    if (srs_emit) begin
      buf_we[act_row] = 1'b1;
      buf_waddr = act_addr + BW'(srs_out_idx);
      buf_wdata = srs_out_plane;
    end else if (accept && cmd.kind == K_DELTA) begin
      buf_we[cmd.row] = 1'b1;
      buf_waddr = BW'(cmd.addr);
      buf_wdata = cmd.data;
    end
  end

  // buffer read port and APU loads during P_XFER
  always_comb begin
    buf_re    = '0;
    buf_raddr = BW'(cur.addr) + BW'(i);
    if (st == P_XFER && i < n_beats) buf_re[cur.row] = 1'b1;
    apu_bus      = buf_rdata[cur.row];
    apu_ld_idx   = xfer_idx;
    apu_ld_act   = '0;
    apu_ld_delta = '0;
    if (xfer_valid) begin
      if (cur.kind == K_COMPUTE) apu_ld_act[int'(cur.row)*N +: N] = '1;
      else apu_ld_delta[int'(cur.row)*N + int'(cur.col)] = 1'b1;
    end
    apu_start_compute = '0;
    apu_start_write   = '0;
    if (st == P_START) begin
      if (cur.kind == K_COMPUTE) apu_start_compute[int'(cur.row)*N +: N] = '1;
      else apu_start_write[int'(cur.row)*N + int'(cur.col)] = 1'b1;
    end
    apu_act_signed = cur.act_signed;
    apu_wr_row     = cur.aux[6:0];
    red_mask = cur.aux[M-1:0];
    red_sel  = ridx[$clog2(NFL)-1:0];
    red_slot = cur.addr + 8'(ridx);
    res_push = (st == P_REDUCE) && res_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; cur <= '0; i <= '0; n_beats <= '0; act_row <= '0; act_addr <= '0;
      act_first <= 1'b1; ridx <= '0; xfer_valid <= 1'b0; xfer_idx <= '0;
    end else begin
      xfer_valid <= (st == P_XFER) && (i < n_beats);
      xfer_idx   <= i[2:0];
      case (st)
        P_IDLE: if (accept) begin
          cur <= cmd;
          i <= '0;
          ridx <= '0;
          case (cmd.kind)
            K_ACT: begin
              if (act_first) begin act_row <= cmd.row; act_addr <= BW'(cmd.addr); end
              act_first <= 1'b0;
            end
            K_WRITE:   begin st <= P_XFER; n_beats <= 4'(DELTA_BEATS); end
            K_COMPUTE: begin st <= P_XFER; n_beats <= 4'(A_BITS); end
            K_REDUCE:  st <= P_REDUCE;
            default: ;
          endcase
        end
        P_XFER: begin
          if (i == n_beats) st <= P_START;   // last load happens this cycle
          else i <= i + 1'b1;
        end
        P_START: st <= P_IDLE;
        P_REDUCE: if (res_ready) begin
          if (ridx == ($clog2(NFL)+1)'(NFL - 1)) st <= P_IDLE;
          ridx <= ridx + 1'b1;
        end
        default: st <= P_IDLE;
      endcase
      // the shift register set has emitted the last plane: next K_ACT opens a window
      if (srs_emit && srs_out_idx == 3'(A_BITS - 1)) act_first <= 1'b1;
    end
  end
endmodule
