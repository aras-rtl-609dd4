// aras_controller: the chip controller of ARAS.
//
// ARAS is scheduled offline: a scheduler decides bank allocation, which
// crossbar rows to write when (overlapping the writes of later layers with the
// computation of the current one), replication factors and weight offsets,
// and emits a list of instructions. This controller executes that list, one
// instruction at a time, in order (instr_t, valid/ready):
//  I_BANKS    set the Gbuffer bank enables (adaptive bank selection).
//  I_SFU_CFG  set the SFU's relu/pool/bias/scale for the next flushes.
//  I_LOAD_GB  main memory -> Gbuffer, len words (network inputs).
//  I_STORE    Gbuffer -> main memory, len words (network outputs).
//  I_WROW     fetch the 4 delta words of one crossbar row from main memory,
//             send them to the PE buffer (K_DELTA) and start the row write
//             (K_WRITE). The controller does not wait for the write.
//  I_COMP     send 128 activations (8 Gbuffer words) to an APU row through
//             the PE's shift registers (K_ACT) and start it (K_COMPUTE).
//  I_REDUCE   ask a PE to add its APU rows and send the results to the ACC
//             slots (K_REDUCE); N*32/4 result flits (32 with N = 4) are
//             then expected.
//  I_FLUSH    once every expected result flit has reached the ACC, read len
//             slots through the SFU and store the 8-bit results, 16 per word,
//             in the Gbuffer (next layer's input).
//  I_WAIT_W   wait until APU row `row` of PE `pe` has finished writing (the
//             scheduler's "written weights?" synchronisation).
//  I_END      raise done and stop.
// The instruction set and encoding are this design's own; the paper describes
// the two scheduling procedures that produce the list but not its format.
// Status outputs count executed instructions and the cycles spent waiting on
// weight writes.
module aras_controller
  import aras_pkg::*;
#(
  parameter int NP = 96,
  parameter int M  = 6,
  parameter int N  = 4,
  parameter int NB = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction stream
  input  logic              instr_valid,
  output logic              instr_ready,
  input  instr_t            instr,
  // Ext-IO
  output logic              x_cmd_valid,
  input  logic              x_cmd_ready,
  output logic              x_cmd_we,
  output logic [31:0]       x_cmd_addr,
  output logic [19:0]       x_cmd_len,
  input  logic              x_rd_valid,
  output logic              x_rd_ready,
  input  logic [BUS_W-1:0]  x_rd_data,
  output logic              x_wr_valid,
  input  logic              x_wr_ready,
  output logic [BUS_W-1:0]  x_wr_data,
  // Gbuffer
  output logic [NB-1:0]     bank_en,
  output logic              gb_en,
  output logic              gb_we,
  output logic [GB_ADDR_W-1:0] gb_addr,
  output logic [BUS_W-1:0]  gb_wdata,
  input  logic [BUS_W-1:0]  gb_rdata,
  // NoC downstream
  output logic              f_valid,
  input  logic              f_ready,
  output pe_flit_t          flit,
  input  logic              noc_idle,
  // ACC and SFU
  input  logic              acc_rx,
  output logic              acc_rd_en,
  output logic [7:0]        acc_rd_slot,
  output logic              sfu_relu,
  output logic [1:0]        sfu_pool,
  output logic signed [15:0] sfu_bias,
  output logic [7:0]        sfu_mult,
  output logic [4:0]        sfu_shift,
  output logic              sfu_in_valid,
  output logic              sfu_flush,
  input  logic              sfu_out_valid,
  input  logic [31:0]       sfu_out_data,
  // PE status
  input  logic [NP-1:0]     pe_cmd_busy,
  input  logic [NP*M-1:0]   pe_row_writing,
  // status
  output logic              done,
  output logic [31:0]       n_instr,
  output logic [31:0]       wait_w_cycles
);
  typedef enum logic [4:0] {
    S_FETCH, S_LOADGB, S_ST_RD, S_ST_WAIT, S_ST_PUSH,
    S_WROW_CMD, S_WROW_DATA, S_WROW_GO,
    S_COMP_RD, S_COMP_WAIT, S_COMP_SEND, S_COMP_GO,
    S_REDUCE, S_FL_WAIT, S_FL_RUN, S_FL_TAIL, S_WAITW, S_XCMD, S_END
  } cstate_e;

  cstate_e st, after_x;
  instr_t  cur;
  logic [19:0] k;            // word / slot counter
  logic [BUS_W-1:0] hold;
  logic [15:0] outstanding;  // result flits still expected at the ACC
  logic [1:0]  pk;           // packing position of SFU results
  logic [BUS_W-1:0] pack;
  logic [GB_ADDR_W-1:0] wptr;
  logic [2:0]  drain;
  logic        rd_pend;      // ACC read issued last cycle

  // ---------------- combinational outputs ----------------
  logic reduce_fire;
  always_comb begin
    instr_ready = (st == S_FETCH);
    x_cmd_valid = (st == S_XCMD);
    x_cmd_we    = (cur.op == I_STORE);
    x_cmd_addr  = cur.mm_addr;
    x_cmd_len   = (cur.op == I_WROW) ? 20'(DELTA_BEATS) : cur.len;
    x_rd_ready  = 1'b0;
    x_wr_valid  = (st == S_ST_PUSH);
    x_wr_data   = hold;
    gb_en = 1'b0; gb_we = 1'b0; gb_addr = cur.gb_addr + k; gb_wdata = x_rd_data;
    f_valid = 1'b0;
    flit = '0;
    flit.pe  = cur.pe;
    flit.row = cur.row;
    flit.col = cur.col;
    flit.act_signed = cur.act_signed;
    acc_rd_en = 1'b0;
    acc_rd_slot = cur.addr + 8'(k);
    sfu_in_valid = rd_pend;
    sfu_flush = (st == S_FL_WAIT);
    reduce_fire = 1'b0;
    case (st)
      S_LOADGB: begin
        x_rd_ready = 1'b1;
        gb_en = x_rd_valid; gb_we = 1'b1;
      end
      S_ST_RD: gb_en = 1'b1;
      S_WROW_DATA: begin
        f_valid = x_rd_valid; x_rd_ready = f_ready;
        flit.kind = K_DELTA; flit.addr = cur.addr + 8'(k); flit.data = x_rd_data;
      end
      S_WROW_GO: begin
        f_valid = 1'b1; flit.kind = K_WRITE; flit.addr = cur.addr; flit.aux = cur.aux[7:0];
      end
      S_COMP_RD: gb_en = 1'b1;
      S_COMP_SEND: begin
        f_valid = 1'b1; flit.kind = K_ACT; flit.addr = cur.addr; flit.data = hold;
      end
      S_COMP_GO: begin
        f_valid = 1'b1; flit.kind = K_COMPUTE; flit.addr = cur.addr;
      end
      S_REDUCE: begin
        f_valid = 1'b1; flit.kind = K_REDUCE; flit.addr = cur.addr; flit.aux = cur.aux[7:0];
        reduce_fire = f_ready;
      end
      S_FL_RUN: acc_rd_en = (k != cur.len);
      default: ;
    endcase
    // packed SFU results go to the Gbuffer
    if ((st == S_FL_RUN || st == S_FL_TAIL) && sfu_out_valid && pk == 2'd3) begin
      gb_en = 1'b1; gb_we = 1'b1; gb_addr = wptr;
      gb_wdata = {sfu_out_data, pack[95:0]};
    end else if (st == S_FL_TAIL && drain == 0 && pk != 0) begin
      gb_en = 1'b1; gb_we = 1'b1; gb_addr = wptr; gb_wdata = pack;
    end
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_FETCH; after_x <= S_FETCH; cur <= '0; k <= '0; hold <= '0;
      outstanding <= '0; pk <= '0; pack <= '0; wptr <= '0; drain <= '0; rd_pend <= 1'b0;
      bank_en <= '1; sfu_relu <= 1'b1; sfu_pool <= '0; sfu_bias <= '0; sfu_mult <= 8'd1;
      sfu_shift <= '0; done <= 1'b0; n_instr <= '0; wait_w_cycles <= '0;
    end else begin
      outstanding <= outstanding + (reduce_fire ? 16'(N * W_PER_XBAR / SUMS_PER_FLIT) : 16'd0) - (acc_rx ? 16'd1 : 16'd0);
      rd_pend <= acc_rd_en;
      if ((st == S_FL_RUN || st == S_FL_TAIL) && sfu_out_valid) begin
        pack[32*pk +: 32] <= sfu_out_data;
        pk <= pk + 1'b1;
        if (pk == 2'd3) begin wptr <= wptr + 1'b1; pack <= '0; end
      end
      case (st)
        S_FETCH: if (instr_valid) begin
          cur <= instr; k <= '0;
          n_instr <= n_instr + 1'b1;
          case (instr.op)
            I_BANKS:   bank_en <= instr.aux[NB-1:0];
            I_SFU_CFG: begin
              sfu_relu <= instr.aux[2]; sfu_pool <= instr.aux[1:0];
              sfu_bias <= signed'(instr.mm_addr[28:13]); sfu_mult <= instr.mm_addr[12:5];
              sfu_shift <= instr.mm_addr[4:0];
            end
            I_LOAD_GB: begin st <= S_XCMD; after_x <= S_LOADGB; end
            I_STORE:   begin st <= S_XCMD; after_x <= S_ST_RD; end
            I_WROW:    begin st <= S_XCMD; after_x <= S_WROW_DATA; end
            I_COMP:    st <= S_COMP_RD;
            I_REDUCE:  st <= S_REDUCE;
            I_FLUSH:   begin st <= S_FL_WAIT; wptr <= instr.gb_addr; pk <= '0; pack <= '0; end
            I_WAIT_W:  st <= S_WAITW;
            I_END:     st <= S_END;
            default: ;
          endcase
        end
        S_XCMD: if (x_cmd_ready) st <= after_x;
        S_LOADGB: if (x_rd_valid) begin
          if (k + 1'b1 == cur.len) st <= S_FETCH;
          k <= k + 1'b1;
        end
        S_ST_RD:   st <= S_ST_WAIT;
        S_ST_WAIT: begin hold <= gb_rdata; st <= S_ST_PUSH; end
        S_ST_PUSH: if (x_wr_ready) begin
          k <= k + 1'b1;
          st <= (k + 1'b1 == cur.len) ? S_FETCH : S_ST_RD;
        end
        S_WROW_DATA: if (x_rd_valid && f_ready) begin
          k <= k + 1'b1;
          if (k + 1'b1 == 20'(DELTA_BEATS)) st <= S_WROW_GO;
        end
        S_WROW_GO: if (f_ready) st <= S_FETCH;
        S_COMP_RD:   st <= S_COMP_WAIT;
        S_COMP_WAIT: begin hold <= gb_rdata; st <= S_COMP_SEND; end
        S_COMP_SEND: if (f_ready) begin
          k <= k + 1'b1;
          st <= (k + 1'b1 == 20'(A_BITS)) ? S_COMP_GO : S_COMP_RD;
        end
        S_COMP_GO: if (f_ready) st <= S_FETCH;
        S_REDUCE:  if (f_ready) st <= S_FETCH;
        S_FL_WAIT: if (outstanding == 0 && noc_idle) st <= S_FL_RUN;
        S_FL_RUN: begin
          if (k == cur.len) begin st <= S_FL_TAIL; drain <= 3'd3; end
          else k <= k + 1'b1;
        end
        S_FL_TAIL: begin
          if (drain != 0) drain <= drain - 1'b1;
          else begin
            if (pk != 0) begin pk <= '0; pack <= '0; wptr <= wptr + 1'b1; end
            st <= S_FETCH;
          end
        end
        S_WAITW: begin
          if (noc_idle && !pe_cmd_busy[cur.pe] && !pe_row_writing[int'(cur.pe)*M + int'(cur.row)])
            st <= S_FETCH;
          else wait_w_cycles <= wait_w_cycles + 1'b1;
        end
        S_END: done <= 1'b1;
        default: st <= S_FETCH;
      endcase
    end
  end
endmodule
