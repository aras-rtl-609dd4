// aras_pkg: constants and types shared by the ARAS ReRAM accelerator RTL.
//
// Sizes follow the accelerator configuration evaluated for ARAS: 96 PEs of
// 6x4 APUs, 128x128 crossbars of 2-bit cells, 8-bit weights and activations,
// 16 six-bit ADCs per APU, 1.5 KB PE buffers, 96-cycle crossbar compute and
// 768000-cycle crossbar write. The 128-bit datapath width is the one printed
// on the PE block diagram. Everything else here (flit and instruction
// formats, delta encoding, partial-sum widths) is this design's own choice.
package aras_pkg;

  // ---------------- array geometry ----------------
  localparam int XBAR_ROWS   = 128;
  localparam int XBAR_COLS   = 128;
  localparam int CELL_BITS   = 2;
  localparam int W_BITS      = 8;
  localparam int A_BITS      = 8;
  localparam int CELLS_PER_W = W_BITS / CELL_BITS;          // 4
  localparam int W_PER_XBAR  = XBAR_COLS / CELLS_PER_W;     // 32 kernels per APU
  localparam int N_ADC       = 16;
  localparam int ADC_BITS    = 6;
  localparam int ADC_STEPS   = XBAR_COLS / N_ADC;           // 8 conversions per bit
  localparam int COMP_LAT    = 96;                          // cycles per window
  localparam int WRITE_LAT   = 768000;                      // cycles per full crossbar
  localparam int MAX_PULSES  = (1 << CELL_BITS) - 1;        // 3
  // one pulse period: WRITE_LAT = ROWS * 2 phases * MAX_PULSES * PULSE_CYCLES
  localparam int PULSE_CYCLES = WRITE_LAT / (XBAR_ROWS * 2 * MAX_PULSES); // 1000
  localparam int COLSUM_W    = $clog2(XBAR_ROWS * MAX_PULSES + 1);        // 9

  // ---------------- chip organisation ----------------
  localparam int N_PE       = 96;
  localparam int APU_M      = 6;     // rows of APUs (= buffers) per PE
  localparam int APU_N      = 4;     // columns of APUs per PE
  localparam int BUS_W      = 128;   // datapath width (bits)
  localparam int PE_BUF_WORDS = 1536 * 8 / BUS_W;   // 1.5 KB = 96 words
  localparam int DELTA_W    = 4;     // one cell delta: {dec, mag[2:0]}
  localparam int DELTA_BEATS = XBAR_COLS * DELTA_W / BUS_W;  // 4 words per row
  localparam int ACTS_PER_WORD = BUS_W / A_BITS;              // 16

  localparam int PSUM_W = 32;        // signed partial sums
  localparam int ACC_W  = 32;
  localparam int SUMS_PER_FLIT = BUS_W / PSUM_W;              // 4
  localparam int RES_FLITS = APU_N * W_PER_XBAR / SUMS_PER_FLIT; // 32 per reduction

  typedef logic signed [PSUM_W-1:0] psum_t;

  // ---------------- PE command flits carried by the NoC ----------------
  typedef enum logic [2:0] {
    K_DELTA   = 3'd0,   // data word -> buffer[row][addr], shift registers bypassed
    K_ACT     = 3'd1,   // 16 activations -> shift register set, planes -> buffer[row][addr..]
    K_WRITE   = 3'd2,   // APU(row,col): take 4 delta words from buffer[row][addr..], write xbar row aux
    K_COMPUTE = 3'd3,   // APU row `row`: load 8 planes from buffer[row][addr..], compute one window
    K_REDUCE  = 3'd4    // add APU rows in mask aux[M-1:0], send 32 result flits tagged addr..
  } pe_kind_e;

  typedef struct packed {
    pe_kind_e    kind;
    logic [6:0]  pe;
    logic [2:0]  row;
    logic [1:0]  col;
    logic [7:0]  addr;
    logic [7:0]  aux;
    logic        act_signed;   // K_COMPUTE: activations are two's complement
    logic [BUS_W-1:0] data;
  } pe_flit_t;

  // result flit from a PE to the accumulation unit
  typedef struct packed {
    logic [7:0]  slot;
    logic [BUS_W-1:0] data;    // SUMS_PER_FLIT signed sums, lane 0 in the LSBs
  } res_flit_t;

  // ---------------- instructions produced by the offline scheduler ----------------
  typedef enum logic [3:0] {
    I_NOP     = 4'd0,
    I_BANKS   = 4'd1,   // Gbuffer bank enable mask = aux (adaptive bank selection)
    I_LOAD_GB = 4'd2,   // len words main memory[mm_addr] -> Gbuffer[gb_addr]
    I_STORE   = 4'd3,   // len words Gbuffer[gb_addr] -> main memory[mm_addr]
    I_WROW    = 4'd4,   // deltas of one crossbar row: MM[mm_addr..+3] -> PE buffer, then write
    I_COMP    = 4'd5,   // 128 activations Gbuffer[gb_addr..+7] -> PE row, then compute
    I_REDUCE  = 4'd6,   // reduce APU rows of a PE into ACC slots starting at slot
    I_FLUSH   = 4'd7,   // len ACC slots -> SFU -> Gbuffer[gb_addr..], slots cleared
    I_SFU_CFG = 4'd8,   // SFU: aux = {relu, pool_log2[1:0]}, mm_addr[28:0] = {bias[15:0], mult[7:0], shift[4:0]}
    I_WAIT_W  = 4'd9,   // wait until no APU is writing ("written weights?")
    I_END     = 4'd15
  } op_e;

  typedef struct packed {
    op_e         op;
    logic [6:0]  pe;
    logic [2:0]  row;
    logic [1:0]  col;
    logic [7:0]  addr;      // PE buffer address / ACC slot
    logic [15:0] aux;
    logic        act_signed;
    logic [31:0] mm_addr;
    logic [19:0] gb_addr;
    logic [19:0] len;
  } instr_t;

  // ---------------- Gbuffer ----------------
  localparam int GB_BANKS = 10;
  localparam int GB_ADDR_W = 20;      // linear word address; banks are laid out in order
endpackage
