// jitq_pkg: types and constants shared by the HBM-PIM quantization design.
//
// The PIM unit works on 256-bit DRAM words split into 16 lanes of 16 bits,
// one BF16 element per lane. A command to a pseudo-channel is a pim_cmd_t:
// host commands (ACT, PRE, RD, WR) address one bank; PIM commands are
// broadcast to every PIM unit of the pseudo-channel. Timing constants are the
// DRAM parameters of the evaluated HBM3 stack (tRP = 15 ns, tRAS = 33 ns,
// tCCDL = 3.33 ns) converted to cycles of a 2.4 GHz command clock, the clock
// implied by 4.8 Gb/s per pin at double data rate; the clock is this
// design's assumption.
package jitq_pkg;

  localparam int unsigned LANES      = 16;   // 256-bit SIMD word / 16-bit lanes
  localparam int unsigned LANE_W     = 16;   // BF16
  localparam int unsigned WORD_W     = LANES * LANE_W;  // 256
  localparam int unsigned NREGS      = 16;   // PIM registers per ALU
  localparam int unsigned ROW_BYTES  = 1024; // row buffer size
  localparam int unsigned COLS       = ROW_BYTES * 8 / WORD_W;  // 32 words per row

  // Field widths of a command; modules use the low bits they need.
  localparam int unsigned CMD_BANK_W = 6;    // bank index within a pseudo-channel
  localparam int unsigned CMD_ROW_W  = 14;
  localparam int unsigned CMD_COL_W  = $clog2(COLS);
  localparam int unsigned REG_W      = $clog2(NREGS);

  // DRAM timing in command-clock cycles at 2.4 GHz.
  localparam int unsigned T_RP_CYC   = 36;   // 15 ns
  localparam int unsigned T_RAS_CYC  = 80;   // 33 ns, rounded up
  localparam int unsigned T_CCDL_CYC = 8;    // 3.33 ns

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [LANE_W-1:0] lane_t;

  typedef enum logic [4:0] {
    OP_NOP     = 5'd0,
    // host commands, one bank
    OP_ACT     = 5'd1,   // open row
    OP_PRE     = 5'd2,   // close row
    OP_RD      = 5'd3,   // read word of open row onto the data bus
    OP_WR      = 5'd4,   // write word from the data bus into the open row
    // PIM commands, broadcast to all PIM units of the pseudo-channel
    OP_P_ACT   = 5'd5,   // open row in every even (odd=0) or odd (odd=1) bank
    OP_P_PRE   = 5'd6,   // close row in every even or odd bank
    OP_P_LD    = 5'd7,   // rf[dst] <= row buffer word (even or odd bank)
    OP_P_ST    = 5'd8,   // row buffer word <= rf[srca]
    OP_P_ADD   = 5'd9,   // rf[dst] <= a + b        (lane-wise, modulo 2^16)
    OP_P_SUB   = 5'd10,  // rf[dst] <= a - b
    OP_P_MAX   = 5'd11,  // rf[dst] <= max(a, b)    (unsigned)
    OP_P_CMP   = 5'd12,  // rf[dst] <= (a > b) ? 16'hFFFF : 16'h0000
    OP_P_AND   = 5'd13,  // rf[dst] <= a & b
    OP_P_OR    = 5'd14,  // rf[dst] <= a | b
    OP_P_SHR1  = 5'd15,  // rf[dst] <= a >> 1       (every lane)
    OP_P_LDSC  = 5'd16,  // S_i <= lane i of a      (shift counters)
    OP_P_BSHFT = 5'd17   // pim-bitSHIFT: rf[dst] <= S_i>0 ? a>>1 : a; S_i--
  } pim_op_e;

  typedef struct packed {
    pim_op_e               op;
    logic [CMD_BANK_W-1:0] bank;    // host commands: {pim unit, odd}
    logic                  odd;     // PIM commands: even (0) or odd (1) bank
    logic [CMD_ROW_W-1:0]  row;
    logic [CMD_COL_W-1:0]  col;
    logic [REG_W-1:0]      dst;
    logic [REG_W-1:0]      srca;
    logic [REG_W-1:0]      srcb;
    logic                  use_imm; // operand b is imm in every lane
    lane_t                 imm;
  } pim_cmd_t;

  function automatic logic is_pim(pim_op_e op);
    return op >= OP_P_ACT;
  endfunction

  // Commands that use a column slot of the pseudo-channel (tCCDL apart).
  function automatic logic is_column(pim_op_e op);
    return op == OP_RD || op == OP_WR || op >= OP_P_LD;
  endfunction

  function automatic logic is_alu(pim_op_e op);
    return op >= OP_P_ADD;
  endfunction

endpackage
