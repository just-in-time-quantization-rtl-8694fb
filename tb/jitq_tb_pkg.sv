// jitq_tb_pkg: test support for the HBM-PIM quantization design.
//
// It plays the part of the GPU. kernel_gen builds the command streams a
// PIM quantization kernel and a host loader would send to one
// pseudo-channel. mx_ref computes the expected MX result directly from the
// BF16 inputs, independently of the PIM command sequence.
//
// Data placement per PIM unit (strided, tiled): lane i of every word holds
// tile i, so 16 tiles share one unit. Element e = 16*r + c of a 16x16 tile
// (row-major) is linear word L = e; linear word L lives in the even bank
// when bit 7 of L is 0 and in the odd bank otherwise, at DRAM row
// 4*(L/256) + L[6:5] and column L[4:0]. So a tile's first 128 elements are in
// the even bank and the other 128 in the odd bank.
//
// Output of one MX block: 17 words at base + 17*blk. Word j (0..15) holds,
// per lane, element j as {sign, d, 7'b0, m-bit magnitude} with d the pair's
// 1-bit sub-exponent; word 16 holds the shared 8-bit exponent in the BF16
// exponent field (bits 14:7).
//
// A unit can hold several such 16-tile groups: group g uses linear words
// 1024*g .. 1024*g + 1023 (DRAM rows 16*g .. 16*g + 15 of each bank).
package jitq_tb_pkg;
  import jitq_pkg::*;

  localparam int OUT_ROWQ = 256;          // linear base of row-quantized output
  localparam int OUT_COLQ = 256 + 16*17;  // linear base of column-quantized output
  localparam int GROUP_WORDS = 1024;      // linear words per 16-tile group

  function automatic int l_odd(int L); return (L >> 7) & 1; endfunction
  function automatic int l_row(int L); return 4 * (L >> 8) + ((L >> 5) & 3); endfunction
  function automatic int l_col(int L); return L & 31; endfunction

  // Pseudo-random BF16 test value for (pseudo-channel, unit, lane, element).
  // Exponents cluster in 118..133 so shifts vary from 0 to 15; one value in
  // 16 has a zero exponent (zero or denormal), which needs shifts over 100.
  function automatic logic [15:0] bf16_gen(int p, int u, int lane, int e, int seed);
    logic [31:0] h;
    logic [7:0]  ex;
    h = 32'(p) * 32'h9E3779B1 ^ 32'(u) * 32'h85EBCA6B ^ 32'(lane) * 32'hC2B2AE35
        ^ 32'(e) * 32'h27D4EB2F ^ 32'(seed) * 32'h165667B1;
    h = h ^ (h >> 15); h = h * 32'h2C1B3C6D; h = h ^ (h >> 12); h = h * 32'h297A2D39; h = h ^ (h >> 15);
    ex = (h[11:8] == 4'd0) ? 8'd0 : 8'd118 + 8'(h[15:12]);
    return {h[16], ex, h[6:0]};
  endfunction

  // Reference MX quantization of one block of 16 BF16 values, m mantissa bits.
  // Returns the 17 output words of one lane as laid out above.
  function automatic void mx_ref(input logic [15:0] x[16], input int m, output logic [15:0] y[17]);
    int shared_e, e[16], mk, d, s;
    logic [7:0] sig;
    logic [15:0] mag;
    shared_e = 0;
    for (int j = 0; j < 16; j++) begin
      e[j] = int'(x[j][14:7]);
      if (e[j] > shared_e) shared_e = e[j];
    end
    for (int k = 0; k < 8; k++) begin
      mk = (e[2*k] > e[2*k+1]) ? e[2*k] : e[2*k+1];
      d  = (shared_e > mk) ? 1 : 0;
      for (int t = 0; t < 2; t++) begin
        int j = 2*k + t;
        s   = shared_e - d - e[j];
        sig = {(e[j] != 0), x[j][6:0]};
        mag = (s >= 8) ? 16'd0 : 16'((sig >> s) >> (8 - m));
        y[j] = {x[j][15], 1'(d), 14'd0} | mag;
      end
    end
    y[16] = 16'(shared_e) << 7;
  endfunction

  // Expected output word (all 16 lanes) at linear address L of unit u.
  // colq selects the column-quantized region.
  function automatic word_t expected_word(int p, int u, int L, int m, int seed);
    word_t w;
    int base, blk, j, g, lr;
    logic [15:0] x[16], y[17];
    g    = L / GROUP_WORDS;
    lr   = L % GROUP_WORDS;
    base = (lr >= OUT_COLQ) ? OUT_COLQ : OUT_ROWQ;
    blk  = (lr - base) / 17;
    j    = (lr - base) % 17;
    for (int lane = 0; lane < LANES; lane++) begin
      for (int t = 0; t < 16; t++)
        x[t] = bf16_gen(p, u, lane, GROUP_WORDS*g + ((base == OUT_ROWQ) ? 16*blk + t : 16*t + blk), seed);
      mx_ref(x, m, y);
      w[16*lane +: 16] = y[j];
    end
    return w;
  endfunction

  function automatic word_t input_word(int p, int u, int L, int seed);
    word_t w;
    for (int lane = 0; lane < LANES; lane++) w[16*lane +: 16] = bf16_gen(p, u, lane, L, seed);
    return w;
  endfunction

  // Builds command streams for one pseudo-channel.
  class kernel_gen;
    pim_cmd_t q[$];
    int       open_row[2];
    int       n_bshft;
    int       n_cmd_alu;

    function new();
      open_row[0] = -1; open_row[1] = -1;
      n_bshft = 0; n_cmd_alu = 0;
    endfunction

    function void emit(pim_op_e op, int bank = 0, int odd = 0, int row = 0, int col = 0,
                       int dst = 0, int srca = 0, int srcb = 0, bit use_imm = 0, int imm = 0);
      pim_cmd_t c;
      c = '0;
      c.op = op; c.bank = CMD_BANK_W'(bank); c.odd = 1'(odd); c.row = CMD_ROW_W'(row);
      c.col = CMD_COL_W'(col); c.dst = REG_W'(dst); c.srca = REG_W'(srca); c.srcb = REG_W'(srcb);
      c.use_imm = use_imm; c.imm = 16'(imm);
      q.push_back(c);
      if (is_alu(op)) n_cmd_alu++;
      if (op == OP_P_BSHFT) n_bshft++;
    endfunction

    // Open `row` in all even (odd=0) or odd (odd=1) banks, closing another.
    function void ensure(int odd, int row);
      if (open_row[odd] == row) return;
      if (open_row[odd] >= 0) emit(OP_P_PRE, .odd(odd));
      emit(OP_P_ACT, .odd(odd), .row(row));
      open_row[odd] = row;
    endfunction

    function void close_all();
      for (int o = 0; o < 2; o++) if (open_row[o] >= 0) begin
        emit(OP_P_PRE, .odd(o)); open_row[o] = -1;
      end
    endfunction

    function void ld(int dst, int L);
      ensure(l_odd(L), l_row(L));
      emit(OP_P_LD, .odd(l_odd(L)), .col(l_col(L)), .dst(dst));
    endfunction

    function void st(int src, int L);
      ensure(l_odd(L), l_row(L));
      emit(OP_P_ST, .odd(l_odd(L)), .col(l_col(L)), .srca(src));
    endfunction

    function void alu(pim_op_e op, int dst, int a, int b);
      emit(op, .dst(dst), .srca(a), .srcb(b));
    endfunction

    function void alui(pim_op_e op, int dst, int a, int imm);
      emit(op, .dst(dst), .srca(a), .use_imm(1), .imm(imm));
    endfunction

    // Quantize element in register x (exponent field in register e) and store it.
    // Registers: R0 shared exponent field, R6 d at bit 14, R7 d at bit 0.
    function void elem(int x, int e, int out_l, int m);
      alu(OP_P_SUB, 8, 0, e);                          // (shared - e) << 7
      for (int i = 0; i < 7; i++) alu(OP_P_SHR1, 8, 8, 0);
      alu(OP_P_SUB, 8, 8, 7);                          // shift amount S
      alu(OP_P_LDSC, 0, 8, 0);
      alui(OP_P_AND, 9, x, 16'h007F);                  // mantissa
      alui(OP_P_CMP, 10, e, 0);                        // exponent != 0 mask
      alui(OP_P_AND, 10, 10, 16'h0080);                // implicit one
      alu(OP_P_OR, 9, 9, 10);
      for (int i = 0; i < 8; i++) alu(OP_P_BSHFT, 9, 9, 0);  // align to S
      for (int i = 0; i < 8 - m; i++) alu(OP_P_SHR1, 9, 9, 0); // keep m bits
      alui(OP_P_AND, 11, x, 16'h8000);                 // sign
      alu(OP_P_OR, 9, 9, 11);
      alu(OP_P_OR, 9, 9, 6);                           // sub-exponent bit
      st(9, out_l);
    endfunction

    // One MX block of 16 elements at linear addresses a[], output at out_base.
    function void quant_block(int a[16], int out_base, int m);
      ld(0, a[0]);
      alui(OP_P_AND, 0, 0, 16'h7F80);
      for (int j = 1; j < 16; j++) begin               // level-1 exponent: pim-MAX
        ld(1, a[j]);
        alui(OP_P_AND, 1, 1, 16'h7F80);
        alu(OP_P_MAX, 0, 0, 1);
      end
      st(0, out_base + 16);
      for (int k = 0; k < 8; k++) begin                // level-2 exponent per pair
        ld(1, a[2*k]);
        alui(OP_P_AND, 2, 1, 16'h7F80);
        ld(3, a[2*k+1]);
        alui(OP_P_AND, 4, 3, 16'h7F80);
        alu(OP_P_MAX, 5, 2, 4);
        alu(OP_P_CMP, 6, 0, 5);                        // d: shared > pair max
        alui(OP_P_AND, 7, 6, 16'h0001);
        alui(OP_P_AND, 6, 6, 16'h4000);
        elem(1, 2, out_base + 2*k, m);
        elem(3, 4, out_base + 2*k + 1, m);
      end
    endfunction

    // Row (colq=0) or column (colq=1) quantization of blocks [b0, b1).
    function void quant_tiles(bit colq, int m, int b0 = 0, int b1 = 16, int g = 0);
      int a[16];
      for (int blk = b0; blk < b1; blk++) begin
        for (int t = 0; t < 16; t++) a[t] = GROUP_WORDS*g + (colq ? 16*t + blk : 16*blk + t);
        quant_block(a, GROUP_WORDS*g + (colq ? OUT_COLQ : OUT_ROWQ) + 17*blk, m);
      end
      close_all();
    endfunction

    // Host writes of the 256 input words of every unit; data is supplied by
    // the driver from the command's address.
    function void host_load(int units, int g = 0);
      for (int u = 0; u < units; u++)
        for (int L = GROUP_WORDS*g; L < GROUP_WORDS*g + 256; L += 32) begin
          emit(OP_ACT, .bank(2*u + l_odd(L)), .row(l_row(L)));
          for (int c = 0; c < 32; c++)
            emit(OP_WR, .bank(2*u + l_odd(L)), .row(l_row(L)), .col(c));
          emit(OP_PRE, .bank(2*u + l_odd(L)));
        end
    endfunction

    // Host reads of the output words [l0, l1) of every unit.
    function void host_read(int units, int l0, int l1);
      for (int u = 0; u < units; u++) begin
        int cur; cur = -1;
        for (int L = l0; L < l1; L++) begin
          int key; key = 2*(l_row(L)) + l_odd(L);
          if (key != cur) begin
            if (cur >= 0) emit(OP_PRE, .bank(2*u + (cur & 1)));
            emit(OP_ACT, .bank(2*u + l_odd(L)), .row(l_row(L)));
            cur = key;
          end
          emit(OP_RD, .bank(2*u + l_odd(L)), .row(l_row(L)), .col(l_col(L)));
        end
        if (cur >= 0) emit(OP_PRE, .bank(2*u + (cur & 1)));
      end
    endfunction
  endclass

  // Linear address of a host command (bank, row, col) within its unit.
  function automatic int cmd_linear(pim_cmd_t c);
    int r; r = int'(c.row);
    return 256 * (r / 4) + 128 * int'(c.bank[0]) + 32 * (r % 4) + int'(c.col);
  endfunction
endpackage
