// tb_pim_pch: self-checking test of one pseudo-channel with PIM units.
//
// The test writes distinct data into every bank with host commands, then
// broadcasts a PIM sequence (open a row in all even and all odd banks, load
// one word from each, ADD and MAX them, store the results back to both
// banks). Host reads of the stored words must show, for every PIM unit, the
// result computed from that unit's own banks. Also checks the one-cycle read
// latency and the protocol error flag. Commands are applied directly, one
// per cycle; DRAM timing is the scheduler's job and is not needed here.
module tb_pim_pch;
  import jitq_pkg::*;
  localparam int UNITS = 3, ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, rdata_valid, err;
  pim_cmd_t cmd;
  word_t wdata, rdata;
  logic [UNITS-1:0][LANES-1:0] shift_active;
  pim_pch #(.UNITS(UNITS), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;

  function automatic word_t pat(int bank, int row, int col);
    word_t v;
    for (int i = 0; i < 16; i++) v[16*i +: 16] = 16'(bank * 4099 + row * 577 + col * 31 + i * 1013);
    return v;
  endfunction

  task automatic issue(pim_op_e op, int bank = 0, int odd = 0, int row = 0, int col = 0,
                       int dst = 0, int a = 0, int b = 0, word_t d = '0);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.bank = CMD_BANK_W'(bank); cmd.odd = 1'(odd); cmd.row = CMD_ROW_W'(row);
    cmd.col = CMD_COL_W'(col); cmd.dst = REG_W'(dst); cmd.srca = REG_W'(a); cmd.srcb = REG_W'(b);
    cmd_valid = 1; wdata = d;
    @(posedge clk); #1;
    cmd_valid = 0;
  endtask

  task automatic host_read_check(int bank, int row, int col, word_t e);
    issue(OP_ACT, bank, 0, row);
    @(negedge clk);
    cmd = '0; cmd.op = OP_RD; cmd.bank = CMD_BANK_W'(bank); cmd.col = CMD_COL_W'(col); cmd_valid = 1;
    @(posedge clk); #1; cmd_valid = 0;
    checks++;
    if (!rdata_valid || rdata !== e) begin
      failures++; $display("FAIL: bank %0d row %0d col %0d: valid %b %h exp %h", bank, row, col, rdata_valid, rdata, e);
    end
    @(posedge clk); #1;
    checks++;
    if (rdata_valid) begin failures++; $display("FAIL: rdata_valid longer than one cycle"); end
    issue(OP_PRE, bank);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = '0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2*UNITS; b++) begin
      issue(OP_ACT, b, 0, 2);
      for (int c = 0; c < 4; c++) issue(OP_WR, b, 0, 2, c, 0, 0, 0, pat(b, 2, c));
      issue(OP_PRE, b);
    end
    for (int b = 0; b < 2*UNITS; b++) host_read_check(b, 2, 1, pat(b, 2, 1));
    // PIM broadcast
    issue(OP_P_ACT, 0, 0, 2);
    issue(OP_P_ACT, 0, 1, 2);
    issue(OP_P_LD, 0, 0, 2, 1, 0);          // R0 <- even col 1
    issue(OP_P_LD, 0, 1, 2, 3, 1);          // R1 <- odd col 3
    issue(OP_P_ADD, 0, 0, 0, 0, 2, 0, 1);   // R2 = R0 + R1
    issue(OP_P_MAX, 0, 0, 0, 0, 3, 0, 1);   // R3 = max(R0, R1)
    issue(OP_P_ST, 0, 1, 2, 9, 0, 2);       // odd col 9 <- R2
    issue(OP_P_ST, 0, 0, 2, 10, 0, 3);      // even col 10 <- R3
    issue(OP_P_PRE, 0, 0);
    issue(OP_P_PRE, 0, 1);
    checks++;
    if (err) begin failures++; $display("FAIL: unexpected protocol error"); end
    for (int u = 0; u < UNITS; u++) begin
      word_t x, y, s, mx;
      x = pat(2*u, 2, 1); y = pat(2*u+1, 2, 3);
      for (int i = 0; i < 16; i++) begin
        s[16*i +: 16]  = x[16*i +: 16] + y[16*i +: 16];
        mx[16*i +: 16] = (x[16*i +: 16] > y[16*i +: 16]) ? x[16*i +: 16] : y[16*i +: 16];
      end
      host_read_check(2*u+1, 2, 9, s);
      host_read_check(2*u, 2, 10, mx);
      host_read_check(2*u, 2, 0, pat(2*u, 2, 0));   // untouched word
    end
    issue(OP_P_LD, 0, 0, 2, 1, 0);          // load from closed banks
    checks++;
    if (!err) begin failures++; $display("FAIL: closed-bank PIM load not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
