// tb_dram_bank: self-checking test of the DRAM bank model.
//
// Writes every word of every row through ACT / WR / PRE, reads them back in
// a different row order, and checks the open-row state and the protocol
// error flag (column access to a closed bank, ACT to an open bank).
module tb_dram_bank;
  localparam int ROWS = 8, WORD_W = 256, COLS = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic act, pre, rd, wr, is_open, err;
  logic [2:0] act_row, open_row;
  logic [4:0] col;
  logic [WORD_W-1:0] wdata, rdata;
  dram_bank #(.ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [WORD_W-1:0] pat(int r, int c);
    logic [WORD_W-1:0] v;
    for (int i = 0; i < WORD_W / 32; i++) v[32*i +: 32] = 32'(r * 1000003 + c * 7919 + i * 104729) ^ 32'hA5A5_0000;
    return v;
  endfunction

  task automatic cmd(input bit a, input bit p, input bit r, input bit w, input int row, input int c);
    @(negedge clk);
    act = a; pre = p; rd = r; wr = w; act_row = 3'(row); col = 5'(c); wdata = pat(row, c);
    @(posedge clk); #1;
    act = 0; pre = 0; rd = 0; wr = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act = 0; pre = 0; rd = 0; wr = 0; act_row = 0; col = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      cmd(1, 0, 0, 0, r, 0);
      checks++;
      if (!is_open || open_row !== 3'(r)) begin failures++; $display("FAIL: row %0d not open", r); end
      for (int c = 0; c < COLS; c++) cmd(0, 0, 0, 1, r, c);
      cmd(0, 1, 0, 0, r, 0);
      checks++;
      if (is_open) begin failures++; $display("FAIL: row %0d still open", r); end
    end
    for (int r = ROWS - 1; r >= 0; r--) begin
      cmd(1, 0, 0, 0, r, 0);
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk); rd = 1; col = 5'(c); #1;
        checks++;
        if (rdata !== pat(r, c)) begin failures++; if (failures < 10) $display("FAIL: r %0d c %0d", r, c); end
        @(posedge clk); #1; rd = 0;
      end
      cmd(0, 1, 0, 0, r, 0);
    end
    checks++;
    if (err) begin failures++; $display("FAIL: spurious error"); end
    cmd(0, 0, 1, 0, 0, 0);              // read while closed
    checks++;
    if (!err) begin failures++; $display("FAIL: closed read not flagged"); end
    rst_n = 0; @(posedge clk); #1; rst_n = 1;
    checks++;
    if (err) begin failures++; $display("FAIL: error not cleared by reset"); end
    cmd(1, 0, 0, 0, 2, 0);
    cmd(1, 0, 0, 0, 3, 0);              // ACT while open
    checks++;
    if (!err || open_row !== 3'd2) begin failures++; $display("FAIL: double ACT not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
