// tb_pim_cmd_sched: self-checking test of the command scheduler.
//
// Sends host and PIM command sequences and checks, at the issue port: the
// commands come out in order and NOPs are dropped; ACT -> PRE of a bank is
// exactly tRAS, PRE -> ACT exactly tRP and back-to-back column commands
// exactly tCCDL apart when nothing else holds them; a broadcast P_PRE waits
// for the most recent ACT of its bank group; banks not involved are not
// held; the input stalls when the queue is full; stall_why names the rule.
module tb_pim_cmd_sched;
  import jitq_pkg::*;
  localparam int NBANKS = 4, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid;
  pim_cmd_t in_cmd, out_cmd;
  word_t in_wdata, out_wdata;
  logic [2:0] stall_why;
  pim_cmd_sched #(.NBANKS(NBANKS), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  pim_cmd_t sent[$], got[$];
  longint   t_got[$];
  int       seen_why[3] = '{0, 0, 0};
  int       full_seen = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin got.push_back(out_cmd); t_got.push_back(cyc); end
    for (int i = 0; i < 3; i++) if (stall_why[i]) seen_why[i]++;
    if (in_valid && !in_ready) full_seen++;
  end

  function automatic pim_cmd_t mk(pim_op_e op, int bank = 0, int odd = 0);
    pim_cmd_t c; c = '0; c.op = op; c.bank = CMD_BANK_W'(bank); c.odd = 1'(odd); c.dst = 4'(bank);
    return c;
  endfunction

  task automatic send(pim_cmd_t c);
    @(negedge clk);
    in_valid = 1; in_cmd = c; in_wdata = {8{32'(sent.size())}};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    if (c.op != OP_NOP) sent.push_back(c);
    #1 in_valid = 0;
  endtask

  task automatic expect_gap(int i, int j, int gap, string what);
    checks++;
    if (t_got[j] - t_got[i] != gap) begin
      failures++; $display("FAIL: %s gap %0d, expected %0d", what, t_got[j] - t_got[i], gap);
    end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_cmd = '0; in_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 0 ACT b0, 1 RD b0, 2 RD b0, 3 PRE b0, 4 ACT b0, 5 ACT b1 (other bank),
    // 6 P_LD, 7 P_ADD, 8 P_PRE even (banks 0,2), 9 P_ACT even
    send(mk(OP_ACT, 0)); send(mk(OP_RD, 0)); send(mk(OP_NOP)); send(mk(OP_RD, 0));
    send(mk(OP_PRE, 0)); send(mk(OP_ACT, 0)); send(mk(OP_ACT, 1));
    send(mk(OP_P_LD)); send(mk(OP_P_ADD)); send(mk(OP_P_PRE, 0, 0)); send(mk(OP_P_ACT, 0, 0));
    repeat (300) @(posedge clk);
    checks++;
    if (got.size() != sent.size()) begin failures++; $display("FAIL: %0d issued, %0d sent", got.size(), sent.size()); end
    else begin
      for (int i = 0; i < sent.size(); i++) begin
        checks++;
        if (got[i] !== sent[i]) begin failures++; $display("FAIL: order at %0d", i); end
      end
      expect_gap(1, 2, T_CCDL_CYC, "RD->RD");
      expect_gap(0, 3, T_RAS_CYC, "ACT->PRE");
      expect_gap(3, 4, T_RP_CYC, "PRE->ACT");
      expect_gap(4, 5, 1, "ACT other bank");
      expect_gap(5, 6, 1, "ACT->P_LD");
      expect_gap(6, 7, T_CCDL_CYC, "P_LD->P_ADD");
      expect_gap(4, 8, T_RAS_CYC, "ACT->P_PRE");
      expect_gap(8, 9, T_RP_CYC, "P_PRE->P_ACT");
      checks++;
      if (got[1].dst !== 4'd0) failures++;
    end
    // burst of ALU commands: queue fills, rate is one per tCCDL
    sent.delete(); got.delete(); t_got.delete();
    for (int i = 0; i < 12; i++) send(mk(OP_P_OR, i % 4));
    repeat (120) @(posedge clk);
    checks++;
    if (got.size() != 12) begin failures++; $display("FAIL: burst issued %0d", got.size()); end
    else expect_gap(0, 11, 11 * T_CCDL_CYC, "12 ALU commands");
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL: queue never full"); end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (seen_why[i] == 0) begin failures++; $display("FAIL: stall reason %0d never seen", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
