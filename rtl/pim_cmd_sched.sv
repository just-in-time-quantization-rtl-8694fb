// pim_cmd_sched: in-order command queue of one pseudo-channel with DRAM
// timing checks.
//
// Host and PIM commands enter through a valid/ready port and wait in a FIFO
// of DEPTH entries (host write data travels with its command). The command
// at the head is issued as soon as the DRAM timing rules allow it, strictly
// in order:
//   ACT   to a bank at least T_RP cycles after that bank's last PRE,
//   PRE   to a bank at least T_RAS cycles after that bank's last ACT,
//   column commands (host RD/WR and every PIM data or ALU command) at least
//         T_CCDL cycles after the previous column command.
// P_ACT and P_PRE target all even or all odd banks at once and wait for the
// slowest of them. While the head waits, stall_why shows which rule holds it
// (bit 0 tCCDL, bit 1 tRAS, bit 2 tRP). NOP is dropped without a slot.
//
// Interface: in_valid/in_ready handshake (a command is taken when both are
// high at a clock edge); out_valid/out_cmd/out_wdata is one issued command,
// valid for one cycle, with no back-pressure.
//
// The in-order issue by the memory controller and the three timing values
// follow the paper. It does not list tRCD or other DRAM timings, and none
// are enforced here. Treating every PIM compute command as a column command
// paced by tCCDL, the queue depth and the handshake are this design's choices.
module pim_cmd_sched
  import jitq_pkg::*;
#(
  parameter int unsigned NBANKS = 16,
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned T_RP   = jitq_pkg::T_RP_CYC,
  parameter int unsigned T_RAS  = jitq_pkg::T_RAS_CYC,
  parameter int unsigned T_CCDL = jitq_pkg::T_CCDL_CYC
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  pim_cmd_t in_cmd,
  input  word_t    in_wdata,
  output logic     out_valid,
  output pim_cmd_t out_cmd,
  output word_t    out_wdata,
  output logic [2:0] stall_why
);

  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned TMAX  = (T_RAS > T_RP) ? ((T_RAS > T_CCDL) ? T_RAS : T_CCDL)
                                                 : ((T_RP > T_CCDL) ? T_RP : T_CCDL);
  localparam int unsigned TW    = $clog2(TMAX + 1);
  localparam logic [TW-1:0] TSAT = TW'(TMAX);

  // ---------------- FIFO ----------------
  pim_cmd_t       q_cmd   [DEPTH];
  word_t          q_wdata [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic [AW:0]    count;
  logic           push, pop, head_valid;

  assign in_ready   = count < (AW+1)'(DEPTH);
  assign push       = in_valid && in_ready;
  assign head_valid = count != '0;

  always_ff @(posedge clk) begin
    if (push) begin
      q_cmd[wr_ptr]   <= in_cmd;
      q_wdata[wr_ptr] <= in_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // ---------------- timing state ----------------
  logic [TW-1:0] since_act [NBANKS];
  logic [TW-1:0] since_pre [NBANKS];
  logic [TW-1:0] since_col;

  pim_cmd_t          head;
  logic [NBANKS-1:0] target;
  logic              is_act, is_pre, is_col, ok_rp, ok_ras, ok_ccd, legal;

  assign head = q_cmd[rd_ptr];

  always_comb begin
    is_act = head.op == OP_ACT || head.op == OP_P_ACT;
    is_pre = head.op == OP_PRE || head.op == OP_P_PRE;
    is_col = is_column(head.op);
    target = '0;
    for (int b = 0; b < NBANKS; b++) begin
      if (head.op == OP_P_ACT || head.op == OP_P_PRE)
        target[b] = ((b % 2) == 1) == head.odd;
      else
        target[b] = head.bank == CMD_BANK_W'(b);
    end
    ok_rp  = 1'b1;
    ok_ras = 1'b1;
    for (int b = 0; b < NBANKS; b++) begin
      if (target[b] && since_pre[b] < TW'(T_RP))  ok_rp  = 1'b0;
      if (target[b] && since_act[b] < TW'(T_RAS)) ok_ras = 1'b0;
    end
    ok_ccd = since_col >= TW'(T_CCDL);
    legal  = (!is_act || ok_rp) && (!is_pre || ok_ras) && (!is_col || ok_ccd);
  end

  assign pop       = head_valid && legal;
  assign out_valid = pop && head.op != OP_NOP;
  assign out_cmd   = head;
  assign out_wdata = q_wdata[rd_ptr];
  assign stall_why = head_valid ? {is_act && !ok_rp, is_pre && !ok_ras, is_col && !ok_ccd} : 3'b000;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBANKS; b++) begin
        since_act[b] <= TSAT;
        since_pre[b] <= TSAT;
      end
      since_col <= TSAT;
    end else begin
      for (int b = 0; b < NBANKS; b++) begin
        if (pop && is_act && target[b])    since_act[b] <= TW'(1);
        else if (since_act[b] != TSAT)     since_act[b] <= since_act[b] + 1'b1;
        if (pop && is_pre && target[b])    since_pre[b] <= TW'(1);
        else if (since_pre[b] != TSAT)     since_pre[b] <= since_pre[b] + 1'b1;
      end
      if (pop && is_col)                   since_col <= TW'(1);
      else if (since_col != TSAT)          since_col <= since_col + 1'b1;
    end
  end

  // A producer must hold a command until it is taken.
  property p_in_hold;
    @(posedge clk) disable iff (!rst_n) in_valid && !in_ready |=> in_valid && $stable(in_cmd);
  endproperty
  a_in_hold: assert property (p_in_hold);

endmodule
