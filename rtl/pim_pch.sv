// pim_pch: one HBM pseudo-channel with processing-in-memory.
//
// 2*UNITS banks share the pseudo-channel's data bus. Banks 2u (even) and
// 2u+1 (odd) share PIM unit u. A command is either a host command for one
// bank (cmd.bank = 2u + odd) or a PIM command, which is broadcast: every PIM
// unit executes it in the same cycle on its own bank pair, so a P_ACT opens
// the same row in all even (or all odd) banks and a P_LD loads the same
// column of every unit's bank into its register file. This is where PIM gets
// its bandwidth: one command moves UNITS words, where the host moves one.
//
// Interface: one command per cycle with cmd_valid; the caller (pim_cmd_sched)
// guarantees DRAM timing. Host RD data appears on rdata with rdata_valid one
// cycle after the command. Host WR data is taken from wdata with the command.
// err is set when any bank sees a column access while closed or an ACT while
// open. shift_active gives, per unit, the lanes whose shift counter is
// non-zero.
//
// The bank pairing, the shared bus and the broadcast follow the paper; the
// default of 8 PIM units (16 banks) per pseudo-channel follows from its 512
// banks and 256 PIM units per stack with 32 pseudo-channels per HBM3 stack;
// the one-cycle read latency is this design's choice.
module pim_pch
  import jitq_pkg::*;
#(
  parameter int unsigned UNITS = 8,
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned CNT_W = 5,
  localparam int unsigned NBANKS = 2 * UNITS,
  localparam int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned BW     = $clog2(NBANKS)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  input  pim_cmd_t cmd,
  input  word_t    wdata,
  output word_t    rdata,
  output logic     rdata_valid,
  output logic     err,
  output logic [UNITS-1:0][LANES-1:0] shift_active
);

  word_t              bank_rdata [NBANKS];
  word_t              unit_st    [UNITS];
  logic [NBANKS-1:0]  bank_err;

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    localparam int unsigned U = b / 2;
    localparam logic        P = (b % 2) == 1;
    logic host_hit, act, pre, rd, wr;

    assign host_hit = cmd_valid && (cmd.bank == CMD_BANK_W'(b));
    assign act = (host_hit && cmd.op == OP_ACT) || (cmd_valid && cmd.op == OP_P_ACT && cmd.odd == P);
    assign pre = (host_hit && cmd.op == OP_PRE) || (cmd_valid && cmd.op == OP_P_PRE && cmd.odd == P);
    assign rd  = (host_hit && cmd.op == OP_RD)  || (cmd_valid && cmd.op == OP_P_LD  && cmd.odd == P);
    assign wr  = (host_hit && cmd.op == OP_WR)  || (cmd_valid && cmd.op == OP_P_ST  && cmd.odd == P);

    dram_bank #(.ROWS(ROWS), .ROW_BYTES(ROW_BYTES), .WORD_W(WORD_W)) u_bank (
      .clk      (clk),
      .rst_n    (rst_n),
      .act      (act),
      .act_row  (cmd.row[RW-1:0]),
      .pre      (pre),
      .rd       (rd),
      .wr       (wr),
      .col      (cmd.col),
      .wdata    ((cmd.op == OP_WR) ? wdata : unit_st[U]),
      .rdata    (bank_rdata[b]),
      .is_open  (),
      .open_row (),
      .err      (bank_err[b])
    );
  end

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    pim_unit #(.CNT_W(CNT_W)) u_pim (
      .clk          (clk),
      .rst_n        (rst_n),
      .cmd_valid    (cmd_valid && is_pim(cmd.op)),
      .cmd          (cmd),
      .even_rdata   (bank_rdata[2*u]),
      .odd_rdata    (bank_rdata[2*u+1]),
      .st_data      (unit_st[u]),
      .shift_active (shift_active[u])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata       <= '0;
      rdata_valid <= 1'b0;
    end else begin
      rdata_valid <= cmd_valid && cmd.op == OP_RD;
      if (cmd_valid && cmd.op == OP_RD && cmd.bank < CMD_BANK_W'(NBANKS))
        rdata <= bank_rdata[cmd.bank[BW-1:0]];
    end
  end

  assign err = |bank_err;

endmodule
