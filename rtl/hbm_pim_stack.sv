// hbm_pim_stack: one HBM-PIM memory stack, the top of the design.
//
// The stack is NPCH independent pseudo-channels. Each has its own command
// port from the GPU's memory controller, an in-order command scheduler that
// enforces the DRAM timing (pim_cmd_sched) and the pseudo-channel itself
// (pim_pch): 2*UNITS banks and UNITS PIM units. A PIM kernel running on the
// GPU drives all pseudo-channels in parallel; inside a pseudo-channel each
// PIM command is broadcast to all its PIM units. With the defaults the stack
// has 32 x 16 = 512 banks and 32 x 8 = 256 PIM units.
//
// Interface, per pseudo-channel p: cmd_valid[p]/cmd_ready[p]/cmd[p]/wdata[p]
// command port (see pim_cmd_sched); rdata[p]/rdata_valid[p] host read data;
// err[p] bank protocol error; stall_why[p] which timing rule holds the head
// command; issued[p] a command was issued to the pseudo-channel this cycle;
// shift_active[p] the lanes of each PIM unit whose shift counter is non-zero.
// The GPU, the memory controller's address mapping and the physical
// interface (TSVs, interposer wires, PHY) are outside this module.
//
// Bank and PIM unit counts are the paper's; the split into 32
// pseudo-channels of 16 banks is this design's reading of an HBM3 stack.
module hbm_pim_stack
  import jitq_pkg::*;
#(
  parameter int unsigned NPCH  = 32,
  parameter int unsigned UNITS = 8,
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned CNT_W = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic     [NPCH-1:0]   cmd_valid,
  output logic     [NPCH-1:0]   cmd_ready,
  input  pim_cmd_t [NPCH-1:0]   cmd,
  input  word_t    [NPCH-1:0]   wdata,
  output word_t    [NPCH-1:0]   rdata,
  output logic     [NPCH-1:0]   rdata_valid,
  output logic     [NPCH-1:0]   err,
  output logic     [NPCH-1:0][2:0] stall_why,
  output logic     [NPCH-1:0]   issued,
  output logic     [NPCH-1:0][UNITS-1:0][LANES-1:0] shift_active
);

  for (genvar p = 0; p < NPCH; p++) begin : g_pch
    logic     iss_valid;
    pim_cmd_t iss_cmd;
    word_t    iss_wdata;

    pim_cmd_sched #(.NBANKS(2*UNITS), .DEPTH(DEPTH)) u_sched (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (cmd_valid[p]),
      .in_ready  (cmd_ready[p]),
      .in_cmd    (cmd[p]),
      .in_wdata  (wdata[p]),
      .out_valid (iss_valid),
      .out_cmd   (iss_cmd),
      .out_wdata (iss_wdata),
      .stall_why (stall_why[p])
    );

    pim_pch #(.UNITS(UNITS), .ROWS(ROWS), .CNT_W(CNT_W)) u_pch (
      .clk          (clk),
      .rst_n        (rst_n),
      .cmd_valid    (iss_valid),
      .cmd          (iss_cmd),
      .wdata        (iss_wdata),
      .rdata        (rdata[p]),
      .rdata_valid  (rdata_valid[p]),
      .err          (err[p]),
      .shift_active (shift_active[p])
    );

    assign issued[p] = iss_valid;
  end

endmodule
