// pim_unit: one PIM compute unit, shared by an even and an odd DRAM bank.
//
// The unit has no instruction fetch: it executes the broadcast PIM command
// presented with cmd_valid, one per cycle, and has finished it by the next
// clock edge. P_LD copies the addressed word of the even or odd bank's open
// row (even_rdata / odd_rdata, selected by cmd.odd) into register cmd.dst.
// P_ST presents register cmd.srca on st_data; the pseudo-channel writes it
// into the even or odd bank's open row. ALU commands read registers srca and
// srcb (or the immediate), and write the result to dst. Host commands and
// row commands (P_ACT, P_PRE) do nothing here.
//
// Interface: cmd_valid/cmd are sampled at the rising edge; st_data is
// combinational from the register file; shift_active shows the lanes whose
// shift counter is non-zero.
//
// Structure (SIMD ALU + register file between two banks' row buffers) and
// the command kinds (data movement between row buffer and register file,
// SIMD compute) follow the paper; the command encoding is this design's.
module pim_unit
  import jitq_pkg::*;
#(
  parameter int unsigned CNT_W = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  pim_cmd_t    cmd,
  input  word_t       even_rdata,
  input  word_t       odd_rdata,
  output word_t       st_data,
  output logic [LANES-1:0] shift_active
);

  word_t rf_a, rf_b, alu_b, alu_res, rf_wdata;
  logic  alu_wr, rf_we;

  pim_regfile #(.NREGS(NREGS), .WIDTH(WORD_W)) u_rf (
    .clk     (clk),
    .rst_n   (rst_n),
    .we      (rf_we),
    .waddr   (cmd.dst),
    .wdata   (rf_wdata),
    .raddr_a (cmd.srca),
    .rdata_a (rf_a),
    .raddr_b (cmd.srcb),
    .rdata_b (rf_b)
  );

  assign alu_b = cmd.use_imm ? {LANES{cmd.imm}} : rf_b;

  pim_simd_alu #(.LANES(LANES), .LANE_W(LANE_W), .CNT_W(CNT_W)) u_alu (
    .clk          (clk),
    .rst_n        (rst_n),
    .en           (cmd_valid),
    .op           (cmd.op),
    .a            (rf_a),
    .b            (alu_b),
    .res          (alu_res),
    .wr           (alu_wr),
    .shift_active (shift_active)
  );

  always_comb begin
    rf_we    = 1'b0;
    rf_wdata = alu_res;
    if (cmd_valid) begin
      if (cmd.op == OP_P_LD) begin
        rf_we    = 1'b1;
        rf_wdata = cmd.odd ? odd_rdata : even_rdata;
      end else if (alu_wr) begin
        rf_we    = 1'b1;
      end
    end
  end

  assign st_data = rf_a;

endmodule
