// pim_regfile: register file of a PIM unit, NREGS words of WIDTH bits.
//
// Two asynchronous read ports feed the ALU operands (or the row-buffer write
// path); one synchronous write port takes an ALU result or a word loaded
// from a row buffer. A write and a read of the same register in one cycle
// return the old value. Reset clears all registers.
//
// Size from the paper (16 registers per ALU, 256-bit words); port count and
// reset are this design's choices.
module pim_regfile #(
  parameter int unsigned NREGS = 16,
  parameter int unsigned WIDTH = 256,
  localparam int unsigned AW   = $clog2(NREGS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr_a,
  output logic [WIDTH-1:0] rdata_a,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_b
);

  logic [WIDTH-1:0] regs [NREGS];

  assign rdata_a = regs[raddr_a];
  assign rdata_b = regs[raddr_b];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

endmodule
