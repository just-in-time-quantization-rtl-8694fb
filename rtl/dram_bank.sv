// dram_bank: one DRAM bank with its row buffer, as seen by the data bus and
// the PIM unit.
//
// The cell array is ROWS rows of ROW_BYTES bytes, i.e. COLS words of WORD_W
// bits per row. act opens row act_row (the row is sensed into the row
// buffer); while a row is open, rd returns word col of it combinationally and
// wr writes word col of it at the clock edge; pre closes the row. The row
// buffer is modelled by the open-row index: reads and writes go straight to
// the open row of the array, which gives the same contents as a separate
// buffer written back on precharge. A column access or second act on a
// closed/open bank is a protocol error: err is set and stays set until
// reset; the access is ignored. Timing (tRP, tRAS, tCCDL) is enforced by the
// command scheduler, not here.
//
// The 1024-byte row and 256-bit column word follow the paper; the row count
// is not given there and is this design's choice, as is the error flag.
module dram_bank #(
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned ROW_BYTES = 1024,
  parameter int unsigned WORD_W    = 256,
  localparam int unsigned COLS     = ROW_BYTES * 8 / WORD_W,
  localparam int unsigned RW       = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW       = $clog2(COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              act,
  input  logic [RW-1:0]     act_row,
  input  logic              pre,
  input  logic              rd,
  input  logic              wr,
  input  logic [CW-1:0]     col,
  input  logic [WORD_W-1:0] wdata,
  output logic [WORD_W-1:0] rdata,
  output logic              is_open,
  output logic [RW-1:0]     open_row,
  output logic              err
);

  logic [WORD_W-1:0] mem [ROWS*COLS];

  logic [$clog2(ROWS*COLS)-1:0] addr;
  assign addr    = {open_row, col};
  assign rdata   = mem[addr];

  always_ff @(posedge clk) begin
    if (wr && is_open) mem[addr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_open  <= 1'b0;
      open_row <= '0;
      err      <= 1'b0;
    end else begin
      if (act) begin
        if (is_open) err <= 1'b1;
        else begin
          is_open  <= 1'b1;
          open_row <= act_row;
        end
      end else if (pre) begin
        is_open <= 1'b0;
      end
      if ((rd || wr) && !is_open) err <= 1'b1;
    end
  end

endmodule
