// pim_simd_alu: the 256-bit SIMD ALU of a PIM unit, with the quantization
// augmentations.
//
// Sixteen 16-bit lanes operate independently; no operation crosses a lane,
// which is why the weight placement puts all elements of an MX block in the
// same lane of successive words. Lane operations: ADD, SUB, unsigned MAX,
// CMP (all-ones where a > b, else zero, so the result can be used as a mask),
// AND, OR, SHR1 (one-bit right shift of every lane, the uniform pim-bitSHIFT
// used for scalar formats), LDSC (load the per-lane shift counters from a)
// and BSHFT (the counter-based conditional one-bit shift, see pim_cond_shift).
// Operand b is either a register or a 16-bit immediate copied to all lanes.
//
// Interface: op, a and b are presented with en; res is combinational and is
// valid whenever op is an ALU operation that writes a register (wr = 1).
// The shift counters update at the rising edge when en is set.
//
// Following the paper: lane-wise MAX, CMP, ADD, single-bit shifts and the
// counter-based conditional shift. This design's own choices: SUB, AND, OR,
// the immediate operand, the all-ones/zero CMP result and unsigned compare
// (the operands compared are exponent fields). The floating-point MUL/MAC
// operations of the underlying commercial PIM are not part of this ALU.
module pim_simd_alu #(
  parameter int unsigned LANES  = 16,
  parameter int unsigned LANE_W = 16,
  parameter int unsigned CNT_W  = 5
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  jitq_pkg::pim_op_e                       op,
  input  logic [LANES-1:0][LANE_W-1:0]  a,
  input  logic [LANES-1:0][LANE_W-1:0]  b,
  output logic [LANES-1:0][LANE_W-1:0]  res,
  output logic                          wr,
  output logic [LANES-1:0]              shift_active
);

  logic [LANES-1:0][LANE_W-1:0] cs_out;

  pim_cond_shift #(.LANES(LANES), .LANE_W(LANE_W), .CNT_W(CNT_W)) u_cs (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (en && op == jitq_pkg::OP_P_LDSC),
    .load_val (a),
    .step     (en && op == jitq_pkg::OP_P_BSHFT),
    .din      (a),
    .dout     (cs_out),
    .active   (shift_active)
  );

  always_comb begin
    wr = jitq_pkg::is_alu(op) && op != jitq_pkg::OP_P_LDSC;
    for (int i = 0; i < LANES; i++) begin
      unique case (op)
        jitq_pkg::OP_P_ADD:   res[i] = a[i] + b[i];
        jitq_pkg::OP_P_SUB:   res[i] = a[i] - b[i];
        jitq_pkg::OP_P_MAX:   res[i] = (a[i] > b[i]) ? a[i] : b[i];
        jitq_pkg::OP_P_CMP:   res[i] = (a[i] > b[i]) ? '1 : '0;
        jitq_pkg::OP_P_AND:   res[i] = a[i] & b[i];
        jitq_pkg::OP_P_OR:    res[i] = a[i] | b[i];
        jitq_pkg::OP_P_SHR1:  res[i] = a[i] >> 1;
        jitq_pkg::OP_P_BSHFT: res[i] = cs_out[i];
        default:    res[i] = a[i];
      endcase
    end
  end

endmodule
