// tb_pim_simd_alu: self-checking test of the 16-lane PIM ALU.
//
// Random operands through every lane operation, compared with a per-lane
// model; then LDSC followed by conditional bitSHIFTs, checking that each lane
// shifts by its own amount and that wr is low for LDSC only.
module tb_pim_simd_alu;
  import jitq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, wr;
  pim_op_e op;
  logic [LANES-1:0][LANE_W-1:0] a, b, res;
  logic [LANES-1:0] shift_active;

  pim_simd_alu dut (.*);

  int checks = 0, failures = 0;
  pim_op_e ops[8] = '{OP_P_ADD, OP_P_SUB, OP_P_MAX, OP_P_CMP, OP_P_AND, OP_P_OR, OP_P_SHR1, OP_P_LDSC};

  function automatic logic [15:0] model(pim_op_e o, logic [15:0] x, logic [15:0] y);
    case (o)
      OP_P_ADD:  return x + y;
      OP_P_SUB:  return x - y;
      OP_P_MAX:  return (x > y) ? x : y;
      OP_P_CMP:  return (x > y) ? 16'hFFFF : 16'h0000;
      OP_P_AND:  return x & y;
      OP_P_OR:   return x | y;
      OP_P_SHR1: return {1'b0, x[15:1]};
      default:   return x;
    endcase
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; op = OP_NOP; a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      op = ops[t % 7];
      for (int i = 0; i < LANES; i++) begin
        a[i] = 16'($urandom); b[i] = (t % 5 == 0) ? a[i] : 16'($urandom);
      end
      #1;
      checks++;
      if (wr !== 1'b1) begin failures++; $display("FAIL: wr low for %s", op.name()); end
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (res[i] !== model(op, a[i], b[i])) begin
          failures++;
          if (failures < 10) $display("FAIL %s lane %0d: %h %h -> %h", op.name(), i, a[i], b[i], res[i]);
        end
      end
    end
    // conditional shifts
    for (int t = 0; t < 10; t++) begin
      logic [LANES-1:0][LANE_W-1:0] v; int s [LANES];
      en = 1;
      for (int i = 0; i < LANES; i++) s[i] = $urandom_range(0, 9);
      // check via a fresh run with known data
      @(negedge clk);
      op = OP_P_LDSC; en = 1;
      for (int i = 0; i < LANES; i++) a[i] = 16'(s[i]);
      #1; checks++;
      if (wr !== 1'b0) begin failures++; $display("FAIL: wr high for LDSC"); end
      @(negedge clk);
      op = OP_P_BSHFT;
      begin
        logic [LANES-1:0][LANE_W-1:0] st0;
        for (int i = 0; i < LANES; i++) st0[i] = 16'($urandom);
        v = st0;
        for (int k = 0; k < 8; k++) begin
          a = v; #1;
          checks++;
          for (int i = 0; i < LANES; i++) if (shift_active[i] !== (s[i] > k)) begin
            failures++; $display("FAIL: active lane %0d step %0d", i, k);
          end
          v = res;
          @(negedge clk);
        end
        for (int i = 0; i < LANES; i++) begin
          int sh; sh = (s[i] < 8) ? s[i] : 8;
          checks++;
          if (v[i] !== (st0[i] >> sh)) begin
            failures++; $display("FAIL: lane %0d shift %0d: %h -> %h", i, s[i], st0[i], v[i]);
          end
        end
      end
      en = 0; op = OP_NOP;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
