// tb_pim_unit: self-checking test of one PIM unit.
//
// The test supplies the even and odd banks' row-buffer words directly and
// sends random PIM commands: loads from either bank, ALU operations with
// register or immediate operands, conditional shifts. A model register file
// in the test predicts every register; registers are observed through the
// store path (st_data = register srca). Host commands and idle cycles must
// not change any register.
module tb_pim_unit;
  import jitq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid;
  pim_cmd_t cmd;
  word_t even_rdata, odd_rdata, st_data;
  logic [LANES-1:0] shift_active;
  pim_unit dut (.*);

  int checks = 0, failures = 0;
  word_t m [NREGS];
  int    sc [LANES];

  function automatic word_t rnd();
    word_t v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [15:0] lane_op(pim_op_e o, logic [15:0] x, logic [15:0] y, int s);
    case (o)
      OP_P_ADD:   return x + y;
      OP_P_SUB:   return x - y;
      OP_P_MAX:   return (x > y) ? x : y;
      OP_P_CMP:   return (x > y) ? 16'hFFFF : 16'h0000;
      OP_P_AND:   return x & y;
      OP_P_OR:    return x | y;
      OP_P_SHR1:  return x >> 1;
      OP_P_BSHFT: return (s > 0) ? x >> 1 : x;
      default:    return x;
    endcase
  endfunction

  task automatic check_all();
    for (int r = 0; r < NREGS; r++) begin
      @(negedge clk);
      cmd_valid = 0; cmd = '0; cmd.srca = 4'(r); #1;
      checks++;
      if (st_data !== m[r]) begin
        failures++; if (failures < 10) $display("FAIL: R%0d = %h, expected %h", r, st_data, m[r]);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pim_op_e alu_ops[9] = '{OP_P_ADD, OP_P_SUB, OP_P_MAX, OP_P_CMP, OP_P_AND, OP_P_OR, OP_P_SHR1, OP_P_LDSC, OP_P_BSHFT};

  initial begin
    cmd_valid = 0; cmd = '0; even_rdata = '0; odd_rdata = '0;
    for (int r = 0; r < NREGS; r++) m[r] = '0;
    for (int i = 0; i < LANES; i++) sc[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all();
    for (int t = 0; t < 600; t++) begin
      int kind;
      @(negedge clk);
      even_rdata = rnd(); odd_rdata = rnd();
      cmd = '0;
      cmd.dst = 4'($urandom); cmd.srca = 4'($urandom); cmd.srcb = 4'($urandom);
      cmd.odd = 1'($urandom); cmd.use_imm = 1'($urandom); cmd.imm = 16'($urandom);
      kind = $urandom_range(0, 9);
      cmd_valid = 1;
      if (kind < 3) cmd.op = OP_P_LD;
      else if (kind == 3) cmd.op = pim_op_e'($urandom_range(1, 4));   // host command: no effect
      else begin
        cmd.op = alu_ops[$urandom_range(0, 8)];
        if (cmd.op == OP_P_LDSC) begin
          cmd.use_imm = 0;
          // keep shift amounts small so later bitSHIFTs see both outcomes
          for (int i = 0; i < LANES; i++) m[cmd.srca][16*i +: 16] = 16'($urandom_range(0, 3));
          // write the register through a load first
          even_rdata = m[cmd.srca]; cmd.odd = 0; cmd.dst = cmd.srca; cmd.op = OP_P_LD;
          @(posedge clk); @(negedge clk);
          cmd.op = OP_P_LDSC;
        end
      end
      #1;
      // model
      if (cmd.op == OP_P_LD) m[cmd.dst] = cmd.odd ? odd_rdata : even_rdata;
      else if (cmd.op == OP_P_LDSC) begin
        for (int i = 0; i < LANES; i++) sc[i] = int'(m[cmd.srca][16*i +: 16]);
      end else if (is_alu(cmd.op)) begin
        word_t r, bv;
        bv = cmd.use_imm ? {LANES{cmd.imm}} : m[cmd.srcb];
        for (int i = 0; i < LANES; i++) r[16*i +: 16] = lane_op(cmd.op, m[cmd.srca][16*i +: 16], bv[16*i +: 16], sc[i]);
        if (cmd.op == OP_P_BSHFT) begin
          checks++;
          for (int i = 0; i < LANES; i++) if (shift_active[i] !== (sc[i] > 0)) begin
            failures++; $display("FAIL: shift_active lane %0d", i);
          end
          for (int i = 0; i < LANES; i++) if (sc[i] > 0) sc[i]--;
        end
        m[cmd.dst] = r;
      end
      @(posedge clk);
      if (t % 50 == 49) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
