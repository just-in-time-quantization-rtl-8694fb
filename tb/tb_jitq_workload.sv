// tb_jitq_workload: one pseudo-channel's share of a real training step.
//
// Workload: just-in-time quantization of the weights of one transformer block
// of a 345M-parameter BERT (hidden size 1024, no tensor parallelism). The
// block has 12 x 1024^2 = 12.6M weights; spread over 4 stacks x 256 PIM units
// that is 12288 weights per unit, i.e. three 16-tile groups of 16x16 BF16
// tiles per unit. Every pseudo-channel runs the same command stream, so one
// pseudo-channel (8 units, 24 groups, 98304 weights) is simulated here.
//
// The test loads the three groups of every unit with host writes, runs the
// MX6 row quantization and then the MX6 column quantization of all three
// groups, reads every output word back and compares it with the MX reference
// model. It reports the cycle count of each phase; at 2.4 GHz these give the
// time the whole stack needs, since all pseudo-channels work in parallel.
module tb_jitq_workload;
  import jitq_pkg::*;
  import jitq_tb_pkg::*;

  localparam int NPCH   = 1;
  localparam int UNITS  = 8;
  localparam int GROUPS = 3;
  localparam int SEED   = 11;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic     [NPCH-1:0] cmd_valid, cmd_ready, rdata_valid, err, issued;
  pim_cmd_t [NPCH-1:0] cmd;
  word_t    [NPCH-1:0] wdata, rdata;
  logic     [NPCH-1:0][2:0] stall_why;
  logic     [NPCH-1:0][UNITS-1:0][LANES-1:0] shift_active;

  hbm_pim_stack #(.NPCH(NPCH), .UNITS(UNITS)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .wdata, .rdata, .rdata_valid,
    .err, .stall_why, .issued, .shift_active
  );

  int checks = 0, failures = 0, n_read = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  pim_cmd_t stream[$];
  int       idx;
  typedef struct { int u; int L; } rd_t;
  rd_t      exp_q[$];

  always_comb begin
    cmd_valid[0] = idx < stream.size();
    cmd[0]       = cmd_valid[0] ? stream[idx] : '0;
    wdata[0]     = (cmd_valid[0] && cmd[0].op == OP_WR)
                 ? input_word(0, int'(cmd[0].bank) / 2, cmd_linear(cmd[0]), SEED) : '0;
  end

  always @(posedge clk)
    if (cmd_valid[0] && cmd_ready[0]) begin
      if (cmd[0].op == OP_RD) exp_q.push_back('{int'(cmd[0].bank) / 2, cmd_linear(cmd[0])});
      idx <= idx + 1;
    end

  always @(posedge clk)
    if (rdata_valid[0] && rst_n) begin
      rd_t r; word_t e;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected read data");
      end else begin
        r = exp_q.pop_front();
        e = expected_word(0, r.u, r.L, 4, SEED);
        checks++; n_read++;
        if (rdata[0] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL: unit %0d L %0d got %h exp %h", r.u, r.L, rdata[0], e);
        end
      end
    end

  task automatic run(kernel_gen k, output longint cycles);
    longint t0;
    stream = k.q;
    idx = 0;
    t0 = cyc;
    forever begin
      @(posedge clk);
      if (idx >= stream.size() && exp_q.size() == 0 && dut.g_pch[0].u_sched.count == 0) break;
    end
    repeat (4) @(posedge clk);
    cycles = cyc - t0;
  endtask

  initial begin : watchdog
    #(2 * 3_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    kernel_gen k;
    longint t_load, t_rowq, t_colq, t_read;
    idx = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    k = new(); for (int g = 0; g < GROUPS; g++) k.host_load(UNITS, g);
    run(k, t_load);
    k = new(); for (int g = 0; g < GROUPS; g++) k.quant_tiles(0, 4, 0, 16, g);
    run(k, t_rowq);
    k = new(); for (int g = 0; g < GROUPS; g++) k.quant_tiles(1, 4, 0, 16, g);
    run(k, t_colq);
    k = new();
    for (int g = 0; g < GROUPS; g++) begin
      k.host_read(UNITS, GROUP_WORDS*g + OUT_ROWQ, GROUP_WORDS*g + OUT_ROWQ + 17*16);
      k.host_read(UNITS, GROUP_WORDS*g + OUT_COLQ, GROUP_WORDS*g + OUT_COLQ + 17*16);
    end
    run(k, t_read);

    checks++;
    if (err != '0) begin failures++; $display("FAIL: bank protocol error"); end
    checks++;
    if (n_read != UNITS * GROUPS * 2 * 17 * 16) begin failures++; $display("FAIL: %0d words read", n_read); end
    $display("workload: %0d weights per pseudo-channel; load %0d, MX6 row %0d, MX6 column %0d, read %0d cycles",
             UNITS * GROUPS * 4096, t_load, t_rowq, t_colq, t_read);
    $display("quantization of the block (row + column) takes %0d ns at 2.4 GHz",
             (t_rowq + t_colq) * 10 / 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
