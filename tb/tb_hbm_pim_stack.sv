// tb_hbm_pim_stack: end-to-end test of the HBM-PIM stack at its default size
// (32 pseudo-channels x 8 PIM units, 512 banks).
//
// The test acts as the GPU. It loads 16 BF16 16x16 weight tiles into every
// PIM unit with host writes (strided placement, lane i = tile i), then sends
// the same PIM quantization kernel to every pseudo-channel: BF16 -> MX6 row
// quantization, then column quantization, of all 16 tiles; then BF16 -> MX9
// and BF16 -> MX4 row quantization of the first tile rows. The host reads
// every output word back and compares it with an MX reference computed
// directly from the inputs (jitq_tb_pkg::mx_ref).
//
// It also checks DRAM timing at the issue port of pseudo-channel 0 (column
// commands at least tCCDL apart, PRE at least tRAS after ACT, ACT at least
// tRP after PRE), that back-to-back PIM commands run at exactly one per
// tCCDL, and counts every mechanism the design has: each timing stall,
// broadcast and host commands, per-lane conditional shifts that shift some
// lanes and hold others, shift-counter saturation, sub-block exponent d = 1,
// zero/denormal inputs. A mechanism never seen is a failure.
module tb_hbm_pim_stack;
  import jitq_pkg::*;
  import jitq_tb_pkg::*;

  localparam int NPCH  = 32;
  localparam int UNITS = 8;
  localparam int SEED  = 7;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic     [NPCH-1:0] cmd_valid, cmd_ready, rdata_valid, err, issued;
  pim_cmd_t [NPCH-1:0] cmd;
  word_t    [NPCH-1:0] wdata, rdata;
  logic     [NPCH-1:0][2:0] stall_why;
  logic     [NPCH-1:0][UNITS-1:0][LANES-1:0] shift_active;

  hbm_pim_stack dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .wdata, .rdata, .rdata_valid,
    .err, .stall_why, .issued, .shift_active
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- stream driver ----------------
  pim_cmd_t stream[$];
  int       idx [NPCH];
  int       cur_m;
  typedef struct { int u; int L; int m; } rd_t;
  rd_t      exp_q [NPCH][$];

  always_comb begin
    for (int p = 0; p < NPCH; p++) begin
      cmd_valid[p] = idx[p] < stream.size();
      cmd[p]       = cmd_valid[p] ? stream[idx[p]] : '0;
      wdata[p]     = (cmd_valid[p] && cmd[p].op == OP_WR)
                   ? input_word(p, int'(cmd[p].bank) / 2, cmd_linear(cmd[p]), SEED) : '0;
    end
  end

  always @(posedge clk) begin
    for (int p = 0; p < NPCH; p++)
      if (cmd_valid[p] && cmd_ready[p]) begin
        if (cmd[p].op == OP_RD) exp_q[p].push_back('{int'(cmd[p].bank) / 2, cmd_linear(cmd[p]), cur_m});
        idx[p] <= idx[p] + 1;
      end
  end

  task automatic run(kernel_gen k, output longint cycles);
    longint t0;
    stream = k.q;
    for (int p = 0; p < NPCH; p++) idx[p] = 0;
    t0 = cyc;
    forever begin
      bit done; done = 1;
      @(posedge clk);
      for (int p = 0; p < NPCH; p++) if (idx[p] < stream.size() || exp_q[p].size() != 0) done = 0;
      if (dut.g_pch[0].u_sched.count != 0) done = 0;
      if (done) break;
    end
    repeat (4) @(posedge clk);
    cycles = cyc - t0;
  endtask

  // ---------------- read-back checker ----------------
  int n_dbit = 0, n_read = 0;
  always @(posedge clk) begin
    for (int p = 0; p < NPCH; p++)
      if (rdata_valid[p] && rst_n) begin
        rd_t r; word_t e;
        if (exp_q[p].size() == 0) begin
          failures++; $display("FAIL: unexpected read data on pch %0d", p);
        end else begin
          r = exp_q[p].pop_front();
          e = expected_word(p, r.u, r.L, r.m, SEED);
          checks++; n_read++;
          if (rdata[p] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL: pch %0d unit %0d L %0d m %0d got %h exp %h", p, r.u, r.L, r.m, rdata[p], e);
          end
          for (int l = 0; l < LANES; l++) if (((r.L - OUT_ROWQ) % 17) != 16 && e[16*l+14]) n_dbit++;
        end
      end
  end

  // ---------------- timing monitor on pseudo-channel 0 ----------------
  longint last_col = -1000, last_act[2*UNITS], last_pre[2*UNITS];
  int n_stall_ccd = 0, n_stall_ras = 0, n_stall_rp = 0, n_bcast = 0, n_host = 0;
  int n_gap_exact = 0, n_mixed_shift = 0;
  initial for (int b = 0; b < 2*UNITS; b++) begin last_act[b] = -1000; last_pre[b] = -1000; end

  always @(posedge clk) if (rst_n) begin
    pim_cmd_t c;
    c = dut.g_pch[0].iss_cmd;
    if (stall_why[0][0]) n_stall_ccd++;
    if (stall_why[0][1]) n_stall_ras++;
    if (stall_why[0][2]) n_stall_rp++;
    if (issued[0]) begin
      if (is_pim(c.op)) n_bcast++; else n_host++;
      if (is_column(c.op)) begin
        checks++;
        if (cyc - last_col < T_CCDL_CYC) begin failures++; $display("FAIL: tCCDL violated at %0d", cyc); end
        if (cyc - last_col == T_CCDL_CYC) n_gap_exact++;
        last_col = cyc;
      end
      if (c.op == OP_P_BSHFT && shift_active[0][0] != '0 && shift_active[0][0] != '1) n_mixed_shift++;
      for (int b = 0; b < 2*UNITS; b++) begin
        bit hit;
        hit = (c.op == OP_P_ACT || c.op == OP_P_PRE) ? ((b % 2) == int'(c.odd)) : (int'(c.bank) == b);
        if (hit && (c.op == OP_ACT || c.op == OP_P_ACT)) begin
          checks++;
          if (cyc - last_pre[b] < T_RP_CYC) begin failures++; $display("FAIL: tRP violated bank %0d", b); end
          last_act[b] = cyc;
        end
        if (hit && (c.op == OP_PRE || c.op == OP_P_PRE)) begin
          checks++;
          if (cyc - last_act[b] < T_RAS_CYC) begin failures++; $display("FAIL: tRAS violated bank %0d", b); end
          last_pre[b] = cyc;
        end
      end
    end
  end

  // ---------------- reference-side counts ----------------
  function automatic void count_inputs(output int n_zero, output int n_sat);
    n_zero = 0; n_sat = 0;
    for (int lane = 0; lane < LANES; lane++)
      for (int r = 0; r < 16; r++) begin
        int mx; mx = 0;
        for (int c = 0; c < 16; c++) begin
          int e; e = int'(bf16_gen(0, 0, lane, 16*r + c, SEED) >> 7) & 255;
          if (e > mx) mx = e;
        end
        for (int c = 0; c < 16; c++) begin
          int e; e = int'(bf16_gen(0, 0, lane, 16*r + c, SEED) >> 7) & 255;
          if (e == 0) n_zero++;
          if (mx - e > 31) n_sat++;
        end
      end
  endfunction

  initial begin : watchdog
    #(2 * 3_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    kernel_gen k;
    longint t_load, t_rowq, t_colq, t_read, t_mx9, t_mx4, t_rate;
    int n_zero, n_sat, nblk;
    nblk = 16;
    for (int p = 0; p < NPCH; p++) idx[p] = 0;
    cur_m = 4;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    k = new(); k.host_load(UNITS);           run(k, t_load);
    k = new(); k.quant_tiles(0, 4, 0, nblk); run(k, t_rowq);
    $display("MX6 row quantization: %0d commands (%0d bitSHIFT) in %0d cycles", k.q.size(), k.n_bshft, t_rowq);
    k = new(); k.quant_tiles(1, 4, 0, nblk); run(k, t_colq);
    $display("MX6 column quantization: %0d commands in %0d cycles", k.q.size(), t_colq);
    k = new(); k.host_read(UNITS, OUT_ROWQ, OUT_ROWQ + 17*nblk); k.host_read(UNITS, OUT_COLQ, OUT_COLQ + 17*nblk); run(k, t_read);

    // MX9 and MX4 row quantization of 4 tile rows
    cur_m = 7;
    k = new(); k.quant_tiles(0, 7, 0, 4); k.host_read(UNITS, OUT_ROWQ, OUT_ROWQ + 17*4); run(k, t_mx9);
    cur_m = 2;
    k = new(); k.quant_tiles(0, 2, 0, 4); k.host_read(UNITS, OUT_ROWQ, OUT_ROWQ + 17*4); run(k, t_mx4);

    // Rate: 64 PIM ALU commands back to back take 64 x tCCDL cycles.
    k = new(); for (int i = 0; i < 64; i++) k.alu(OP_P_OR, 12, 12, 12);
    begin
      longint t0, t1; int seen;
      stream = k.q; t0 = -1; seen = 0;
      for (int p = 0; p < NPCH; p++) idx[p] = 0;
      while (seen < 64) begin
        @(posedge clk);
        if (issued[0]) begin if (seen == 0) t0 = cyc; seen++; t1 = cyc; end
      end
      t_rate = t1 - t0;
      checks++;
      if (t_rate != 63 * T_CCDL_CYC) begin failures++; $display("FAIL: rate %0d cycles for 64 commands", t_rate); end
      repeat (10) @(posedge clk);
    end

    checks++;
    if (err != '0) begin failures++; $display("FAIL: bank protocol error %b", err); end
    checks++;
    if (n_read != NPCH * UNITS * (2*17*nblk + 2*17*4)) begin
      failures++; $display("FAIL: %0d words read back", n_read);
    end

    count_inputs(n_zero, n_sat);
    $display("load %0d, rowq %0d, colq %0d, read %0d, MX9 %0d, MX4 %0d cycles",
             t_load, t_rowq, t_colq, t_read, t_mx9, t_mx4);
    $display("pch0: stalls tCCDL=%0d tRAS=%0d tRP=%0d; broadcast=%0d host=%0d; exact-tCCDL gaps=%0d; mixed-lane bitSHIFTs=%0d",
             n_stall_ccd, n_stall_ras, n_stall_rp, n_bcast, n_host, n_gap_exact, n_mixed_shift);
    $display("sub-block d=1 elements read=%0d; zero/denormal inputs (unit0)=%0d; saturated shift counters (unit0)=%0d",
             n_dbit, n_zero, n_sat);
    checks++; if (t_colq <= t_rowq) begin failures++; $display("FAIL: column quantization not slower than row"); end
    checks++; if (n_stall_ccd == 0)  begin failures++; $display("FAIL: no tCCDL stall"); end
    checks++; if (n_stall_ras == 0)  begin failures++; $display("FAIL: no tRAS stall"); end
    checks++; if (n_stall_rp == 0)   begin failures++; $display("FAIL: no tRP stall"); end
    checks++; if (n_bcast == 0)      begin failures++; $display("FAIL: no broadcast command"); end
    checks++; if (n_host == 0)       begin failures++; $display("FAIL: no host command"); end
    checks++; if (n_mixed_shift == 0) begin failures++; $display("FAIL: no lane-dependent shift"); end
    checks++; if (n_dbit == 0)       begin failures++; $display("FAIL: no sub-block exponent d=1"); end
    checks++; if (n_zero == 0)       begin failures++; $display("FAIL: no zero input"); end
    checks++; if (n_sat == 0)        begin failures++; $display("FAIL: no saturated shift counter"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
