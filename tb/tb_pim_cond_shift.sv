// tb_pim_cond_shift: self-checking test of the per-lane conditional shifter.
//
// Loads random shift amounts (some above the counter range, which must
// saturate) and random data, then applies single-bit shift steps, checking
// each lane's output and active flag against a model that keeps its own
// counters. Also checks that the counters hold without a step, that load wins
// over step, and that after k steps a lane has been shifted by min(S, k).
module tb_pim_cond_shift;
  localparam int LANES = 16, LANE_W = 16, CNT_W = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, step;
  logic [LANES-1:0][LANE_W-1:0] load_val, din, dout;
  logic [LANES-1:0] active;

  pim_cond_shift #(.LANES(LANES), .LANE_W(LANE_W), .CNT_W(CNT_W)) dut (.*);

  int checks = 0, failures = 0;
  int model [LANES];

  task automatic check_now();
    for (int i = 0; i < LANES; i++) begin
      logic [LANE_W-1:0] e;
      e = (model[i] > 0) ? din[i] >> 1 : din[i];
      checks++;
      if (dout[i] !== e || active[i] !== (model[i] > 0)) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d: cnt %0d din %h dout %h active %b", i, model[i], din[i], dout[i], active[i]);
      end
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; step = 0; load_val = '0; din = '0;
    for (int i = 0; i < LANES; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      // load
      @(negedge clk);
      for (int i = 0; i < LANES; i++) begin
        load_val[i] = (i == 0) ? 16'd0 : (i == 1) ? 16'd200 : 16'($urandom_range(0, 12));
        din[i] = 16'($urandom);
      end
      load = 1; step = (trial % 2 == 1);     // load has priority over step
      @(posedge clk); #1;
      for (int i = 0; i < LANES; i++) model[i] = (load_val[i] > 31) ? 31 : int'(load_val[i]);
      @(negedge clk); load = 0; step = 0;
      check_now();
      // idle cycle: counters hold
      @(posedge clk); #1; check_now();
      // shift a value through 10 steps with feedback
      begin
        logic [LANES-1:0][LANE_W-1:0] start; int s0 [LANES];
        start = din;
        for (int i = 0; i < LANES; i++) s0[i] = model[i];
        for (int k = 0; k < 10; k++) begin
          logic [LANES-1:0][LANE_W-1:0] nxt;
          @(negedge clk); check_now();
          nxt = dout;       // value shifted by this step, fed back next cycle
          step = 1;
          @(posedge clk); #1;
          din = nxt;
          for (int i = 0; i < LANES; i++) if (model[i] > 0) model[i]--;
          @(negedge clk); step = 0;
        end
        // total shift = min(S, 10)
        for (int i = 0; i < LANES; i++) begin
          int sh; sh = (s0[i] < 10) ? s0[i] : 10;
          checks++;
          if (din[i] !== (start[i] >> sh)) begin
            failures++; $display("FAIL lane %0d total shift: %h vs %h", i, din[i], start[i] >> sh);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
