// tb_pim_regfile: self-checking test of the PIM register file.
//
// Random writes and dual reads against a model array; checks reset to zero
// and that a same-cycle read returns the old value.
module tb_pim_regfile;
  localparam int NREGS = 16, WIDTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we;
  logic [3:0] waddr, raddr_a, raddr_b;
  logic [WIDTH-1:0] wdata, rdata_a, rdata_b;
  pim_regfile #(.NREGS(NREGS), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] m [NREGS];

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = '0; raddr_a = 0; raddr_b = 0;
    for (int i = 0; i < NREGS; i++) m[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NREGS; i++) begin
      @(negedge clk); raddr_a = 4'(i); raddr_b = 4'(NREGS - 1 - i); #1;
      checks++;
      if (rdata_a !== '0 || rdata_b !== '0) begin failures++; $display("FAIL: reg %0d not reset", i); end
    end
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 3) != 0); waddr = 4'($urandom); wdata = rnd();
      raddr_a = 4'($urandom); raddr_b = (t % 4 == 0) ? waddr : 4'($urandom);
      #1;
      checks++;
      if (rdata_a !== m[raddr_a] || rdata_b !== m[raddr_b]) begin
        failures++;
        if (failures < 10) $display("FAIL: read %0d/%0d", raddr_a, raddr_b);
      end
      @(posedge clk);
      if (we) m[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
