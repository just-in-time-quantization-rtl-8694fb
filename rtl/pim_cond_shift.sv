// pim_cond_shift: counter-based conditional intra-lane shift of the PIM ALU.
//
// MX quantization shifts every element's significand right by its own amount
// (shared exponent minus the element's exponent), so one shift amount cannot
// serve all lanes. Each lane therefore keeps a shift-amount counter S_i. A
// load sets all counters at once from the lanes of a register (values that do
// not fit in CNT_W bits saturate at the counter's maximum). On each
// pim-bitSHIFT (step) a lane with S_i > 0 presents din >> 1 on dout and its
// counter decrements; a lane with S_i = 0 presents din unchanged. Issuing as
// many bitSHIFTs as the largest shift needed thus applies a different shift
// in every lane with one command per bit.
//
// Interface: load/load_val and step are sampled at the rising clock edge
// (load wins if both are set); dout and active are combinational from the
// counters and din. Reset clears the counters.
//
// The counter, the S_i > 0 test and the decrement follow the paper. The
// counter width and the saturation on load are choices of this design.
module pim_cond_shift #(
  parameter int unsigned LANES  = 16,
  parameter int unsigned LANE_W = 16,
  parameter int unsigned CNT_W  = 5
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load,
  input  logic [LANES-1:0][LANE_W-1:0]  load_val,
  input  logic                          step,
  input  logic [LANES-1:0][LANE_W-1:0]  din,
  output logic [LANES-1:0][LANE_W-1:0]  dout,
  output logic [LANES-1:0]              active
);

  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  logic [LANES-1:0][CNT_W-1:0] cnt;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      active[i] = (cnt[i] != '0);
      dout[i]   = active[i] ? (din[i] >> 1) : din[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (load) begin
      for (int i = 0; i < LANES; i++)
        cnt[i] <= (load_val[i] > LANE_W'(CNT_MAX)) ? CNT_MAX : CNT_W'(load_val[i]);
    end else if (step) begin
      for (int i = 0; i < LANES; i++)
        if (cnt[i] != '0) cnt[i] <= cnt[i] - 1'b1;
    end
  end

endmodule
