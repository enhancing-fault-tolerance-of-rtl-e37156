// dsp_simd_adder: several small additions done by one wide adder, as a DSP
// slice used in SIMD mode.
//
// Each lane i computes sum[i] = a[i] + b[i] on signed IN_W-bit operands and
// produces an (IN_W+1)-bit signed result.  The lanes are packed side by side
// into one wide word: every lane field is the sign-extended operand
// (IN_W+1 bits) followed by one zero padding bit above it.  The padding bit
// catches the carry out of the lane below, so one wide addition gives all
// lane sums at once and the padding bits are dropped afterwards.  The result
// is registered (the DSP output register), loaded when ce is high: latency is
// one clock.
//
// The use of DSP adders with zero padding follows the paper; the packing
// format (one guard bit per lane, sign-extended lanes) is this design's own.
module dsp_simd_adder #(
  parameter int unsigned LANES = 4,
  parameter int unsigned IN_W  = 7
) (
  input  logic                     clk,
  input  logic                     ce,
  input  logic signed [IN_W-1:0]   a   [LANES],
  input  logic signed [IN_W-1:0]   b   [LANES],
  output logic signed [IN_W:0]     sum [LANES]
);

  localparam int unsigned FW = IN_W + 2;      // lane field: value + padding bit

  logic [LANES*FW-1:0] pa, pb, ps;

  always_comb begin
    pa = '0;
    pb = '0;
    for (int i = 0; i < LANES; i++) begin
      pa[i*FW +: IN_W+1] = {a[i][IN_W-1], a[i]};
      pb[i*FW +: IN_W+1] = {b[i][IN_W-1], b[i]};
    end
    ps = pa + pb;
  end

  always_ff @(posedge clk) begin
    if (ce) begin
      for (int i = 0; i < LANES; i++) sum[i] <= ps[i*FW +: IN_W+1];
    end
  end

endmodule
