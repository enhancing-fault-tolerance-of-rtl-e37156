// mul20: signed W x W-bit multiplier (W = 20) assembled from smaller
// multipliers, as a multiplier spread over several DSP slices.
//
// Each operand is split into a signed high half and an unsigned low half of
// W/2 bits: a = ah*2^(W/2) + al.  Four partial products (one per DSP slice)
// are formed and added after shifting:
//   p = ah*bh*2^W + (ah*bl + al*bh)*2^(W/2) + al*bl.
// The product is registered when ce is high: latency one clock.
//
// The 20-bit operand width and the construction from several DSP blocks and
// adders follow the paper; the half-width split is this design's own.
module mul20 #(
  parameter int unsigned W = 20
) (
  input  logic                    clk,
  input  logic                    ce,
  input  logic signed [W-1:0]     a,
  input  logic signed [W-1:0]     b,
  output logic signed [2*W-1:0]   p
);

  localparam int unsigned HW = W / 2;          // low half width
  localparam int unsigned UW = W - HW;         // high half width

  logic signed [UW-1:0]  ah, bh;
  logic signed [HW:0]    al, bl;               // low halves, zero-extended
  logic signed [2*W-1:0] pp_hh, pp_hl, pp_lh, pp_ll, psum;

  always_comb begin
    ah = a[W-1:HW];
    bh = b[W-1:HW];
    al = {1'b0, a[HW-1:0]};
    bl = {1'b0, b[HW-1:0]};
    pp_hh = ah * bh;
    pp_hl = ah * bl;
    pp_lh = al * bh;
    pp_ll = al * bl;
    psum  = (pp_hh <<< (2*HW)) + ((pp_hl + pp_lh) <<< HW) + pp_ll;
  end

  always_ff @(posedge clk) begin
    if (ce) p <= psum;
  end

endmodule
