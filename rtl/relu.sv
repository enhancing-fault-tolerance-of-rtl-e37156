// relu: ReLU activation on a vector of hidden-layer pre-activations.
//
// dout[j] = din[j] if din[j] > 0, else 0 (Table 1 of the network
// definition).  The result is non-negative, so it loses the sign bit and is
// IN_W-1 bits wide, unsigned.  Purely combinational; one ReLU per entry of
// the hidden-layer buffer, between that buffer and the output layer's
// multiplexers, as in the block diagram of the design.
module relu #(
  parameter int unsigned N    = 128,
  parameter int unsigned IN_W = 11
) (
  input  logic signed [IN_W-1:0] din  [N],
  output logic        [IN_W-2:0] dout [N]
);

  always_comb begin
    for (int j = 0; j < N; j++)
      dout[j] = din[j][IN_W-1] ? '0 : din[j][IN_W-2:0];
  end

endmodule
