// argmax: running maximum over the stream of output-layer values.
//
// A COMPARATOR checks each valid value against MAXVAL; when it is strictly
// larger (or it is the first value after clear) MAXVAL takes the value and
// MAXIDX takes its index, which comes from the output layer's neuron counter.
// After the last value MAXIDX holds the winning class (register LM of the
// design).  Values are signed.  clear and valid are sampled on the clock
// edge; max_idx is updated one clock after a valid value.
//
// Structure (MAXVAL, MAXIDX, COMPARATOR) follows the paper.  Tie handling is
// this design's choice: the strict comparison keeps the lowest index.
module argmax #(
  parameter int unsigned VAL_W = 48,
  parameter int unsigned IDX_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    valid,
  input  logic signed [VAL_W-1:0] val,
  input  logic        [IDX_W-1:0] idx,
  output logic signed [VAL_W-1:0] max_val,
  output logic        [IDX_W-1:0] max_idx
);

  logic have;      // MAXVAL holds a value of the current search
  logic greater;   // COMPARATOR output

  assign greater = !have || (val > max_val);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have    <= 1'b0;
      max_val <= '0;
      max_idx <= '0;
    end else if (clear) begin
      have    <= 1'b0;
    end else if (valid && greater) begin
      have    <= 1'b1;
      max_val <= val;
      max_idx <= idx;
    end
  end

endmodule
