// weight_mem: parameter store of one network layer (a block RAM).
//
// The memory holds ROWS rows of COLS signed W-bit parameters; a row holds
// everything one neuron needs in one iteration (its eight first-layer
// weights, its 128 second-layer weights, or a single bias).  The read port is
// synchronous: rd_data shows row rd_row one clock after it is presented, as a
// block RAM with an output register does.  The write port stores one
// parameter (wr_row, wr_col) per clock.
//
// In the paper the store is a ROM holding trained values.  The trained values
// are not published, so here the contents are loaded through the write port;
// the same port lets a test bench corrupt a single parameter, which is the
// single-location fault model the network is designed to tolerate.
module weight_mem #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 8,
  parameter int unsigned W    = 8
) (
  input  logic                                  clk,
  input  logic                                  wr_en,
  input  logic [$clog2(ROWS)-1:0]               wr_row,
  input  logic [(COLS > 1 ? $clog2(COLS) : 1)-1:0] wr_col,
  input  logic signed [W-1:0]                   wr_data,
  input  logic [$clog2(ROWS)-1:0]               rd_row,
  output logic signed [W-1:0]                   rd_data [COLS]
);

  logic signed [W-1:0] mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][(COLS > 1) ? wr_col : '0] <= wr_data;
    rd_data <= mem[rd_row];
  end

endmodule
