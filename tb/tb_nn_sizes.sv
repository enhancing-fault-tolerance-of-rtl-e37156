// tb_nn_sizes: the smaller networks of the design comparison (8, 32 and 64
// hidden neurons), each built at its own size, plus the 32-neuron network
// run zero-padded on the default 128-neuron build.  Every run computes the
// S-box for all 256 inputs with the constructed network (see tb_nn_pkg).
module tb_nn_sizes;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NR = 4;
  logic fin [NR];
  int   chk [NR], fl [NR];

  tb_nn_size_runner #(.NH(8),   .M(8))  r8   (.clk, .finished(fin[0]), .checks(chk[0]), .failures(fl[0]));
  tb_nn_size_runner #(.NH(32),  .M(32)) r32  (.clk, .finished(fin[1]), .checks(chk[1]), .failures(fl[1]));
  tb_nn_size_runner #(.NH(64),  .M(64)) r64  (.clk, .finished(fin[2]), .checks(chk[2]), .failures(fl[2]));
  tb_nn_size_runner #(.NH(128), .M(32)) r128 (.clk, .finished(fin[3]), .checks(chk[3]), .failures(fl[3]));

  int checks = 0, failures = 0;

  initial begin
    repeat (3_000_000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    for (int r = 0; r < NR; r++) begin
      checks += chk[r];
      failures += fl[r];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
