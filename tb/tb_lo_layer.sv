// tb_lo_layer: loads random second-layer weights and output biases at the
// default sizes (128 x 256), drives random activations (including 0 and the
// largest value), and checks every emitted y_k and its index against a
// software dot product, the spacing of one y per 17 clocks, and that done
// comes 17*N_OUT + 4 clocks after start.
module tb_lo_layer;
  import nn_pkg::*;

  localparam int unsigned NH = N_HID, NO = N_OUT;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [A_W-1:0] h [NH];
  logic w_we = 1'b0, b_we = 1'b0;
  logic [$clog2(NO)-1:0] w_row = '0, b_row = '0;
  logic [$clog2(NH)-1:0] w_col = '0;
  logic signed [W2_W-1:0] w_data = '0;
  logic signed [B2_W-1:0] b_data = '0;
  logic busy, done, y_valid;
  logic signed [ACC_W-1:0] y;
  logic [$clog2(NO)-1:0] y_idx;

  lo_layer #(.N_HID_P(NH), .N_OUT_P(NO)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int w2 [NO][NH];
  int b2 [NO];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    w_we = 1;
    for (int k = 0; k < NO; k++) begin
      for (int j = 0; j < NH; j++) begin
        w2[k][j] = int'($urandom_range(255)) - 128;
        w_row = 8'(k);  w_col = 7'(j);  w_data = W2_W'(w2[k][j]);
        @(negedge clk);
      end
    end
    w_we = 0;  b_we = 1;
    for (int k = 0; k < NO; k++) begin
      b2[k] = int'($urandom_range(65535)) - 32768;
      b_row = 8'(k);  b_data = B2_W'(b2[k]);
      @(negedge clk);
    end
    b_we = 0;
    for (int r = 0; r < 3; r++) begin
      automatic int cyc = 0, n_y = 0, last_y = 0;
      for (int j = 0; j < NH; j++)
        h[j] = (r == 1) ? '1 : ((j % 5 == 0) ? '0 : A_W'($urandom));
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        if (y_valid) begin
          automatic longint e = b2[n_y];
          for (int j = 0; j < NH; j++) e += longint'(h[j]) * w2[n_y][j];
          check(int'(y_idx) == n_y, $sformatf("index %0d exp %0d", y_idx, n_y));
          check(longint'(y) == e, $sformatf("y[%0d] got %0d exp %0d", n_y, y, e));
          if (n_y > 0) check(cyc - last_y == LO_CYC_PER_NEURON, "one y per 17 clocks");
          last_y = cyc;
          n_y++;
        end
        @(negedge clk);
        cyc++;
      end
      check(n_y == NO, $sformatf("%0d outputs, exp %0d", n_y, NO));
      check(cyc == LO_CYC_PER_NEURON * NO + LO_LAT_EXTRA, $sformatf("latency %0d exp %0d", cyc, LO_CYC_PER_NEURON * NO + LO_LAT_EXTRA));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
