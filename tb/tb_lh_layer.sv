// tb_lh_layer: loads random first-layer weights and hidden biases (full
// range, so sums go negative and reach the width limits), runs the hidden
// layer for random inputs and for 0x00 and 0xff, and checks every buffer
// entry h_j = b(1)[j] + sum of the weights of the 1-bits of x, and that done
// comes N_HID + 4 clocks after start.
module tb_lh_layer;
  import nn_pkg::*;

  localparam int unsigned NH = N_HID;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [N_IN-1:0] x = '0;
  logic w_we = 1'b0, b_we = 1'b0;
  logic [$clog2(NH)-1:0] w_row = '0, b_row = '0;
  logic [$clog2(N_IN)-1:0] w_col = '0;
  logic signed [W1_W-1:0] w_data = '0;
  logic signed [B1_W-1:0] b_data = '0;
  logic busy, done;
  logic signed [H_W-1:0] hbuf [NH];

  lh_layer #(.N_HID_P(NH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int w1 [NH][N_IN];
  int b1 [NH];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(int mode);
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < N_IN; i++) begin
        case (mode)
          0: w1[j][i] = int'($urandom_range((1 << W1_W) - 1)) - (1 << (W1_W - 1));
          1: w1[j][i] = -(1 << (W1_W - 1));
          default: w1[j][i] = (1 << (W1_W - 1)) - 1;
        endcase
        @(negedge clk);
        w_we = 1;  w_row = $clog2(NH)'(j);  w_col = 3'(i);  w_data = W1_W'(w1[j][i]);
      end
      case (mode)
        0: b1[j] = int'($urandom_range((1 << B1_W) - 1)) - (1 << (B1_W - 1));
        1: b1[j] = -(1 << (B1_W - 1));
        default: b1[j] = (1 << (B1_W - 1)) - 1;
      endcase
      @(negedge clk);
      w_we = 0;  b_we = 1;  b_row = $clog2(NH)'(j);  b_data = B1_W'(b1[j]);
    end
    @(negedge clk);
    w_we = 0;  b_we = 0;
  endtask

  task automatic run(logic [7:0] xv);
    int cyc = 0;
    @(negedge clk);
    x = xv;  start = 1;
    @(negedge clk);
    start = 0;  x = ~xv;     // x must be sampled at start only
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NH + LH_LAT_EXTRA) begin
      failures++;
      $display("FAIL latency %0d exp %0d", cyc, NH + LH_LAT_EXTRA);
    end
    for (int j = 0; j < NH; j++) begin
      int e = b1[j];
      for (int i = 0; i < N_IN; i++) if (xv[i]) e += w1[j][i];
      checks++;
      if (int'(hbuf[j]) != e) begin
        failures++;
        $display("FAIL x=%02h h[%0d] got %0d exp %0d", xv, j, hbuf[j], e);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 3; mode++) begin
      load(mode);
      run(8'h00);
      run(8'hff);
      for (int n = 0; n < 8; n++) run(8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
