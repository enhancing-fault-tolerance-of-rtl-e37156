// tb_nn_size_runner: test-bench helper that runs the constructed S-box
// network with M active hidden neurons on a network built with NH >= M
// hidden neurons.  Hidden neurons M .. NH-1 get all-zero weights and bias,
// so they output 0 and contribute nothing: this is how a smaller network
// runs on a larger build.  All 256 inputs are checked against
// SBox(x xor KEY), and each inference's latency against
// NH + (NH/8 + 1)*256 + 9 clocks.  Reports through its ports when finished.
module tb_nn_size_runner
  import nn_pkg::*;
  import tb_nn_pkg::*;
#(
  parameter int unsigned NH  = 32,
  parameter int unsigned M   = 32,
  parameter logic [7:0]  KEY = 8'h25
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);

  localparam int unsigned LAT = NH + (NH / N_MUL + 1) * N_OUT + 9;

  logic        rst_n = 1'b0, start = 1'b0;
  logic [7:0]  x_in = '0;
  logic        prm_we = 1'b0;
  logic [1:0]  prm_sel = '0;
  logic [7:0]  prm_row = '0;
  logic [6:0]  prm_col = '0;
  logic [15:0] prm_data = '0;
  logic        busy, done;
  logic [7:0]  y_out;

  nn_sbox_top #(.N_HID_P(NH)) dut (.*);

  task automatic put(prm_sel_e sel, int row, int col, int val);
    prm_sel = sel;  prm_row = 8'(row);  prm_col = 7'(col);  prm_data = 16'(val);
    @(negedge clk);
  endtask

  initial begin
    automatic nn_model m = new(M, N_OUT);
    finished = 1'b0;  checks = 0;  failures = 0;
    m.set_sbox(KEY);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    prm_we = 1'b1;
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < N_IN; i++) put(PRM_W1, j, i, (j < M) ? m.w1[j][i] : 0);
      put(PRM_B1, j, 0, (j < M) ? m.b1[j] : 0);
    end
    for (int k = 0; k < N_OUT; k++) begin
      for (int j = 0; j < NH; j++) put(PRM_W2, k, j, (j < M) ? m.w2[k][j] : 0);
      put(PRM_B2, k, 0, m.b2[k]);
    end
    prm_we = 1'b0;
    for (int x = 0; x < 256; x++) begin
      automatic int cyc = 1;
      @(negedge clk);
      x_in = 8'(x);  start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 2;
      if (y_out != aes_sbox(8'(x) ^ KEY)) begin
        failures++;
        $display("FAIL NH=%0d M=%0d x=%02h got %02h exp %02h", NH, M, x, y_out, aes_sbox(8'(x) ^ KEY));
      end
      if (cyc != LAT) begin
        failures++;
        $display("FAIL NH=%0d latency %0d exp %0d", NH, cyc, LAT);
      end
    end
    finished = 1'b1;
  end

endmodule
