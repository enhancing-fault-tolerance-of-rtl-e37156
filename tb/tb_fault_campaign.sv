// tb_fault_campaign: single-location fault campaign on the full-size
// network, in the manner of the fault-tolerance evaluation of the design.
//
// The constructed S-box network for key 0x25 (see tb_nn_pkg) is loaded.
// For sampled parameters of each of the four kinds (first-layer weight,
// hidden bias, second-layer weight, output bias), each faulty value in turn
// (every single-bit flip of the stored parameter, zero, all bits flipped,
// and one random value) is
// written through the load port, a set of inputs is run, and the parameter
// is restored.  The inputs always include the one whose correct class is
// the affected output neuron, so the harmful direction is exercised.
// Every hardware result must equal the integer reference model run with the
// same faulty parameter; the bench also reports, per kind, how many results
// differ from the fault-free SBox(x xor k) ("% faults" =
// faulty results / (faults tried x inputs)).
module tb_fault_campaign;
  import nn_pkg::*;
  import tb_nn_pkg::*;

  localparam logic [7:0] KEY = 8'h25;
  localparam int unsigned N_PARAMS = 4;   // parameters sampled per kind
  localparam int unsigned N_INPUTS = 12;  // inputs run per faulty value

  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [7:0]  x_in = '0;
  logic        prm_we = 1'b0;
  logic [1:0]  prm_sel = '0;
  logic [7:0]  prm_row = '0;
  logic [6:0]  prm_col = '0;
  logic [15:0] prm_data = '0;
  logic        busy, done;
  logic [7:0]  y_out;

  nn_sbox_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int runs [4], faulty [4];

  task automatic write_prm(prm_sel_e sel, int row, int col, int val);
    @(negedge clk);
    prm_we = 1'b1;  prm_sel = sel;  prm_row = 8'(row);  prm_col = 7'(col);  prm_data = 16'(val);
    @(negedge clk);
    prm_we = 1'b0;
  endtask

  task automatic run(logic [7:0] x, output logic [7:0] y);
    @(negedge clk);
    x_in = x;  start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    y = y_out;
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic nn_model m = new();
    logic [7:0] inv [256];
    for (int v = 0; v < 256; v++) inv[aes_sbox(8'(v))] = 8'(v);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    m.set_sbox(KEY);
    // full load through the port
    for (int j = 0; j < N_HID; j++) begin
      for (int i = 0; i < N_IN; i++) write_prm(PRM_W1, j, i, m.w1[j][i]);
      write_prm(PRM_B1, j, 0, m.b1[j]);
    end
    for (int k = 0; k < N_OUT; k++) begin
      for (int j = 0; j < N_HID; j++) write_prm(PRM_W2, k, j, m.w2[k][j]);
      write_prm(PRM_B2, k, 0, m.b2[k]);
    end

    for (int kind = 0; kind < 4; kind++) begin
      for (int p = 0; p < N_PARAMS; p++) begin
        automatic int row = (kind < 2) ? $urandom_range(N_HID - 1) : $urandom_range(N_OUT - 1);
        automatic int col = (kind == 0) ? $urandom_range(N_IN - 1) : (kind == 2) ? $urandom_range(N_HID - 1) : 0;
        automatic int width = (kind == 0) ? W1_W : (kind == 1) ? B1_W : (kind == 2) ? W2_W : B2_W;
        automatic int orig = (kind == 0) ? m.w1[row][col] : (kind == 1) ? m.b1[row] : (kind == 2) ? m.w2[row][col] : m.b2[row];
        for (int f = 0; f < width + 3; f++) begin
          // faulty value, in the stored width: bit f flipped (f < width), then zero,
          // all bits flipped, and a random value
          automatic logic [31:0] raw = (f < width)      ? (32'(orig) ^ (32'd1 << f)) :
                                       (f == width)     ? 32'd0 :
                                       (f == width + 1) ? ~32'(orig) : $urandom;
          automatic int fv = int'(raw << (32 - width)) >>> (32 - width);
          case (kind)
            0: begin m.w1[row][col] = fv; write_prm(PRM_W1, row, col, fv); end
            1: begin m.b1[row] = fv;      write_prm(PRM_B1, row, 0, fv);   end
            2: begin m.w2[row][col] = fv; write_prm(PRM_W2, row, col, fv); end
            default: begin m.b2[row] = fv; write_prm(PRM_B2, row, 0, fv); end
          endcase
          for (int n = 0; n < N_INPUTS; n++) begin
            automatic logic [7:0] x = (n == 0 && kind >= 2) ? (inv[row] ^ KEY) : 8'($urandom);
            automatic int ref_y = m.infer(x);
            logic [7:0] y;
            run(x, y);
            checks++;
            if (y != 8'(ref_y)) begin
              failures++;
              $display("FAIL kind %0d row %0d col %0d value %0d x=%02h got %02h exp %02h", kind, row, col, fv, x, y, ref_y);
            end
            runs[kind]++;
            if (y != aes_sbox(x ^ KEY)) faulty[kind]++;
          end
        end
        case (kind)
          0: begin m.w1[row][col] = orig; write_prm(PRM_W1, row, col, orig); end
          1: begin m.b1[row] = orig;      write_prm(PRM_B1, row, 0, orig);   end
          2: begin m.w2[row][col] = orig; write_prm(PRM_W2, row, col, orig); end
          default: begin m.b2[row] = orig; write_prm(PRM_B2, row, 0, orig); end
        endcase
      end
    end
    $display("faulty outputs: W1 %0d/%0d  B1 %0d/%0d  W2 %0d/%0d  B2 %0d/%0d",
             faulty[0], runs[0], faulty[1], runs[1], faulty[2], runs[2], faulty[3], runs[3]);
    // the campaign must have produced both tolerated and harmful faults
    checks++;
    if (faulty[0] + faulty[1] + faulty[2] + faulty[3] == 0) begin failures++; $display("FAIL: no fault took effect"); end
    checks++;
    if (faulty[0] + faulty[1] + faulty[2] + faulty[3] == runs[0] + runs[1] + runs[2] + runs[3]) begin failures++; $display("FAIL: no fault was tolerated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
