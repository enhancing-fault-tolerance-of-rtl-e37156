// tb_nn_sbox_top: end-to-end test of the whole network at its default sizes
// (8-128-256).
//
// 1. Loads the constructed S-box network (see tb_nn_pkg) for key 0x25 and
//    checks y_out = SBox(x xor 0x25) for every one of the 256 inputs, and the
//    start-to-done latency N_HID + 17*N_OUT + 9 of each inference.
// 2. Loads random parameters and checks y_out against the integer reference
//    model for random inputs (negative pre-activations reach the ReLU here).
// 3. Makes all outputs equal and checks that the tie goes to index 0.
// 4. Pulses start during a running inference and checks it is ignored.
// 5. Injects single-parameter faults through the load port: a small fault in
//    a second-layer weight that the margin absorbs, and a large one that
//    changes the answer, both compared with the reference model.
// Every mechanism exercised is counted; one that never happened is a failure.
module tb_nn_sbox_top;
  import nn_pkg::*;
  import tb_nn_pkg::*;

  localparam int unsigned LAT = N_HID + LO_CYC_PER_NEURON * N_OUT + LH_LAT_EXTRA + LO_LAT_EXTRA + 1;

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
  int n_sbox_ok = 0, n_random = 0, n_relu_clamp = 0, n_tie = 0, n_ignored_start = 0;
  int n_fault_tolerated = 0, n_fault_misclass = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_prm(prm_sel_e sel, int row, int col, int val);
    @(negedge clk);
    prm_we = 1'b1;  prm_sel = sel;  prm_row = 8'(row);  prm_col = 7'(col);  prm_data = 16'(val);
    @(negedge clk);
    prm_we = 1'b0;
  endtask

  task automatic load(nn_model m);
    @(negedge clk);
    prm_we = 1'b1;
    for (int j = 0; j < N_HID; j++) begin
      for (int i = 0; i < N_IN; i++) begin
        prm_sel = PRM_W1;  prm_row = 8'(j);  prm_col = 7'(i);  prm_data = 16'(m.w1[j][i]);
        @(negedge clk);
      end
      prm_sel = PRM_B1;  prm_row = 8'(j);  prm_data = 16'(m.b1[j]);
      @(negedge clk);
    end
    for (int k = 0; k < N_OUT; k++) begin
      for (int j = 0; j < N_HID; j++) begin
        prm_sel = PRM_W2;  prm_row = 8'(k);  prm_col = 7'(j);  prm_data = 16'(m.w2[k][j]);
        @(negedge clk);
      end
      prm_sel = PRM_B2;  prm_row = 8'(k);  prm_data = 16'(m.b2[k]);
      @(negedge clk);
    end
    prm_we = 1'b0;
  endtask

  // Runs one inference; optionally pulses start again while it is running.
  task automatic run(logic [7:0] x, output logic [7:0] y, output int cycles, input bit poke = 0);
    @(negedge clk);
    x_in = x;  start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin
      if (poke && cycles == 50) begin
        x_in = ~x;  start = 1'b1;
      end else begin
        start = 1'b0;
      end
      @(negedge clk);
      cycles++;
    end
    y = y_out;
  endtask

  initial begin : watchdog
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nn_model m = new();
    logic [7:0] y;
    int cyc, ref_y;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // AES S-box sanity (values from FIPS-197)
    check(aes_sbox(8'h00) == 8'h63 && aes_sbox(8'h53) == 8'hed && aes_sbox(8'h01) == 8'h7c, "aes_sbox reference");

    // ---- 1. constructed S-box network, all inputs ----
    m.set_sbox(8'h25);
    load(m);
    for (int x = 0; x < 256; x++) begin
      run(8'(x), y, cyc);
      check(y == aes_sbox(8'(x) ^ 8'h25), $sformatf("sbox x=%02h got %02h exp %02h", x, y, aes_sbox(8'(x) ^ 8'h25)));
      check(cyc == LAT, $sformatf("latency %0d exp %0d", cyc, LAT));
      if (y == aes_sbox(8'(x) ^ 8'h25)) n_sbox_ok++;
    end

    // ---- 5. single-parameter faults on the S-box network (x = 0x3a) ----
    begin
      automatic logic [7:0] x = 8'h3a;
      automatic int c = aes_sbox(x ^ 8'h25);
      automatic int orig = m.w2[c][5];
      // small fault: weight of the winning neuron moved by 1 in the harmful direction
      m.w2[c][5] = orig - 1;
      write_prm(PRM_W2, c, 5, m.w2[c][5]);
      ref_y = m.infer(x);
      run(x, y, cyc);
      check(y == 8'(ref_y), $sformatf("small fault got %02h exp %02h", y, ref_y));
      if (y == 8'(c)) n_fault_tolerated++;
      // large fault: the same weight driven to the most negative value
      m.w2[c][5] = -128;
      write_prm(PRM_W2, c, 5, m.w2[c][5]);
      ref_y = m.infer(x);
      run(x, y, cyc);
      check(y == 8'(ref_y), $sformatf("large fault got %02h exp %02h", y, ref_y));
      if (y != 8'(c)) n_fault_misclass++;
      m.w2[c][5] = orig;
      write_prm(PRM_W2, c, 5, orig);
      run(x, y, cyc);
      check(y == 8'(c), "fault removed");
    end

    // ---- 4. start during a running inference is ignored ----
    run(8'h11, y, cyc, 1);
    check(y == aes_sbox(8'h11 ^ 8'h25) && cyc == LAT, "start while busy must be ignored");
    if (y == aes_sbox(8'h11 ^ 8'h25) && cyc == LAT) n_ignored_start++;
    repeat (2) @(negedge clk);
    check(!busy, "no second inference after ignored start");

    // ---- 3. tie: all outputs equal, lowest index wins ----
    for (int k = 0; k < N_OUT; k++) begin
      write_prm(PRM_B2, k, 0, 7);
      for (int j = 0; j < N_HID; j++) if (m.w2[k][j] != 0) begin
        m.w2[k][j] = 0;
        write_prm(PRM_W2, k, j, 0);
      end
    end
    run(8'h99, y, cyc);
    check(y == 8'h00, $sformatf("tie got %02h exp 00", y));
    if (y == 8'h00) n_tie++;

    // ---- 2. random networks ----
    for (int r = 0; r < 2; r++) begin
      m.set_random();
      load(m);
      for (int n = 0; n < 4; n++) begin
        automatic logic [7:0] x = 8'($urandom);
        ref_y = m.infer(x);
        n_relu_clamp += m.neg_pre;
        run(x, y, cyc);
        check(y == 8'(ref_y), $sformatf("random net x=%02h got %02h exp %02h", x, y, ref_y));
        check(cyc == LAT, "latency (random net)");
        n_random++;
      end
    end

    $display("mechanisms: sbox_ok=%0d random=%0d relu_clamp=%0d tie=%0d ignored_start=%0d fault_tolerated=%0d fault_misclass=%0d",
             n_sbox_ok, n_random, n_relu_clamp, n_tie, n_ignored_start, n_fault_tolerated, n_fault_misclass);
    check(n_sbox_ok > 0,         "mechanism: correct S-box inference");
    check(n_random > 0,          "mechanism: random network inference");
    check(n_relu_clamp > 0,      "mechanism: ReLU clamping");
    check(n_tie > 0,             "mechanism: ArgMax tie");
    check(n_ignored_start > 0,   "mechanism: start while busy");
    check(n_fault_tolerated > 0, "mechanism: tolerated fault");
    check(n_fault_misclass > 0,  "mechanism: fault causing misclassification");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
