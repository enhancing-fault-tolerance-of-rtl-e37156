// tb_dsp_simd_adder: checks every lane sum of the SIMD adder for random and
// extreme operands (carries and borrows must not cross lanes), the one-clock
// latency, and that the result holds while ce is low.
module tb_dsp_simd_adder;
  localparam int unsigned LANES = 4, IN_W = 7;

  logic clk = 1'b0, ce = 1'b0;
  logic signed [IN_W-1:0] a [LANES], b [LANES];
  logic signed [IN_W:0]   sum [LANES];

  dsp_simd_adder #(.LANES(LANES), .IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int exp_s [LANES];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (int'(sum[i]) != exp_s[i]) begin
        failures++;
        $display("FAIL %s lane %0d got %0d exp %0d", what, i, sum[i], exp_s[i]);
      end
    end
  endtask

  initial begin
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      for (int i = 0; i < LANES; i++) begin
        case (n % 4)
          0: begin a[i] = IN_W'($urandom); b[i] = IN_W'($urandom); end
          1: begin a[i] = {1'b1, {(IN_W-1){1'b0}}}; b[i] = {1'b1, {(IN_W-1){1'b0}}}; end  // most negative
          2: begin a[i] = {1'b0, {(IN_W-1){1'b1}}}; b[i] = {1'b0, {(IN_W-1){1'b1}}}; end  // most positive
          default: begin a[i] = -1; b[i] = IN_W'($urandom); end
        endcase
        exp_s[i] = int'(a[i]) + int'(b[i]);
      end
      ce = 1'b1;
      @(negedge clk);
      ce = 1'b0;
      compare("sum");
      // hold with ce low
      for (int i = 0; i < LANES; i++) begin a[i] = IN_W'($urandom); b[i] = IN_W'($urandom); end
      @(negedge clk);
      compare("hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
