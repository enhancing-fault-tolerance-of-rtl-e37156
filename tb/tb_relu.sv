// tb_relu: checks ReLU on all 128 lanes for random signed inputs and the
// edge values 0, -1, the most negative and the most positive.
module tb_relu;
  localparam int unsigned N = 128, IN_W = 11;

  logic signed [IN_W-1:0] din [N];
  logic        [IN_W-2:0] dout [N];

  relu #(.N(N), .IN_W(IN_W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int j = 0; j < N; j++) begin
        case (j % 8)
          0: din[j] = 0;
          1: din[j] = -1;
          2: din[j] = {1'b1, {(IN_W-1){1'b0}}};
          3: din[j] = {1'b0, {(IN_W-1){1'b1}}};
          default: din[j] = IN_W'($urandom);
        endcase
      end
      #1;
      for (int j = 0; j < N; j++) begin
        automatic int e = (int'(din[j]) > 0) ? int'(din[j]) : 0;
        checks++;
        if (int'(dout[j]) != e) begin
          failures++;
          $display("FAIL lane %0d in %0d got %0d exp %0d", j, din[j], dout[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
