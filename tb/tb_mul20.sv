// tb_mul20: checks the 20 x 20 signed multiplier against the simulator's
// own 64-bit multiplication for random operands and the corner values
// (0, 1, -1, most negative, most positive, low-half patterns), the
// one-clock latency, and that the product holds while ce is low.
module tb_mul20;
  localparam int unsigned W = 20;

  logic clk = 1'b0, ce = 1'b0;
  logic signed [W-1:0]   a = '0, b = '0;
  logic signed [2*W-1:0] p;

  mul20 #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [W-1:0] pick(int n);
    case (n % 8)
      0: return 0;
      1: return 1;
      2: return -1;
      3: return {1'b1, {(W-1){1'b0}}};
      4: return {1'b0, {(W-1){1'b1}}};
      5: return W'(20'h003ff);
      default: return W'($urandom);
    endcase
  endfunction

  initial begin
    for (int n = 0; n < 2000; n++) begin
      automatic longint e;
      @(negedge clk);
      a = pick(n > 64 ? 7 : n);
      b = pick(n > 64 ? 7 : n / 8);
      e = longint'(a) * longint'(b);
      ce = 1'b1;
      @(negedge clk);
      ce = 1'b0;
      a = W'($urandom);  b = W'($urandom);
      checks++;
      if (longint'(p) != e) begin
        failures++;
        $display("FAIL got %0d exp %0d", p, e);
      end
      @(negedge clk);
      checks++;
      if (longint'(p) != e) begin
        failures++;
        $display("FAIL hold got %0d exp %0d", p, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
