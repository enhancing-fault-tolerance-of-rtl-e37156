// tb_argmax: streams random signed values (with gaps in valid, repeated
// maxima and all-negative streams) into the ArgMax block and compares
// MAXIDX and MAXVAL with a software search that keeps the first maximum.
module tb_argmax;
  localparam int unsigned VAL_W = 48, IDX_W = 8;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, valid = 1'b0;
  logic signed [VAL_W-1:0] val = '0;
  logic [IDX_W-1:0] idx = '0;
  logic signed [VAL_W-1:0] max_val;
  logic [IDX_W-1:0] max_idx;

  argmax #(.VAL_W(VAL_W), .IDX_W(IDX_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 60; s++) begin
      automatic longint best_v = 0;
      automatic int best_i = 0;
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      for (int k = 0; k < 256; k++) begin
        automatic longint v;
        case (s % 3)
          0: v = longint'($urandom_range(40)) - 20;             // many ties
          1: v = -longint'($urandom) - 5;                         // all negative
          default: v = (longint'($urandom) << 12) - (longint'(1) << 43);
        endcase
        if (k == 0 || v > best_v) begin best_v = v; best_i = k; end
        valid = 1'b1;  val = VAL_W'(v);  idx = IDX_W'(k);
        @(negedge clk);
        valid = 1'b0;  val = VAL_W'($urandom);  // ignored: valid low
        if ($urandom_range(3) == 0) @(negedge clk);
      end
      checks++;
      if (max_idx != IDX_W'(best_i) || longint'(max_val) != best_v) begin
        failures++;
        $display("FAIL stream %0d got idx %0d val %0d exp idx %0d val %0d", s, max_idx, max_val, best_i, best_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
