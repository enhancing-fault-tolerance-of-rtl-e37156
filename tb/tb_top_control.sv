// tb_top_control: drives the top-level FSM with layer-done pulses after
// random delays and checks the order and timing of its control pulses:
// lh_start and am_clear with an accepted start, lo_start with lh_done,
// out_load with lo_done, done one clock after out_load, busy in between,
// and that start is ignored while busy.
module tb_top_control;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, lh_done = 1'b0, lo_done = 1'b0;
  logic lh_start, lo_start, am_clear, out_load, busy, done;

  top_control dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !done && !lh_start && !lo_start && !out_load, "idle after reset");
    for (int n = 0; n < 100; n++) begin
      automatic int d1 = $urandom_range(1, 12), d2 = $urandom_range(1, 12);
      start = 1'b1;
      #1 check(lh_start && am_clear && !lo_start && !out_load, "lh_start/am_clear with start");
      @(negedge clk);
      start = 1'b0;
      check(busy && !lh_start, "busy after start");
      for (int c = 0; c < d1; c++) begin
        start = (c == 0);                    // start while busy: ignored
        #1 check(busy && !lh_start && !lo_start && !out_load && !done, "waiting for LH");
        @(negedge clk);
      end
      start = 1'b0;
      lh_done = 1'b1;
      #1 check(lo_start && !out_load, "lo_start with lh_done");
      @(negedge clk);
      lh_done = 1'b0;
      for (int c = 0; c < d2; c++) begin
        #1 check(busy && !lo_start && !out_load && !done, "waiting for LO");
        @(negedge clk);
      end
      lo_done = 1'b1;
      #1 check(out_load && !done, "out_load with lo_done");
      @(negedge clk);
      lo_done = 1'b0;
      #1 check(done && busy && !out_load, "done one clock after out_load");
      @(negedge clk);
      check(!done && !busy, "back to idle");
      if (n % 2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
