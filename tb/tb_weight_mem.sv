// tb_weight_mem: checks the parameter memory against a shadow array.
// Random single-parameter writes interleaved with row reads; every read row
// must equal the shadow one clock after its address, including a row written
// in the same clock as its read is issued (old contents expected).
module tb_weight_mem;
  localparam int unsigned ROWS = 16, COLS = 8, W = 7;

  logic clk = 1'b0;
  logic wr_en = 1'b0;
  logic [3:0] wr_row = '0, rd_row = '0;
  logic [2:0] wr_col = '0;
  logic signed [W-1:0] wr_data = '0;
  logic signed [W-1:0] rd_data [COLS];

  weight_mem #(.ROWS(ROWS), .COLS(COLS), .W(W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic signed [W-1:0] shadow [ROWS][COLS];
  logic signed [W-1:0] expect_row [COLS];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every location
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        wr_en = 1;  wr_row = 4'(r);  wr_col = 3'(c);  wr_data = W'($urandom);
        shadow[r][c] = wr_data;
      end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      rd_row = 4'($urandom);
      expect_row = shadow[rd_row];
      wr_en = 1'($urandom);
      wr_row = 4'($urandom);  wr_col = 3'($urandom);  wr_data = W'($urandom);
      if (wr_en) shadow[wr_row][wr_col] = wr_data;
      @(negedge clk);
      wr_en = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (rd_data[c] !== expect_row[c]) begin
          failures++;
          $display("FAIL row %0d col %0d got %0d exp %0d", rd_row, c, rd_data[c], expect_row[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
