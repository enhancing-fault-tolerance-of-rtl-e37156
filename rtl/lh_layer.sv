// lh_layer: the hidden layer (LH), computed one neuron per clock.
//
// For hidden neuron j the pre-activation is
//   h_j = sum_i x_i * w(1)[i][j] + b(1)[j],
// and since every input x_i is a single bit, the "multiplication" is an AND
// gate that passes weight w(1)[i][j] when bit i of x is 1 and zero
// otherwise.  The eight gated weights are added in a tree: a first SIMD DSP
// adder adds the pairs (AND7+AND3, AND6+AND2, AND5+AND1, AND4+AND0) in four
// lanes, a second one adds the four results pairwise in two lanes, and a
// small LUT adder adds the two 9-bit results and the bias.  The result is
// shifted into a buffer of N_HID entries: it enters at the top entry and the
// buffer shifts towards entry 0, so after N_HID iterations entry j holds h_j.
//
// Timing: start (one-clock pulse, ignored while busy) samples x.  Weight row
// j is read in the j-th clock after start, and the pipeline (row read, DSP
// adder, DSP adder, LUT adder into the buffer) is four clocks deep; done
// pulses N_HID + 4 clocks after start, and hbuf then stays unchanged until
// the next start.  Parameters are written through w_* and b_* while idle.
//
// The AND selection, the two DSP adders, the final LUT adder with 9-bit
// inputs, the shifting buffer and the 128 iterations are the paper's.  The
// pipeline registers, the lane pairing of the second adder and the widths of
// weights (7 bits) and bias (9 bits) are this design's choices.
module lh_layer
  import nn_pkg::*;
#(
  parameter int unsigned N_HID_P = N_HID
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [N_IN-1:0]             x,
  input  logic                        w_we,
  input  logic [$clog2(N_HID_P)-1:0]  w_row,
  input  logic [$clog2(N_IN)-1:0]     w_col,
  input  logic signed [W1_W-1:0]      w_data,
  input  logic                        b_we,
  input  logic [$clog2(N_HID_P)-1:0]  b_row,
  input  logic signed [B1_W-1:0]      b_data,
  output logic                        busy,
  output logic                        done,
  output logic signed [H_W-1:0]       hbuf [N_HID_P]
);

  localparam int unsigned JW = $clog2(N_HID_P);

  // ---------------- iteration counter (local control) ----------------
  logic [N_IN-1:0] x_q;
  logic [JW-1:0]   j;
  logic            issuing;
  logic            v0, v1, v2;          // pipeline valid: row read, adder 1, adder 2
  logic            l0, l1, l2;          // last-neuron tag along the pipeline

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q     <= '0;
      j       <= '0;
      issuing <= 1'b0;
    end else if (start && !busy) begin
      x_q     <= x;
      j       <= '0;
      issuing <= 1'b1;
    end else if (issuing) begin
      j       <= j + 1'b1;
      if (j == JW'(N_HID_P - 1)) issuing <= 1'b0;
    end
  end

  // ---------------- parameter memories ----------------
  logic signed [W1_W-1:0] wrow [N_IN];
  logic signed [B1_W-1:0] brow [1];

  weight_mem #(.ROWS(N_HID_P), .COLS(N_IN), .W(W1_W)) u_wmem (
    .clk, .wr_en(w_we), .wr_row(w_row), .wr_col(w_col), .wr_data(w_data),
    .rd_row(j), .rd_data(wrow)
  );

  weight_mem #(.ROWS(N_HID_P), .COLS(1), .W(B1_W)) u_bmem (
    .clk, .wr_en(b_we), .wr_row(b_row), .wr_col(1'b0), .wr_data(b_data),
    .rd_row(j), .rd_data(brow)
  );

  // ---------------- AND gates and first DSP adder ----------------
  logic signed [W1_W-1:0] gated [N_IN];
  logic signed [W1_W-1:0] a1 [4], b1 [4];
  logic signed [W1_W:0]   s1 [4];

  always_comb begin
    for (int i = 0; i < N_IN; i++) gated[i] = x_q[i] ? wrow[i] : '0;
    for (int i = 0; i < 4; i++) begin
      a1[i] = gated[i+4];
      b1[i] = gated[i];
    end
  end

  dsp_simd_adder #(.LANES(4), .IN_W(W1_W)) u_add1 (
    .clk, .ce(v0), .a(a1), .b(b1), .sum(s1)
  );

  // ---------------- second DSP adder ----------------
  logic signed [W1_W:0]   a2 [2], b2 [2];
  logic signed [W1_W+1:0] s2 [2];

  always_comb begin
    a2[0] = s1[2];  b2[0] = s1[0];
    a2[1] = s1[3];  b2[1] = s1[1];
  end

  dsp_simd_adder #(.LANES(2), .IN_W(W1_W+1)) u_add2 (
    .clk, .ce(v1), .a(a2), .b(b2), .sum(s2)
  );

  // ---------------- bias alignment and pipeline control ----------------
  logic signed [B1_W-1:0] bias_d1, bias_d2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v0, v1, v2} <= '0;
      {l0, l1, l2} <= '0;
      bias_d1      <= '0;
      bias_d2      <= '0;
      done         <= 1'b0;
    end else begin
      v0 <= issuing;
      v1 <= v0;
      v2 <= v1;
      l0 <= issuing && (j == JW'(N_HID_P - 1));
      l1 <= l0;
      l2 <= l1;
      if (v0) bias_d1 <= brow[0];
      if (v1) bias_d2 <= bias_d1;
      done <= v2 && l2;
    end
  end

  // ---------------- final LUT adder and shifting buffer ----------------
  logic signed [H_W-1:0] hsum;

  assign hsum = H_W'(s2[0]) + H_W'(s2[1]) + H_W'(bias_d2);

  always_ff @(posedge clk) begin
    if (v2) begin
      hbuf[N_HID_P-1] <= hsum;
      for (int k = 0; k < N_HID_P - 1; k++) hbuf[k] <= hbuf[k+1];
    end
  end

  assign busy = issuing || v0 || v1 || v2;

endmodule
