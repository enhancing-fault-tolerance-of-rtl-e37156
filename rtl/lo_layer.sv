// lo_layer: the output layer (LO), one output neuron at a time.
//
// For output neuron k the linear output is
//   y_k = sum_j h_j * w(2)[j][k] + b(2)[k]
// over the N_HID ReLU activations h_j.  N_MUL multipliers work in parallel:
// in execution t (t = 0 .. N_HID/N_MUL-1) multiplier g receives, through a
// pair of multiplexers, activation h[G*g + t] and weight w(2)[G*g + t][k],
// where G = N_HID/N_MUL (16 at the default sizes).  The N_MUL products are
// summed in a binary adder tree and the tree output is accumulated over the
// executions of the neuron, starting from the bias.  The bias is read with
// the weight row and travels down the pipeline with the neuron's tags, so
// the next row read may overwrite the memory output early (this matters when
// a neuron has only one or two executions, i.e. N_HID_P <= 2*N_MUL_P).  A counter supplies the
// neuron index k, which addresses the weight and bias memories and is passed
// on with y_k to the ArgMax block.
//
// Timing: start (one-clock pulse, ignored while busy) begins a pass.  Each
// neuron takes one clock to read its weight row and bias, then G clocks of
// executions; the multiplier, the adder tree and the accumulator are each
// registered, so they overlap with the next neuron.  y_valid pulses once per
// neuron with y and y_idx; done pulses one clock after the last y, i.e.
// (G+1)*N_OUT + 4 clocks after start.  h must stay stable during a pass.
//
// From the paper: 8 multipliers of 20-bit operands fed by multiplexers, 16
// executions per neuron, 256 iterations, the adder tree, the counter.  This
// design's own: the accumulator and where the bias enters (the block
// diagram draws neither), the pipeline registers, and the 8-bit weight,
// 16-bit bias and 48-bit accumulator widths.
module lo_layer
  import nn_pkg::*;
#(
  parameter int unsigned N_HID_P = N_HID,
  parameter int unsigned N_OUT_P = N_OUT,
  parameter int unsigned N_MUL_P = N_MUL
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [A_W-1:0]              h [N_HID_P],
  input  logic                        w_we,
  input  logic [$clog2(N_OUT_P)-1:0]  w_row,
  input  logic [$clog2(N_HID_P)-1:0]  w_col,
  input  logic signed [W2_W-1:0]      w_data,
  input  logic                        b_we,
  input  logic [$clog2(N_OUT_P)-1:0]  b_row,
  input  logic signed [B2_W-1:0]      b_data,
  output logic                        busy,
  output logic                        done,
  output logic                        y_valid,
  output logic signed [ACC_W-1:0]     y,
  output logic [$clog2(N_OUT_P)-1:0]  y_idx
);

  localparam int unsigned G  = N_HID_P / N_MUL_P;   // executions per neuron
  localparam int unsigned KW = $clog2(N_OUT_P);
  localparam int unsigned TW = (G > 1) ? $clog2(G) : 1;

  // ---------------- COUNTER and local control ----------------
  logic          running;
  logic          reading;          // 1: row-read clock, 0: execution clock
  logic [KW-1:0] k;
  logic [TW-1:0] t;
  logic          exec;
  logic          t_last;

  assign exec   = running && !reading;
  assign t_last = (t == TW'(G - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      reading <= 1'b0;
      k       <= '0;
      t       <= '0;
    end else if (start && !busy) begin
      running <= 1'b1;
      reading <= 1'b1;
      k       <= '0;
      t       <= '0;
    end else if (running) begin
      if (reading) begin
        reading <= 1'b0;
        t       <= '0;
      end else begin
        t <= t + 1'b1;
        if (t_last) begin
          reading <= 1'b1;
          if (k == KW'(N_OUT_P - 1)) running <= 1'b0;
          else                       k <= k + 1'b1;
        end
      end
    end
  end

  // ---------------- weight and bias memories ----------------
  logic signed [W2_W-1:0] wrow [N_HID_P];
  logic signed [B2_W-1:0] brow [1];

  weight_mem #(.ROWS(N_OUT_P), .COLS(N_HID_P), .W(W2_W)) u_wmem (
    .clk, .wr_en(w_we), .wr_row(w_row), .wr_col(w_col), .wr_data(w_data),
    .rd_row(k), .rd_data(wrow)
  );

  weight_mem #(.ROWS(N_OUT_P), .COLS(1), .W(B2_W)) u_bmem (
    .clk, .wr_en(b_we), .wr_row(b_row), .wr_col(1'b0), .wr_data(b_data),
    .rd_row(k), .rd_data(brow)
  );

  // ---------------- multiplexers and multipliers ----------------
  logic signed [MUL_W-1:0]   mux_l [N_MUL_P];
  logic signed [MUL_W-1:0]   mux_w [N_MUL_P];
  logic signed [2*MUL_W-1:0] prod  [N_MUL_P];

  always_comb begin
    for (int g = 0; g < N_MUL_P; g++) begin
      mux_l[g] = MUL_W'(h[G*g + int'(t)]);               // zero-extended activation
      mux_w[g] = MUL_W'(wrow[G*g + int'(t)]);            // sign-extended weight
    end
  end

  for (genvar g = 0; g < N_MUL_P; g++) begin : g_mul
    mul20 #(.W(MUL_W)) u_mul (.clk, .ce(exec), .a(mux_l[g]), .b(mux_w[g]), .p(prod[g]));
  end

  // ---------------- adder tree ----------------
  // Heap-ordered nodes: leaves N_MUL_P-1 .. 2*N_MUL_P-2, root 0.
  logic signed [ACC_W-1:0] node [2*N_MUL_P-1];

  always_comb begin
    for (int g = 0; g < N_MUL_P; g++) node[N_MUL_P-1+g] = ACC_W'(prod[g]);
    for (int n = N_MUL_P - 2; n >= 0; n--) node[n] = node[2*n+1] + node[2*n+2];
  end

  // ---------------- pipeline tags, tree register, accumulator ----------------
  logic                    pv, tv;          // product / tree register valid
  logic                    pfirst, plast, tfirst, tlast;
  logic [KW-1:0]           pk, tk;
  logic signed [B2_W-1:0]  pbias, tbias;    // bias travels with its neuron's tags
  logic signed [ACC_W-1:0] tsum, acc, acc_next;

  assign acc_next = (tfirst ? ACC_W'(tbias) : acc) + tsum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {pv, tv, pfirst, plast, tfirst, tlast} <= '0;
      pk <= '0;  tk <= '0;
      pbias <= '0;  tbias <= '0;
      tsum <= '0;  acc <= '0;
      y_valid <= 1'b0;  y <= '0;  y_idx <= '0;
      done <= 1'b0;
    end else begin
      pv     <= exec;
      pfirst <= exec && (t == '0);
      plast  <= exec && t_last;
      pk     <= k;
      pbias  <= brow[0];
      tv     <= pv;
      tfirst <= pfirst;
      tlast  <= plast;
      tk     <= pk;
      tbias  <= pbias;
      if (pv) tsum <= node[0];
      if (tv) acc <= acc_next;
      y_valid <= tv && tlast;
      if (tv && tlast) begin
        y     <= acc_next;
        y_idx <= tk;
      end
      done <= y_valid && (y_idx == KW'(N_OUT_P - 1));
    end
  end

  assign busy = running || pv || tv || y_valid;

endmodule
