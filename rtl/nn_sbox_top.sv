// nn_sbox_top: an integer neural network that computes f(x) = SBox(x xor k)
// for one secret key byte k, for fault tolerance rather than speed.
//
// Datapath, in the order the data flows:
//   lh_layer  hidden layer: 128 neurons, one per clock, AND-gated weight
//             sums of the 8 input bits plus bias, into a shifting buffer;
//   relu      ReLU on every buffer entry;
//   lo_layer  output layer: 256 linear neurons, 8 multipliers, 16
//             executions per neuron, emitting y_k in order k = 0 .. 255;
//   argmax    keeps the index of the largest y_k: the result byte;
//   top_control  FSM that runs the two layers in turn.
// Which byte the network produces for which input is decided entirely by the
// parameters, which are loaded through the prm_* port (one per clock, while
// idle): prm_sel picks the memory (see nn_pkg::prm_sel_e), prm_row the
// destination neuron, prm_col the source neuron, prm_data the value (its low
// bits).  With the parameters of a network trained to 100 % accuracy, y_out is
// SBox(x_in xor k), and a fault in any single parameter changes it only when
// that fault exceeds the margins the training enforced.
//
// Interface and timing: pulse start for one clock with x_in valid while busy
// is low.  done pulses N_HID + 17*N_OUT + 9 clocks later (4489 at the
// default sizes) and y_out then holds the result until the next done.
//
// The block structure, the layer sizes and the ArgMax decision follow the
// paper; the load port, widths and cycle timing are this design's own.
module nn_sbox_top
  import nn_pkg::*;
#(
  parameter int unsigned N_HID_P = N_HID,
  parameter int unsigned N_OUT_P = N_OUT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [7:0]  x_in,
  input  logic        prm_we,
  input  logic [1:0]  prm_sel,
  input  logic [7:0]  prm_row,
  input  logic [6:0]  prm_col,
  input  logic [15:0] prm_data,
  output logic        busy,
  output logic        done,
  output logic [7:0]  y_out
);

  localparam int unsigned JW = $clog2(N_HID_P);
  localparam int unsigned KW = $clog2(N_OUT_P);

  // ---------------- control ----------------
  logic lh_start, lo_start, am_clear, out_load;
  logic lh_busy, lh_done, lo_busy, lo_done;

  top_control u_ctrl (
    .clk, .rst_n, .start, .lh_done, .lo_done,
    .lh_start, .lo_start, .am_clear, .out_load, .busy, .done
  );

  // ---------------- hidden layer ----------------
  logic signed [H_W-1:0] hbuf [N_HID_P];

  lh_layer #(.N_HID_P(N_HID_P)) u_lh (
    .clk, .rst_n, .start(lh_start), .x(x_in),
    .w_we  (prm_we && prm_sel == PRM_W1),
    .w_row (prm_row[JW-1:0]),
    .w_col (prm_col[$clog2(N_IN)-1:0]),
    .w_data(prm_data[W1_W-1:0]),
    .b_we  (prm_we && prm_sel == PRM_B1),
    .b_row (prm_row[JW-1:0]),
    .b_data(prm_data[B1_W-1:0]),
    .busy(lh_busy), .done(lh_done), .hbuf
  );

  // ---------------- ReLU ----------------
  logic [A_W-1:0] hact [N_HID_P];

  relu #(.N(N_HID_P), .IN_W(H_W)) u_relu (.din(hbuf), .dout(hact));

  // ---------------- output layer ----------------
  logic                    y_valid;
  logic signed [ACC_W-1:0] y;
  logic [KW-1:0]           y_idx;

  lo_layer #(.N_HID_P(N_HID_P), .N_OUT_P(N_OUT_P)) u_lo (
    .clk, .rst_n, .start(lo_start), .h(hact),
    .w_we  (prm_we && prm_sel == PRM_W2),
    .w_row (prm_row[KW-1:0]),
    .w_col (prm_col[JW-1:0]),
    .w_data(prm_data[W2_W-1:0]),
    .b_we  (prm_we && prm_sel == PRM_B2),
    .b_row (prm_row[KW-1:0]),
    .b_data(prm_data[B2_W-1:0]),
    .busy(lo_busy), .done(lo_done), .y_valid, .y, .y_idx
  );

  // ---------------- ArgMax ----------------
  logic [KW-1:0]           max_idx;

  argmax #(.VAL_W(ACC_W), .IDX_W(KW)) u_am (
    .clk, .rst_n, .clear(am_clear), .valid(y_valid), .val(y), .idx(y_idx),
    .max_val(), .max_idx
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        y_out <= '0;
    else if (out_load) y_out <= 8'(max_idx);
  end

  // The parameters must not change under a running inference.
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) prm_we |-> !busy);
  // The layers only run inside an inference, and never both at once.
  a_layer_busy: assert property (@(posedge clk) disable iff (!rst_n) (lh_busy || lo_busy) |-> busy);
  a_one_layer:  assert property (@(posedge clk) disable iff (!rst_n) !(lh_busy && lo_busy));

endmodule
