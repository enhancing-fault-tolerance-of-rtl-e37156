// top_control: the top-level finite state machine of the network.
//
// One inference runs IDLE -> RUN_LH -> RUN_LO -> FINISH -> IDLE.  A start
// pulse in IDLE pulses lh_start (the hidden layer samples the input byte)
// and am_clear (the ArgMax search restarts).  When the hidden layer reports
// lh_done the FSM pulses lo_start; when the output layer reports lo_done the
// ArgMax register already holds the winner, and out_load copies it to the
// output register.  done pulses in the clock after out_load, together with
// the new output.  A start outside IDLE is ignored.
//
// That a finite state machine sequences the blocks is the paper's; the
// states and the pulse handshake are this design's own.
module top_control (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic lh_done,
  input  logic lo_done,
  output logic lh_start,
  output logic lo_start,
  output logic am_clear,
  output logic out_load,
  output logic busy,
  output logic done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN_LH, S_RUN_LO, S_FINISH} state_e;
  state_e state, state_n;

  always_comb begin
    state_n  = state;
    lh_start = 1'b0;
    lo_start = 1'b0;
    am_clear = 1'b0;
    out_load = 1'b0;
    unique case (state)
      S_IDLE:   if (start)   begin state_n = S_RUN_LH; lh_start = 1'b1; am_clear = 1'b1; end
      S_RUN_LH: if (lh_done) begin state_n = S_RUN_LO; lo_start = 1'b1; end
      S_RUN_LO: if (lo_done) begin state_n = S_FINISH; out_load = 1'b1; end
      S_FINISH: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_n;
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_FINISH);

  // A layer may only report completion while the FSM waits for it.
  a_lh_done: assert property (@(posedge clk) disable iff (!rst_n) lh_done |-> state == S_RUN_LH);
  a_lo_done: assert property (@(posedge clk) disable iff (!rst_n) lo_done |-> state == S_RUN_LO);

endmodule
