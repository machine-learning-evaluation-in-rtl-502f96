// sync_controller: the Sync controller FSM of an APP (APU clock domain).
//
// It selects when the APU may work on the next event. Each input source's
// synchronization register reports src_ready when its oldest unread BRAM holds
// a complete event. Because sources deliver events in order, the oldest slot
// of every source belongs to the same bunch crossing, so waiting until all of
// them are ready aligns sources that arrive with skew. The controller also
// waits while the downstream buffer reports dn_full. Then it holds
// event_ready high (RUN) until the APU pulses event_done, pulses src_release
// for one cycle so every source frees its BRAM (RELEASE), and returns to IDLE.
//
// stall_skew is high in IDLE while some but not all sources are ready;
// stall_full is high in IDLE while all are ready but the downstream buffer is
// full. Both are status outputs only.
//
// The controller's existence and purpose (an FSM that drives the SRs' BRAM
// selection so the APU reads the right event despite skew) are from the paper;
// the three states and the in-order alignment rule are choices of this design.
module sync_controller #(
  parameter int unsigned N_SRC = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_SRC-1:0] src_ready,
  input  logic             dn_full,
  output logic             event_ready,
  input  logic             event_done,
  output logic             src_release,
  output logic             stall_skew,
  output logic             stall_full
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_RELEASE} state_e;
  state_e state;

  logic all_ready;
  assign all_ready = &src_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE:    if (all_ready && !dn_full) state <= S_RUN;
        S_RUN:     if (event_done)            state <= S_RELEASE;
        S_RELEASE:                            state <= S_IDLE;
        default:                              state <= S_IDLE;
      endcase
    end
  end

  assign event_ready = (state == S_RUN);
  assign src_release = (state == S_RELEASE);
  assign stall_skew  = (state == S_IDLE) && (|src_ready) && !all_ready;
  assign stall_full  = (state == S_IDLE) && all_ready && dn_full;

  // A completion can only be reported for an event that was started.
  a_done_in_run: assert property (@(posedge clk) disable iff (!rst_n)
                                  event_done |-> state == S_RUN);
endmodule
