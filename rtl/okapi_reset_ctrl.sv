// okapi_reset_ctrl: execution of the OkapiReset instruction.
//
// OkapiReset empties the trust domain.  So that no older load can still set a
// safe access bit afterwards, and no younger load can use a bit that is about
// to go, it executes only when it is the oldest instruction in the ROB (all
// older loads have committed) and no load translation is in flight in the
// TLB.  Younger loads are held back meanwhile by the ROB tracker's fence flag.
//
// Sequence (one FSM):
//   IDLE  : head_reset_pending && !tlb_busy  -> CLEAR
//   CLEAR : clear_safe = 1 for one cycle     -> DONE
//   DONE  : reset_done = 1 for one cycle (ROB tracker marks the OkapiReset
//           executed; the core may then commit it)  -> IDLE
// reset_count counts executed OkapiResets (saturating).  A squash of the
// whole ROB (flush) returns the FSM to IDLE; the ROB head is never squashed by
// a partial squash, so a reset under way is never cancelled otherwise.
//
// Waiting for the ROB head follows the design; the three-state handshake and
// the in-flight condition are this implementation's own choices.
//
// Tool note: rst_n also appears in the "disable iff" clauses of the
// assertions, which lint reports as a synchronous use of an asynchronous
// reset (SYNCASYNCNET).  That use is for simulation only.
module okapi_reset_ctrl #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             head_reset_pending,
  input  logic             tlb_busy,
  input  logic             flush,
  output logic             clear_safe,
  output logic             reset_done,
  output logic [CNT_W-1:0] reset_count
);

  typedef enum logic [1:0] {R_IDLE, R_CLEAR, R_DONE} rstate_e;
  rstate_e state_q;

  assign clear_safe = (state_q == R_CLEAR);
  assign reset_done = (state_q == R_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= R_IDLE;
      reset_count <= '0;
    end else if (flush) begin
      state_q <= R_IDLE;
    end else begin
      unique case (state_q)
        R_IDLE:  if (head_reset_pending && !tlb_busy) state_q <= R_CLEAR;
        R_CLEAR: state_q <= R_DONE;
        R_DONE: begin
          state_q <= R_IDLE;
          if (reset_count != '1) reset_count <= reset_count + 1'b1;
        end
        default: state_q <= R_IDLE;
      endcase
    end
  end

  // the safe access bits are cleared only for a pending OkapiReset at the head
  a_clear_for_head: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == R_IDLE && !flush && head_reset_pending && !tlb_busy) |=> clear_safe);

endmodule
