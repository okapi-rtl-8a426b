// okapi_wakeup: rescheduling of loads held back by Okapi.
//
// Loads that Okapi delays wait in the load queue; this block decides, every
// cycle and for every load queue entry, whether the reason for the delay is
// gone so that the load may be scheduled again:
//   LQ_BLK_SUSP   suspicious_load flag cleared (the suspicious instruction
//                 before it is no longer speculative).  The load may then go
//                 to the TLB while still speculative.
//   LQ_BLK_UNSAFE the load became safe (passed by the visibility point), so
//                 the TLB will translate it and set the safe access bit.
//   LQ_BLK_FENCE  no older OkapiReset / OkapiLoad is pending any more, or the
//                 load became safe.
//   LQ_BLK_MISS   a TLB refill arrived.
// Any load that becomes safe is rescheduled whatever it waits for except a
// TLB refill.  With okapi_en low every Okapi delay is lifted at once.
// Purely combinational: wake[i] is applied by the load queue at the next
// clock edge.
//
// The wake-up conditions follow the design's description of the extended
// issue queue; placing the waiting loads in the load queue, rather than
// re-inserting them into a separate issue queue, is this implementation's
// choice.
module okapi_wakeup
  import okapi_pkg::*;
#(
  parameter int unsigned LQ_N  = DEF_LQ_ENTRIES,
  parameter int unsigned ROB_N = DEF_ROB_ENTRIES,
  localparam int unsigned IW = $clog2(ROB_N)
) (
  input  logic                      okapi_en,
  input  lq_state_e [LQ_N-1:0]      lq_state,
  input  logic [LQ_N-1:0][IW-1:0]   lq_rob_idx,
  input  logic [ROB_N-1:0]          unsafe,
  input  logic [ROB_N-1:0]          susp_load,
  input  logic [ROB_N-1:0]          fence_blk,
  input  logic                      refill,
  output logic [LQ_N-1:0]           wake
);

  always_comb begin
    for (int i = 0; i < LQ_N; i++) begin
      logic safe;
      safe = !unsafe[lq_rob_idx[i]];
      unique case (lq_state[i])
        LQ_BLK_SUSP:   wake[i] = !okapi_en || safe || !susp_load[lq_rob_idx[i]];
        LQ_BLK_UNSAFE: wake[i] = !okapi_en || safe;
        LQ_BLK_FENCE:  wake[i] = !okapi_en || safe || !fence_blk[lq_rob_idx[i]];
        LQ_BLK_MISS:   wake[i] = refill;
        default:       wake[i] = 1'b0;
      endcase
    end
  end

endmodule
