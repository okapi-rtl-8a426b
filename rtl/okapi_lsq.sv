// okapi_lsq: load queue with Okapi's gate in front of the DTLB.
//
// Loads (ordinary loads and OkapiLoads) get a load queue entry in program
// order at dispatch, receive their virtual address from the address
// generation unit, and are then sent to the DTLB one per cycle, oldest ready
// load first.  Before a load goes to the TLB the queue checks the ROB
// tracker's flags for it:
//   suspicious_load set  -> the load is parked in LQ_BLK_SUSP and does not
//                           reach the TLB at all (Spectre-BTB gadget guard);
//   fence_blk set        -> parked in LQ_BLK_FENCE behind an unexecuted
//                           OkapiReset / OkapiLoad;
//   otherwise            -> TLB lookup, marked unsafe if the ROB says so.
// The TLB answer one cycle later moves the load to LQ_DONE (hit: a data cache
// request is issued and the ROB is told the load can no longer fault; fault:
// the fault is reported), LQ_BLK_UNSAFE (speculative, safe access bit clear)
// or LQ_BLK_MISS (page walk).  Parked loads return to LQ_READY when the
// wake-up block says so.  commit_cnt frees that many entries at the head
// (the loads committed by the ROB); a squash drops every load younger than
// the squash point.  A DTLB response arriving in a squash cycle still takes
// effect for a load that survives the squash.  With okapi_en low the gate
// lets every load through.
//
// Interface timing: alloc is accepted when alloc_ready (room for DISPATCH_W
// loads); alloc_lq_idx is valid in the same cycle.  tlb_req is combinational
// from the queue state; tlb_resp_* must arrive exactly one cycle after a
// request.  ld_res_*, dc_req_* and fault_* are pulses in the response cycle.
//
// Blocking suspicious_load loads in the LSQ follows the design; holding the
// parked loads in the load queue and the per-entry state encoding are this
// implementation's own.  Store handling is left to the core (the design does
// not change stores).
//
// Tool note: rst_n also appears in the "disable iff" clauses of the
// assertions, which lint reports as a synchronous use of an asynchronous
// reset (SYNCASYNCNET).  That use is for simulation only.
module okapi_lsq
  import okapi_pkg::*;
#(
  parameter int unsigned N          = DEF_LQ_ENTRIES,
  parameter int unsigned ROB_N      = DEF_ROB_ENTRIES,
  parameter int unsigned DISPATCH_W = DEF_DISPATCH_W,
  parameter int unsigned COMMIT_W   = DEF_COMMIT_W,
  localparam int unsigned LW = $clog2(N),
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned IW = $clog2(ROB_N),
  localparam int unsigned KW = $clog2(COMMIT_W + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           okapi_en,
  // allocation at dispatch
  input  logic [DISPATCH_W-1:0]          alloc_valid,
  input  logic [DISPATCH_W-1:0][IW-1:0]  alloc_rob_idx,
  input  logic [DISPATCH_W-1:0]          alloc_okapi,
  output logic                           alloc_ready,
  output logic [DISPATCH_W-1:0][LW-1:0]  alloc_lq_idx,
  // address generation
  input  logic                           agu_valid,
  input  logic [LW-1:0]                  agu_lq_idx,
  input  logic [VADDR_W-1:0]             agu_vaddr,
  // ROB tracker flags
  input  logic [IW-1:0]                  rob_head,
  input  logic [ROB_N-1:0]               unsafe,
  input  logic [ROB_N-1:0]               susp_load,
  input  logic [ROB_N-1:0]               fence_blk,
  // wake-up
  input  logic [N-1:0]                   wake,
  output lq_state_e [N-1:0]              lq_state,
  output logic [N-1:0][IW-1:0]           lq_rob_idx,
  // DTLB
  output tlb_req_t                       tlb_req,
  input  logic                           tlb_resp_valid,
  input  tlb_resp_e                      tlb_resp,
  input  logic [PPN_W-1:0]               tlb_resp_ppn,
  output logic                           tlb_busy,
  // results
  output logic                           ld_res_valid,
  output logic [IW-1:0]                  ld_res_rob_idx,
  output logic                           dc_req_valid,
  output logic [LW-1:0]                  dc_req_lq_idx,
  output logic [IW-1:0]                  dc_req_rob_idx,
  output logic [PADDR_W-1:0]             dc_req_paddr,
  output logic                           dc_req_unsafe,
  output logic                           fault_valid,
  output logic [IW-1:0]                  fault_rob_idx,
  // commit / squash
  input  logic [KW-1:0]                  commit_cnt,
  input  logic                           squash_valid,
  input  logic                           squash_all,
  input  logic [IW-1:0]                  squash_rob_idx,
  // events (one-cycle pulses)
  output logic                           ev_blk_susp,
  output logic                           ev_blk_fence,
  output logic                           ev_blk_unsafe,
  output logic                           ev_miss,
  output logic                           ev_spec_hit,
  output logic [CW-1:0]                  count
);

  function automatic logic [LW-1:0] lwrap(input logic [LW:0] a);
    return (a >= (LW+1)'(N)) ? LW'(a - (LW+1)'(N)) : LW'(a);
  endfunction
  function automatic logic [IW-1:0] rob_age(input logic [IW-1:0] r, input logic [IW-1:0] h);
    return (r >= h) ? IW'(r - h) : IW'((IW+1)'(r) + (IW+1)'(ROB_N) - (IW+1)'(h));
  endfunction

  lq_state_e [N-1:0]            state_q;
  logic [N-1:0]                 valid_q;
  logic [N-1:0][IW-1:0]         rob_q;
  logic [N-1:0]                 okapi_q;
  logic [N-1:0][VADDR_W-1:0]    va_q;
  logic [LW-1:0]                head_q, tail_q;
  logic [CW-1:0]                count_q;
  logic                         infl_v_q, infl_unsafe_q;
  logic [LW-1:0]                infl_idx_q;

  assign lq_state   = state_q;
  assign lq_rob_idx = rob_q;
  assign count      = count_q;
  assign tlb_busy   = infl_v_q;
  assign alloc_ready = (count_q + CW'(DISPATCH_W)) <= CW'(N);

  // lane -> queue slot: loads take consecutive slots in lane order
  logic [$clog2(DISPATCH_W+1)-1:0] n_alloc;
  always_comb begin
    n_alloc = '0;
    for (int l = 0; l < DISPATCH_W; l++) begin
      alloc_lq_idx[l] = lwrap((LW+1)'(tail_q) + (LW+1)'(n_alloc));
      if (alloc_valid[l]) n_alloc = n_alloc + 1'b1;
    end
  end

  // ------------------------------------------------ oldest ready selection
  logic          sel_v;
  logic [LW-1:0] sel_idx;
  always_comb begin
    logic [LW-1:0] idx;
    sel_v   = 1'b0;
    sel_idx = head_q;
    for (int k = N - 1; k >= 0; k--) begin
      idx = lwrap((LW+1)'(head_q) + (LW+1)'(k));
      if (CW'(k) < count_q && valid_q[idx] && state_q[idx] == LQ_READY) begin
        sel_v   = 1'b1;
        sel_idx = idx;
      end
    end
  end

  // gate decision for the selected load
  logic          gate_susp, gate_fence, do_issue;
  logic [IW-1:0] sel_rob;
  assign sel_rob    = rob_q[sel_idx];
  assign gate_susp  = sel_v && okapi_en && susp_load[sel_rob];
  assign gate_fence = sel_v && okapi_en && !gate_susp && fence_blk[sel_rob];
  assign do_issue   = sel_v && !gate_susp && !gate_fence && !squash_valid;

  always_comb begin
    tlb_req            = '0;
    tlb_req.valid      = do_issue;
    tlb_req.vpn        = vpn_of(va_q[sel_idx]);
    tlb_req.unsafe     = unsafe[sel_rob];
    tlb_req.okapi_load = okapi_q[sel_idx];
  end

  // ------------------------------------------------ TLB response decoding
  // A response in a squash cycle still counts if its load survives the
  // squash (it is older than the squashing instruction).
  logic resp_live, infl_killed;
  assign infl_killed = squash_valid && (squash_all ||
                       rob_age(rob_q[infl_idx_q], rob_head) > rob_age(squash_rob_idx, rob_head));
  assign resp_live = infl_v_q && tlb_resp_valid && !infl_killed &&
                     valid_q[infl_idx_q] && state_q[infl_idx_q] == LQ_INFLIGHT;

  always_comb begin
    ld_res_valid   = resp_live && tlb_resp == TLB_HIT;
    ld_res_rob_idx = rob_q[infl_idx_q];
    dc_req_valid   = resp_live && tlb_resp == TLB_HIT;
    dc_req_lq_idx  = infl_idx_q;
    dc_req_rob_idx = rob_q[infl_idx_q];
    dc_req_paddr   = {tlb_resp_ppn, va_q[infl_idx_q][PAGE_SHIFT-1:0]};
    dc_req_unsafe  = infl_unsafe_q;
    fault_valid    = resp_live && tlb_resp == TLB_FAULT;
    fault_rob_idx  = rob_q[infl_idx_q];
    ev_blk_unsafe  = resp_live && tlb_resp == TLB_BLOCKED;
    ev_miss        = resp_live && tlb_resp == TLB_MISS;
    ev_spec_hit    = resp_live && tlb_resp == TLB_HIT && infl_unsafe_q;
    ev_blk_susp    = gate_susp && !squash_valid;
    ev_blk_fence   = gate_fence && !squash_valid;
  end

  // ------------------------------------------------ squash: surviving loads
  logic [CW-1:0] keep_n;
  always_comb begin
    logic [LW-1:0] idx;
    keep_n = '0;
    for (int k = 0; k < N; k++) begin
      idx = lwrap((LW+1)'(head_q) + (LW+1)'(k));
      if (CW'(k) < count_q && !squash_all &&
          rob_age(rob_q[idx], rob_head) <= rob_age(squash_rob_idx, rob_head) &&
          keep_n == CW'(k))
        keep_n = keep_n + 1'b1;
    end
  end

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= {N{LQ_ADDR_WAIT}};
      valid_q   <= '0;
      rob_q     <= '0;
      okapi_q   <= '0;
      va_q      <= '0;
      head_q    <= '0;
      tail_q    <= '0;
      count_q   <= '0;
      infl_v_q  <= 1'b0;
      infl_unsafe_q <= 1'b0;
      infl_idx_q    <= '0;
    end else begin
      // wake-up of parked loads
      for (int i = 0; i < N; i++)
        if (valid_q[i] && wake[i]) state_q[i] <= LQ_READY;
      // address generation
      if (agu_valid && valid_q[agu_lq_idx] && state_q[agu_lq_idx] == LQ_ADDR_WAIT) begin
        va_q[agu_lq_idx]    <= agu_vaddr;
        state_q[agu_lq_idx] <= LQ_READY;
      end
      // gate / issue
      infl_v_q <= do_issue;
      if (do_issue) begin
        infl_idx_q         <= sel_idx;
        infl_unsafe_q      <= unsafe[sel_rob];
        state_q[sel_idx]   <= LQ_INFLIGHT;
      end
      if (gate_susp)  state_q[sel_idx] <= LQ_BLK_SUSP;
      if (gate_fence) state_q[sel_idx] <= LQ_BLK_FENCE;
      // TLB response
      if (resp_live) begin
        unique case (tlb_resp)
          TLB_HIT, TLB_FAULT: state_q[infl_idx_q] <= LQ_DONE;
          TLB_BLOCKED:        state_q[infl_idx_q] <= LQ_BLK_UNSAFE;
          TLB_MISS:           state_q[infl_idx_q] <= LQ_BLK_MISS;
          default:            state_q[infl_idx_q] <= LQ_READY;
        endcase
      end
      if (squash_valid) begin
        for (int k = 0; k < N; k++)
          if (CW'(k) >= keep_n) valid_q[lwrap((LW+1)'(head_q) + (LW+1)'(k))] <= 1'b0;
        tail_q   <= lwrap((LW+1)'(head_q) + (LW+1)'(keep_n));
        count_q  <= keep_n;
        infl_v_q <= 1'b0;
      end else begin
        for (int c = 0; c < COMMIT_W; c++)
          if (KW'(c) < commit_cnt) valid_q[lwrap((LW+1)'(head_q) + (LW+1)'(c))] <= 1'b0;
        for (int l = 0; l < DISPATCH_W; l++)
          if (alloc_valid[l] && alloc_ready) begin
            valid_q[alloc_lq_idx[l]] <= 1'b1;
            state_q[alloc_lq_idx[l]] <= LQ_ADDR_WAIT;
            rob_q[alloc_lq_idx[l]]   <= alloc_rob_idx[l];
            okapi_q[alloc_lq_idx[l]] <= alloc_okapi[l];
          end
        head_q <= lwrap((LW+1)'(head_q) + (LW+1)'(commit_cnt));
        if (alloc_ready) begin
          tail_q  <= lwrap((LW+1)'(tail_q) + (LW+1)'(n_alloc));
          count_q <= count_q - CW'(commit_cnt) + CW'(n_alloc);
        end else begin
          count_q <= count_q - CW'(commit_cnt);
        end
      end
    end
  end

  // committed loads must have been translated
  a_commit_done: assert property (@(posedge clk) disable iff (!rst_n)
    (commit_cnt != '0) |-> (state_q[head_q] == LQ_DONE));
  a_commit_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    CW'(commit_cnt) <= count_q);

endmodule
